// tb_carus_csr_unit: unit test of the NM-Carus vl/vtype unit.
//
// Applies random vset requests: explicit AVL values below, at and above
// VLMAX, the "AVL = VLMAX" form and the "keep vl" form, for each element
// width and for unsupported vsew codes. The expected vl is worked out here
// as min(AVL, 1024 bytes / element size), clipped again when only the width
// changes. Checks the value returned to the eCPU in the same cycle and the
// vl/sew state from the next cycle on, and that the state holds while the
// unit is not executing.
module tb_carus_csr_unit;
  import nmc_pkg::*;
  import carus_pkg::*;

  logic clk = 0, rst_n = 0, exec = 0;
  vinstr_t ins;
  logic [31:0] res, vl;
  sew_e sew;
  int checks = 0, failures = 0;

  carus_csr_unit dut (.clk_i(clk), .rst_ni(rst_n), .exec_i(exec), .instr_i(ins),
                      .res_o(res), .vl_o(vl), .sew_o(sew));

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int unsigned m_vl, vlmax, want;
    sew_e m_sew;
    m_vl = 0;
    m_sew = SEW32;
    ins = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    check(vl == 0 && sew == SEW32, "reset state");
    for (int n = 0; n < 2000; n++) begin
      logic [2:0] vsew;
      int kind;
      sew_e s;
      vsew = 3'($urandom_range(0, 7));
      kind = $urandom_range(0, 3);
      s = (vsew == 3'd0) ? SEW8 : (vsew == 3'd1) ? SEW16 : SEW32;
      vlmax = (s == SEW8) ? 1024 : (s == SEW16) ? 512 : 256;
      ins = '0;
      ins.vtype = {5'd0, vsew, 3'($urandom)};
      ins.avl = (kind == 3) ? $urandom : $urandom_range(0, 1100);
      ins.avl_max = (kind == 1);
      ins.keep_vl = (kind == 2);
      if (kind == 1)      want = vlmax;
      else if (kind == 2) want = (m_vl < vlmax) ? m_vl : vlmax;
      else                want = (ins.avl < vlmax) ? ins.avl : vlmax;
      exec = 1;
      #1;
      check(res == want, $sformatf("returned vl %0d expected %0d", res, want));
      @(posedge clk);
      #1 exec = 0;
      m_vl = want; m_sew = s;
      check(vl == m_vl && sew == m_sew, $sformatf("state vl %0d expected %0d", vl, m_vl));
      ins.avl = $urandom;
      repeat ($urandom_range(0, 2)) @(posedge clk);
      check(vl == m_vl && sew == m_sew, "state holds without exec");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
