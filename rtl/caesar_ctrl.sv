// caesar_ctrl: instruction decoder and ALU scheduler of NM-Caesar.
//
// In computing mode each bus write is an instruction (format in caesar_pkg).
// As the source describes, an instruction passes four phases over a 2-stage
// pipeline: (1) decode: the write is granted and its source and destination
// addresses are buffered; (2) fetch: the two source words are read, both in
// the same cycle when they sit in different banks, one after the other when
// they share a bank; (3) the operands arrive and the ALU operation is started,
// while the next bus instruction may already be decoded; (4) two cycles
// later the ALU result is written to the destination word. The bus grant is
// low while the fetch stage is busy, which gives one instruction every two
// cycles, or every three when both sources share a bank, as the source
// states.
//
// Hazards (not discussed by the source; handled here): a fetch waits while
// one of its source words is the destination of an instruction still in the
// ALU, and a fetch read yields its bank to a writeback in the same cycle.
// Bank 0 holds word addresses 0..4095 and bank 1 4096..8191 (the split is
// this design's choice). CSRW sets the element width, taken per instruction
// at decode, and is done in the decode cycle.
//
// Lint note: rst_ni is reported as both synchronous and asynchronous only because the
// handshake assertion below uses it in 'disable iff'; the flops use it asynchronously.
module caesar_ctrl
  import nmc_pkg::*;
  import caesar_pkg::*;
#(
  parameter int unsigned BANK_WORDS = 4096
) (
  input  logic                         clk_i,
  input  logic                         rst_ni,
  // instruction stream: bus writes in computing mode
  input  logic                         instr_valid_i,
  input  logic [WADDR_W-1:0]           instr_dst_i,
  input  logic [31:0]                  instr_data_i,
  output logic                         instr_gnt_o,
  // access to the two banks
  output logic [1:0]                   bank_req_o,
  output logic [1:0]                   bank_we_o,
  output logic [$clog2(BANK_WORDS)-1:0] bank_addr_o [2],
  output logic [31:0]                  bank_wdata_o,
  input  logic [31:0]                  bank_rdata_i [2],
  // ALU
  output logic                         alu_valid_o,
  output caesar_op_e                   alu_op_o,
  output sew_e                         alu_sew_o,
  output logic [31:0]                  alu_a_o,
  output logic [31:0]                  alu_b_o,
  input  logic                         alu_valid_i,
  input  logic [31:0]                  alu_result_i,
  output logic                         busy_o
);

  localparam int unsigned RW = $clog2(BANK_WORDS);
  typedef logic [WADDR_W-1:0] waddr_t;

  function automatic logic bank_of(waddr_t a);
    return a[WADDR_W-1];
  endfunction

  // ------------------------------------------------------------ decode
  sew_e       sew_q;
  caesar_op_e dec_op;
  assign dec_op = caesar_op_e'(instr_data_i[31:26]);

  // ------------------------------------------------------------ fetch stage
  logic       f_v_q, f_need1_q, f_need2_q;
  caesar_op_e f_op_q;
  sew_e       f_sew_q;
  waddr_t     f_src1_q, f_src2_q, f_dst_q;

  // ------------------------------------------------------------ operand stage
  logic       o_v_q;
  caesar_op_e o_op_q;
  sew_e       o_sew_q;
  waddr_t     o_dst_q;

  // ------------------------------------------------ ALU shadow (dest tracking)
  logic       p0_v_q, p1_v_q;
  waddr_t     p0_dst_q, p1_dst_q;

  // ------------------------------------------------------ operand collector
  logic        arr1_q, arr2_q, have1_q, have2_q;
  logic        arrb1_q, arrb2_q;
  logic [31:0] cap1_q, cap2_q;
  logic [31:0] opa, opb;
  assign opa = have1_q ? cap1_q : bank_rdata_i[arrb1_q];
  assign opb = have2_q ? cap2_q : bank_rdata_i[arrb2_q];

  // -------------------------------------------------------- hazard checks
  function automatic logic pending_dst(waddr_t a, logic ov, caesar_op_e oop, waddr_t od,
                                       logic v0, waddr_t d0, logic v1, waddr_t d1);
    return (ov && op_writes(oop) && od == a) || (v0 && d0 == a) || (v1 && d1 == a);
  endfunction

  logic wb_v;
  logic wb_bank;
  assign wb_v    = p1_v_q && alu_valid_i;
  assign wb_bank = bank_of(p1_dst_q);

  logic rd1, rd2, last_read;
  always_comb begin
    logic h1, h2;
    h1  = pending_dst(f_src1_q, o_v_q, o_op_q, o_dst_q, p0_v_q, p0_dst_q, p1_v_q, p1_dst_q);
    h2  = pending_dst(f_src2_q, o_v_q, o_op_q, o_dst_q, p0_v_q, p0_dst_q, p1_v_q, p1_dst_q);
    rd1 = f_v_q && f_need1_q && !h1 && !(wb_v && wb_bank == bank_of(f_src1_q));
    rd2 = f_v_q && f_need2_q && !h2 && !(wb_v && wb_bank == bank_of(f_src2_q))
          && !(rd1 && bank_of(f_src1_q) == bank_of(f_src2_q));
    last_read = f_v_q && (rd1 || !f_need1_q) && (rd2 || !f_need2_q);
  end

  assign instr_gnt_o = !f_v_q;

  logic accept;
  assign accept = instr_valid_i && instr_gnt_o;

  // ---------------------------------------------------------- bank ports
  always_comb begin
    bank_req_o      = '0;
    bank_we_o       = '0;
    bank_addr_o[0]  = '0;
    bank_addr_o[1]  = '0;
    bank_wdata_o    = alu_result_i;
    if (rd1) begin
      bank_req_o[bank_of(f_src1_q)]  = 1'b1;
      bank_addr_o[bank_of(f_src1_q)] = f_src1_q[RW-1:0];
    end
    if (rd2) begin
      bank_req_o[bank_of(f_src2_q)]  = 1'b1;
      bank_addr_o[bank_of(f_src2_q)] = f_src2_q[RW-1:0];
    end
    if (wb_v) begin
      bank_req_o[wb_bank]  = 1'b1;
      bank_we_o[wb_bank]   = 1'b1;
      bank_addr_o[wb_bank] = p1_dst_q[RW-1:0];
    end
  end

  // ---------------------------------------------------------- ALU issue
  assign alu_valid_o = o_v_q;
  assign alu_op_o    = o_op_q;
  assign alu_sew_o   = o_sew_q;
  assign alu_a_o     = opa;
  assign alu_b_o     = opb;

  // ---------------------------------------------------------- sequencing
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      sew_q     <= SEW32;
      f_v_q     <= 1'b0;
      f_need1_q <= 1'b0;
      f_need2_q <= 1'b0;
      f_op_q    <= OP_AND;
      f_sew_q   <= SEW32;
      f_src1_q  <= '0;
      f_src2_q  <= '0;
      f_dst_q   <= '0;
      o_v_q     <= 1'b0;
      o_op_q    <= OP_AND;
      o_sew_q   <= SEW32;
      o_dst_q   <= '0;
      p0_v_q    <= 1'b0;
      p1_v_q    <= 1'b0;
      p0_dst_q  <= '0;
      p1_dst_q  <= '0;
      arr1_q    <= 1'b0;
      arr2_q    <= 1'b0;
      arrb1_q   <= 1'b0;
      arrb2_q   <= 1'b0;
      have1_q   <= 1'b0;
      have2_q   <= 1'b0;
      cap1_q    <= '0;
      cap2_q    <= '0;
    end else begin
      // decode
      if (accept) begin
        if (dec_op == OP_CSRW) begin
          sew_q <= sew_e'(instr_data_i[1:0]);
        end else begin
          f_v_q     <= 1'b1;
          f_need1_q <= 1'b1;
          f_need2_q <= 1'b1;
          f_op_q    <= dec_op;
          f_sew_q   <= sew_q;
          f_src1_q  <= instr_data_i[WADDR_W-1:0];
          f_src2_q  <= instr_data_i[2*WADDR_W-1:WADDR_W];
          f_dst_q   <= instr_dst_i;
        end
      end else if (last_read) begin
        f_v_q <= 1'b0;
      end
      if (rd1) f_need1_q <= 1'b0;
      if (rd2) f_need2_q <= 1'b0;
      if (accept && dec_op != OP_CSRW) begin
        f_need1_q <= 1'b1;
        f_need2_q <= 1'b1;
      end

      // operand collection
      if (o_v_q) begin
        have1_q <= 1'b0;
        have2_q <= 1'b0;
      end else begin
        if (arr1_q) begin have1_q <= 1'b1; cap1_q <= bank_rdata_i[arrb1_q]; end
        if (arr2_q) begin have2_q <= 1'b1; cap2_q <= bank_rdata_i[arrb2_q]; end
      end
      arr1_q <= rd1;
      arr2_q <= rd2;
      if (rd1) arrb1_q <= bank_of(f_src1_q);
      if (rd2) arrb2_q <= bank_of(f_src2_q);

      // fetch -> operand stage
      o_v_q <= last_read;
      if (last_read) begin
        o_op_q  <= f_op_q;
        o_sew_q <= f_sew_q;
        o_dst_q <= f_dst_q;
      end

      // ALU shadow pipeline for the writeback address
      p0_v_q   <= o_v_q && op_writes(o_op_q);
      p0_dst_q <= o_dst_q;
      p1_v_q   <= p0_v_q;
      p1_dst_q <= p0_dst_q;
    end
  end

  assign busy_o = f_v_q || o_v_q || p0_v_q || p1_v_q;

  // The ALU answers exactly two cycles after it is started.
  assert property (@(posedge clk_i) disable iff (!rst_ni) p1_v_q |-> alu_valid_i);

endmodule
