// carus_cfg_reg: configuration register of NM-Carus, the synchronisation
// point between host and eCPU.
//
// One 32-bit register on the controller bus (byte address 0 of its window).
// Bit 0 (start): written to 1 by the host to run the kernel in the code
// memory; it drives fetch_enable_o of the eCPU and is cleared when the
// kernel reports completion. Bit 1 (done): set by the eCPU at the end of the
// kernel, cleared by the host writing 0 to it; it also drives irq_o, the
// optional interrupt pin the source describes. Bit 2 (irq_en): gates irq_o.
// The bit layout is this design's choice; the source names the register and
// its role only. Reads return the register one cycle after the request,
// like the memories on the same bus.
//
// Lint note: only the low byte enable and the three defined bits of the write data
// are used; lint lists the rest as unused.
module carus_cfg_reg (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        req_i,
  input  logic        we_i,
  input  logic [3:0]  be_i,
  input  logic [31:0] wdata_i,
  output logic [31:0] rdata_o,
  output logic        fetch_enable_o,
  output logic        irq_o
);

  logic start_q, done_q, irq_en_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      start_q  <= 1'b0;
      done_q   <= 1'b0;
      irq_en_q <= 1'b1;
      rdata_o  <= '0;
    end else if (req_i) begin
      if (we_i && be_i[0]) begin
        done_q   <= wdata_i[1];
        irq_en_q <= wdata_i[2];
        // completion clears start; a fresh start clears done
        start_q  <= wdata_i[1] ? 1'b0 : (wdata_i[0] | start_q);
      end else if (!we_i) begin
        rdata_o <= {29'd0, irq_en_q, done_q, start_q};
      end
    end
  end

  assign fetch_enable_o = start_q;
  assign irq_o          = done_q && irq_en_q;

endmodule
