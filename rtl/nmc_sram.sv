// nmc_sram: single-port synchronous SRAM bank, 32-bit words, byte enables.
//
// Stands for the foundry-compiled single-port macros that form the NM-Caesar
// data banks (2 x 16 KiB), the NM-Carus vector register file banks
// (4 x 8 KiB) and the NM-Carus code memory (512 B). Written as an array so it
// synthesises to a memory cell. One access per cycle: a write updates the
// selected bytes at the clock edge; a read returns the word in the following
// cycle on rdata, which holds its value until the next read.
module nmc_sram #(
  parameter int unsigned WORDS = 4096
) (
  input  logic                     clk_i,
  input  logic                     req_i,
  input  logic                     we_i,
  input  logic [3:0]               be_i,
  input  logic [$clog2(WORDS)-1:0] addr_i,
  input  logic [31:0]              wdata_i,
  output logic [31:0]              rdata_o
);

  logic [31:0] mem [WORDS];

  always_ff @(posedge clk_i) begin
    if (req_i) begin
      if (we_i) begin
        for (int b = 0; b < 4; b++)
          if (be_i[b]) mem[addr_i][8*b +: 8] <= wdata_i[8*b +: 8];
      end else begin
        rdata_o <= mem[addr_i];
      end
    end
  end

endmodule
