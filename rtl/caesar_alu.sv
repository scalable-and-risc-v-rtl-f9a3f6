// caesar_alu: two-cycle packed-SIMD integer ALU of NM-Caesar.
//
// Operates on one 32-bit word holding four 8-bit, two 16-bit or one 32-bit
// element (sew_i). Following the source, the adder is a partitioned
// multi-precision adder whose carry chain is cut at element boundaries, shared
// by ADD, SUB, MIN and MAX, and the multiplier section is four 17-bit signed
// multipliers: four 8x8 products, two 16x16 products, or the three 16x16
// partial products of a 32-bit low product. MAC keeps one accumulator
// element per SIMD element (products truncated to the element width); DOT
// sums the full signed products of all elements of the word into a 32-bit
// accumulator. The *_INIT forms start the accumulator from zero, the *_STORE
// forms also return it as the result.
//
// Timing: operands and operation are taken on valid_i in cycle t (the cycle
// the operands come out of the banks). Stage 1 (cycle t+1) forms the adder
// result, logic and shift results and the products; stage 2 (cycle t+2)
// combines partial products, updates the accumulator and presents result_o
// with valid_o, so the controller writes it back in cycle t+2. How the work is
// split over the two cycles is this design's choice; the source only states
// a two-cycle propagation delay. Element-wise SUB is src1 - src2, shifts take
// the amount from the low log2(width) bits of the matching src2 element and
// MIN/MAX compare signed (signedness is not stated by the source).
module caesar_alu
  import nmc_pkg::*;
  import caesar_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        valid_i,
  input  caesar_op_e  op_i,
  input  sew_e        sew_i,
  input  logic [31:0] a_i,       // src1
  input  logic [31:0] b_i,       // src2
  output logic        valid_o,
  output logic [31:0] result_o
);

  // ---------------------------------------------------------------- stage 0
  logic        v0_q;
  caesar_op_e  op0_q;
  sew_e        sew0_q;
  logic [31:0] a0_q, b0_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      v0_q   <= 1'b0;
      op0_q  <= OP_AND;
      sew0_q <= SEW32;
      a0_q   <= '0;
      b0_q   <= '0;
    end else begin
      v0_q <= valid_i;
      if (valid_i) begin
        op0_q  <= op_i;
        sew0_q <= sew_i;
        a0_q   <= a_i;
        b0_q   <= b_i;
      end
    end
  end

  // ------------------------------------------------- stage 1 (cycle t+1)
  // Partitioned adder: byte slices, carry cut where an element starts.
  logic        sub;
  logic [31:0] b_eff, sum;
  logic [3:0]  elem_start;

  always_comb begin
    sub   = op0_q inside {OP_SUB, OP_MIN, OP_MAX};
    b_eff = sub ? ~b0_q : b0_q;
    unique case (sew0_q)
      SEW8:    elem_start = 4'b1111;
      SEW16:   elem_start = 4'b0101;
      default: elem_start = 4'b0001;
    endcase
    begin
      logic       c;
      logic [8:0] s;
      c = sub;
      for (int k = 0; k < 4; k++) begin
        s = {1'b0, a0_q[8*k +: 8]} + {1'b0, b_eff[8*k +: 8]}
            + {8'd0, (elem_start[k] ? sub : c)};
        sum[8*k +: 8] = s[7:0];
        c             = s[8];
      end
    end
  end

  // MIN/MAX: a < b (signed) per element, from the partitioned difference.
  logic [31:0] minmax;
  always_comb begin
    minmax = '0;
    unique case (sew0_q)
      SEW8: for (int k = 0; k < 4; k++) begin
        logic lt;
        lt = (a0_q[8*k+7] != b0_q[8*k+7]) ? a0_q[8*k+7] : sum[8*k+7];
        minmax[8*k +: 8] = ((op0_q == OP_MIN) == lt) ? a0_q[8*k +: 8] : b0_q[8*k +: 8];
      end
      SEW16: for (int k = 0; k < 2; k++) begin
        logic lt;
        lt = (a0_q[16*k+15] != b0_q[16*k+15]) ? a0_q[16*k+15] : sum[16*k+15];
        minmax[16*k +: 16] = ((op0_q == OP_MIN) == lt) ? a0_q[16*k +: 16] : b0_q[16*k +: 16];
      end
      default: begin
        logic lt;
        lt = (a0_q[31] != b0_q[31]) ? a0_q[31] : sum[31];
        minmax = ((op0_q == OP_MIN) == lt) ? a0_q : b0_q;
      end
    endcase
  end

  // Element-wise logic shifts.
  logic [31:0] shifted;
  always_comb begin
    shifted = '0;
    unique case (sew0_q)
      SEW8: for (int k = 0; k < 4; k++)
        shifted[8*k +: 8] = (op0_q == OP_SLL) ? a0_q[8*k +: 8] << b0_q[8*k +: 3]
                                               : a0_q[8*k +: 8] >> b0_q[8*k +: 3];
      SEW16: for (int k = 0; k < 2; k++)
        shifted[16*k +: 16] = (op0_q == OP_SLL) ? a0_q[16*k +: 16] << b0_q[16*k +: 4]
                                                 : a0_q[16*k +: 16] >> b0_q[16*k +: 4];
      default:
        shifted = (op0_q == OP_SLL) ? a0_q << b0_q[4:0] : a0_q >> b0_q[4:0];
    endcase
  end

  // Four 17-bit signed multipliers.
  logic signed [16:0] ma [4];
  logic signed [16:0] mb [4];
  logic signed [33:0] prod [4];
  always_comb begin
    for (int k = 0; k < 4; k++) begin
      ma[k] = '0;
      mb[k] = '0;
    end
    unique case (sew0_q)
      SEW8: for (int k = 0; k < 4; k++) begin
        ma[k] = 17'(signed'(a0_q[8*k +: 8]));
        mb[k] = 17'(signed'(b0_q[8*k +: 8]));
      end
      SEW16: for (int k = 0; k < 2; k++) begin
        ma[k] = 17'(signed'(a0_q[16*k +: 16]));
        mb[k] = 17'(signed'(b0_q[16*k +: 16]));
      end
      default: begin                  // partial products of the low 32 bits
        ma[0] = {1'b0, a0_q[15:0]};  mb[0] = {1'b0, b0_q[15:0]};
        ma[1] = {1'b0, a0_q[31:16]}; mb[1] = {1'b0, b0_q[15:0]};
        ma[2] = {1'b0, a0_q[15:0]};  mb[2] = {1'b0, b0_q[31:16]};
      end
    endcase
    for (int k = 0; k < 4; k++) prod[k] = ma[k] * mb[k];
  end

  logic        v1_q;
  caesar_op_e  op1_q;
  sew_e        sew1_q;
  logic [31:0] simple1_q;              // result of non-multiplying operations
  logic [33:0] prod1_q [4];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      v1_q      <= 1'b0;
      op1_q     <= OP_AND;
      sew1_q    <= SEW32;
      simple1_q <= '0;
      for (int k = 0; k < 4; k++) prod1_q[k] <= '0;
    end else begin
      v1_q <= v0_q;
      if (v0_q) begin
        op1_q  <= op0_q;
        sew1_q <= sew0_q;
        for (int k = 0; k < 4; k++) prod1_q[k] <= prod[k];
        unique case (op0_q)
          OP_AND:         simple1_q <= a0_q & b0_q;
          OP_OR:          simple1_q <= a0_q | b0_q;
          OP_XOR:         simple1_q <= a0_q ^ b0_q;
          OP_ADD, OP_SUB: simple1_q <= sum;
          OP_MIN, OP_MAX: simple1_q <= minmax;
          OP_SLL, OP_SLR: simple1_q <= shifted;
          default:        simple1_q <= '0;
        endcase
      end
    end
  end

  // ------------------------------------------------- stage 2 (cycle t+2)
  logic [31:0] acc_q;
  logic [31:0] mul_res, mac_res, dot_sum, dot_res;

  always_comb begin
    unique case (sew1_q)
      SEW8:    for (int k = 0; k < 4; k++) mul_res[8*k +: 8] = prod1_q[k][7:0];
      SEW16:   for (int k = 0; k < 2; k++) mul_res[16*k +: 16] = prod1_q[k][15:0];
      default: mul_res = prod1_q[0][31:0] + {prod1_q[1][15:0] + prod1_q[2][15:0], 16'd0};
    endcase
  end

  // Accumulator base: cleared by the *_INIT forms.
  logic [31:0] acc_base;
  assign acc_base = (op1_q inside {OP_MAC_INIT, OP_DOT_INIT}) ? '0 : acc_q;

  always_comb begin
    unique case (sew1_q)
      SEW8:    for (int k = 0; k < 4; k++)
                 mac_res[8*k +: 8] = acc_base[8*k +: 8] + mul_res[8*k +: 8];
      SEW16:   for (int k = 0; k < 2; k++)
                 mac_res[16*k +: 16] = acc_base[16*k +: 16] + mul_res[16*k +: 16];
      default: mac_res = acc_base + mul_res;
    endcase
    unique case (sew1_q)
      SEW8:    dot_sum = 32'(signed'(prod1_q[0][15:0])) + 32'(signed'(prod1_q[1][15:0]))
                       + 32'(signed'(prod1_q[2][15:0])) + 32'(signed'(prod1_q[3][15:0]));
      SEW16:   dot_sum = prod1_q[0][31:0] + prod1_q[1][31:0];
      default: dot_sum = mul_res;
    endcase
    dot_res = acc_base + dot_sum;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      acc_q <= '0;
    end else if (v1_q) begin
      if (op1_q inside {OP_MAC_INIT, OP_MAC, OP_MAC_STORE}) acc_q <= mac_res;
      if (op1_q inside {OP_DOT_INIT, OP_DOT, OP_DOT_STORE}) acc_q <= dot_res;
    end
  end

  always_comb begin
    unique case (op1_q)
      OP_MUL:                          result_o = mul_res;
      OP_MAC_INIT, OP_MAC, OP_MAC_STORE: result_o = mac_res;
      OP_DOT_INIT, OP_DOT, OP_DOT_STORE: result_o = dot_res;
      default:                         result_o = simple1_q;
    endcase
  end
  assign valid_o = v1_q;

endmodule
