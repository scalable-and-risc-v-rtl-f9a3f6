// carus_vpu: vector processing unit of NM-Carus.
//
// A single-issue vector machine working directly on the vector register file
// (VRF), with at most two instructions in flight: one held in the decode and
// issue register, one in execution; a minimal scoreboard (the issue register
// valid bit and the execution-busy bit) keeps them in order, and the eCPU
// continues with scalar code while a vector instruction runs.
//
//  * Decode and issue: takes instructions from the eCPU over a reduced
//    CORE-V-X-style offload port (valid/ready, instruction, rs1, rs2; accept
//    says whether it is an xvnmc instruction) and returns values for vset*
//    and emvx on the result port (the eCPU is assumed always ready).
//  * CSR unit (carus_csr_unit): vl and element width.
//  * Arithmetic unit: NLANES lane ALUs (carus_lane_alu), lane l bound to VRF
//    bank l, sharing one controller and loop unit. Word j of a vector lives
//    in bank j mod NLANES, row vreg*RPR + j div NLANES, so all operands of an
//    element-wise instruction sit in the lane's own bank and are read one
//    after the other. The loop unit steps through rows with a fixed period P
//    per word: in period k the lane reads the R source words of row k, the
//    ALU works on row k-1 and the result of row k-2 is written, so
//    P = max(R + 1, ALU cycles) and an instruction over n rows takes
//    (n + 2) * P cycles. vmv.v* runs here too, as a lane-local copy.
//  * Move-slide unit: slides, slide1 and emvv/emvx. It can reach every
//    bank and moves one element at a time: read the old destination word,
//    fetch each source element (one read and one cycle to receive it),
//    write the word back. This element-serial scheme is this design's
//    choice; the source gives the unit's function only.
//
// Tail elements past vl keep their old value (byte enables). The VRF port
// is stalled as a whole with stall_i when the host takes the VRF; read data
// given to the unit must stay valid until it is used (nm_carus holds it).
//
// Lint note: rst_ni is reported as both synchronous and asynchronous only because the
// dispatch assertion uses it in 'disable iff'. Fields of the executing instruction
// that only decode and the CSR unit need (rd, avl, vtype, ...) are kept in ex_q but
// not read again, and the address helper takes wider arguments than it uses; lint
// lists these bits as unused.
module carus_vpu
  import nmc_pkg::*;
  import carus_pkg::*;
#(
  parameter int unsigned NLANES     = 4,
  parameter int unsigned BANK_WORDS = 2048,     // 8 KiB per bank
  parameter int unsigned NREGS      = 32
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        stall_i,
  // offload port from the eCPU
  input  logic        x_valid_i,
  output logic        x_ready_o,
  input  logic [31:0] x_instr_i,
  input  logic [31:0] x_rs1_i,
  input  logic [31:0] x_rs2_i,
  output logic        x_accept_o,
  output logic        x_result_valid_o,
  output logic [4:0]  x_result_rd_o,
  output logic [31:0] x_result_data_o,
  // VRF, one port per bank
  output logic [NLANES-1:0]             vrf_req_o,
  output logic [NLANES-1:0]             vrf_we_o,
  output logic [3:0]                    vrf_be_o    [NLANES],
  output logic [$clog2(BANK_WORDS)-1:0] vrf_addr_o  [NLANES],
  output logic [31:0]                   vrf_wdata_o [NLANES],
  input  logic [31:0]                   vrf_rdata_i [NLANES],
  output logic        busy_o
);

  localparam int unsigned RW         = $clog2(BANK_WORDS);
  localparam int unsigned LW         = (NLANES > 1) ? $clog2(NLANES) : 1;
  localparam int unsigned RPR        = BANK_WORDS / NREGS;    // rows per register
  localparam int unsigned WPR        = RPR * NLANES;          // words per register
  localparam int unsigned VLEN_BYTES = WPR * 4;
  localparam int unsigned REGW       = $clog2(NREGS);

  logic en;
  assign en = !stall_i;

  // ============================================================ decode/issue
  vinstr_t dec;
  carus_decoder u_dec (.instr_i(x_instr_i), .rs1_i(x_rs1_i), .rs2_i(x_rs2_i), .dec_o(dec));

  logic    is_v_q;
  vinstr_t is_q;
  logic    ex_busy;
  logic    dispatch;

  assign x_ready_o  = !is_v_q;
  assign x_accept_o = dec.valid;
  assign dispatch   = is_v_q && !ex_busy && en;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      is_v_q <= 1'b0;
      is_q   <= '0;
    end else begin
      if (dispatch) is_v_q <= 1'b0;
      if (x_valid_i && x_ready_o && dec.valid) begin
        is_v_q <= 1'b1;
        is_q   <= dec;
      end
    end
  end

  // ============================================================ CSR unit
  logic [31:0] vl, csr_res;
  sew_e        sew;
  carus_csr_unit #(.VLEN_BYTES(VLEN_BYTES)) u_csr (
    .clk_i, .rst_ni,
    .exec_i  (dispatch && is_q.eu == EU_CSR),
    .instr_i (is_q),
    .res_o   (csr_res),
    .vl_o    (vl),
    .sew_o   (sew)
  );

  // ============================================================ execution
  function automatic logic [RW-1:0] row_addr(logic [7:0] vreg, int unsigned row);
    return RW'(vreg[REGW-1:0]) * RW'(RPR) + RW'(row);
  endfunction

  function automatic int unsigned sew_bytes(sew_e s);
    return (s == SEW8) ? 1 : (s == SEW16) ? 2 : 4;
  endfunction

  // latched instruction context
  vinstr_t     ex_q;
  sew_e        ex_sew_q;
  logic [31:0] ex_vl_q;
  logic [31:0] vl_bytes_q;

  // ------------------------------------------------ arithmetic unit / loop
  logic        ar_busy_q;
  logic [1:0]  ar_r_q;                 // source reads per word
  logic [2:0]  ar_p_q;                 // period in cycles
  logic [1:0]  ar_sel_q [3];           // slot read at phase j: 0=a 1=b 2=c
  logic [7:0]  ar_reg_q [3];           // vector register read at phase j
  logic [2:0]  ar_ph_q;
  logic [15:0] ar_k_q;                 // period index = row being read
  logic [15:0] ar_nrows_q;
  logic        ar_cap_q;               // a read was issued in the last active cycle
  logic [1:0]  ar_cap_slot_q;
  logic [31:0] buf_q  [NLANES][3];     // operands of the row being read
  logic [31:0] opa_q  [NLANES];
  logic [31:0] opb_q  [NLANES];
  logic [31:0] opc_q  [NLANES];
  logic [31:0] res_q  [NLANES];
  logic [31:0] alu_res [NLANES];
  logic [31:0] splat;

  always_comb begin
    unique case (ex_sew_q)
      SEW8:    splat = {4{ex_q.scalar[7:0]}};
      SEW16:   splat = {2{ex_q.scalar[15:0]}};
      default: splat = ex_q.scalar;
    endcase
  end

  for (genvar l = 0; l < NLANES; l++) begin : g_lane
    carus_lane_alu u_alu (
      .op_i  (ex_q.op),
      .sew_i (ex_sew_q),
      .a_i   (opa_q[l]),
      .b_i   (opb_q[l]),
      .c_i   (opc_q[l]),
      .res_o (alu_res[l])
    );
  end

  // dispatch-time schedule of an arithmetic instruction
  logic [1:0] d_r;
  logic [2:0] d_p;
  logic [1:0] d_sel [3];
  logic [7:0] d_reg [3];
  always_comb begin
    int unsigned n, c;
    n = 0;
    d_sel[0] = 2'd0; d_sel[1] = 2'd0; d_sel[2] = 2'd0;
    d_reg[0] = '0;   d_reg[1] = '0;   d_reg[2] = '0;
    if (is_q.op != V_MV) begin
      d_sel[n] = 2'd0; d_reg[n] = is_q.vs2; n++;
    end
    if (is_q.src == SRC_VV) begin
      d_sel[n] = 2'd1; d_reg[n] = is_q.vs1; n++;
    end
    if (is_q.op == V_MACC) begin
      d_sel[n] = 2'd2; d_reg[n] = is_q.vd; n++;
    end
    c   = alu_cycles(is_q.op, sew);
    d_r = 2'(n);
    d_p = 3'((c > n + 1) ? c : n + 1);
  end

  logic [15:0] d_nrows;
  logic [31:0] d_vl_bytes;
  always_comb begin
    logic [31:0] nwords;
    d_vl_bytes = vl * sew_bytes(sew);
    nwords     = (d_vl_bytes + 3) / 4;
    d_nrows    = 16'((nwords + NLANES - 1) / NLANES);
  end

  // operands of the row being read, including a word arriving this cycle
  logic [31:0] buf_next [NLANES][3];
  always_comb begin
    for (int l = 0; l < NLANES; l++)
      for (int sl = 0; sl < 3; sl++)
        buf_next[l][sl] = (ar_cap_q && ar_cap_slot_q == 2'(sl)) ? vrf_rdata_i[l] : buf_q[l][sl];
  end

  // phase decode
  logic ar_rd, ar_wr, ar_end;
  assign ar_rd  = ar_busy_q && (ar_ph_q < 3'(ar_r_q)) && (ar_k_q < ar_nrows_q);
  assign ar_wr  = ar_busy_q && (ar_ph_q == 3'(ar_r_q)) && (ar_k_q >= 16'd2);
  assign ar_end = ar_busy_q && (ar_ph_q == ar_p_q - 3'd1);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ar_busy_q     <= 1'b0;
      ar_r_q        <= '0;
      ar_p_q        <= 3'd1;
      ar_ph_q       <= '0;
      ar_k_q        <= '0;
      ar_nrows_q    <= '0;
      ar_cap_q      <= 1'b0;
      ar_cap_slot_q <= '0;
      for (int j = 0; j < 3; j++) begin
        ar_sel_q[j] <= '0;
        ar_reg_q[j] <= '0;
      end
      for (int l = 0; l < NLANES; l++) begin
        for (int s = 0; s < 3; s++) buf_q[l][s] <= '0;
        opa_q[l] <= '0;
        opb_q[l] <= '0;
        opc_q[l] <= '0;
        res_q[l] <= '0;
      end
    end else if (en) begin
      if (dispatch && is_q.eu == EU_ARITH && d_nrows != 0) begin
        ar_busy_q  <= 1'b1;
        ar_r_q     <= d_r;
        ar_p_q     <= d_p;
        ar_sel_q   <= d_sel;
        ar_reg_q   <= d_reg;
        ar_ph_q    <= '0;
        ar_k_q     <= '0;
        ar_nrows_q <= d_nrows;
      end
      // capture read data one cycle after the read
      ar_cap_q <= ar_rd;
      if (ar_rd) ar_cap_slot_q <= ar_sel_q[ar_ph_q[1:0]];
      if (ar_cap_q)
        for (int l = 0; l < NLANES; l++) buf_q[l][ar_cap_slot_q] <= vrf_rdata_i[l];
      if (ar_busy_q) begin
        if (ar_end) begin
          ar_ph_q <= '0;
          ar_k_q  <= ar_k_q + 16'd1;
          for (int l = 0; l < NLANES; l++) begin
            res_q[l] <= alu_res[l];
            opa_q[l] <= buf_next[l][0];
            opb_q[l] <= (ex_q.src == SRC_VV) ? buf_next[l][1] : splat;
            opc_q[l] <= buf_next[l][2];
          end
          if (ar_k_q == ar_nrows_q + 16'd1) ar_busy_q <= 1'b0;
        end else begin
          ar_ph_q <= ar_ph_q + 3'd1;
        end
      end
    end
  end

  // ------------------------------------------------------ move-slide unit
  typedef enum logic [2:0] {M_IDLE, M_RDVD, M_WAITVD, M_ELEM, M_EWAIT, M_WR, M_XRD, M_XWAIT}
    mstate_e;
  mstate_e     m_state_q;
  logic [31:0] m_j_q, m_jend_q;       // destination word, last word
  logic [2:0]  m_e_q;                 // element within the word
  logic [31:0] m_wbuf_q;
  logic [31:0] m_src_q;               // source element index being fetched
  logic        m_res_v_q;
  logic [31:0] m_res_q;

  function automatic int unsigned epw(sew_e s);
    return 4 / sew_bytes(s);
  endfunction
  function automatic logic [31:0] get_elem(logic [31:0] w, int unsigned e, sew_e s);
    unique case (s)
      SEW8:    return {24'd0, w[8*e +: 8]};
      SEW16:   return {16'd0, w[16*(e%2) +: 16]};
      default: return w;
    endcase
  endfunction
  function automatic logic [31:0] put_elem(logic [31:0] w, int unsigned e, sew_e s,
                                           logic [31:0] v);
    logic [31:0] r;
    r = w;
    unique case (s)
      SEW8:    r[8*e +: 8] = v[7:0];
      SEW16:   r[16*(e%2) +: 16] = v[15:0];
      default: r = v;
    endcase
    return r;
  endfunction

  // what to do with element i of the destination
  typedef enum logic [1:0] {A_KEEP, A_SCALAR, A_ZERO, A_SRC} act_e;
  act_e        m_act;
  logic [31:0] m_i, m_s;
  always_comb begin
    logic [31:0] vlmax;
    vlmax = VLEN_BYTES / sew_bytes(ex_sew_q);
    m_i   = m_j_q * epw(ex_sew_q) + 32'(m_e_q);
    m_s   = '0;
    m_act = A_KEEP;
    if (ex_q.op == V_EMVV) begin
      if (m_i == ex_q.idx) m_act = A_SCALAR;
    end else if (m_i < ex_vl_q) begin
      unique case (ex_q.op)
        V_SLIDEUP: if (m_i >= ex_q.scalar) begin m_act = A_SRC; m_s = m_i - ex_q.scalar; end
        V_SLIDEDN: begin
          m_s   = m_i + ex_q.scalar;
          m_act = (m_s < vlmax && m_s >= m_i) ? A_SRC : A_ZERO;
        end
        V_SLIDE1UP: if (m_i == 0) m_act = A_SCALAR;
                    else begin m_act = A_SRC; m_s = m_i - 1; end
        V_SLIDE1DN: if (m_i == ex_vl_q - 1) m_act = A_SCALAR;
                    else begin m_act = A_SRC; m_s = m_i + 1; end
        default: m_act = A_KEEP;
      endcase
    end
  end

  // word index -> bank and row
  function automatic logic [LW-1:0] w_bank(logic [31:0] w);
    return LW'(w % NLANES);
  endfunction
  function automatic logic [RW-1:0] w_row(logic [7:0] vreg, logic [31:0] w);
    return row_addr(vreg, int'(w / NLANES));
  endfunction

  logic [31:0] m_src_word;
  assign m_src_word = m_s / epw(ex_sew_q);
  logic [31:0] m_fetch_word;          // word of the element being received
  assign m_fetch_word = m_src_q / epw(ex_sew_q);

  logic m_last_e;
  assign m_last_e = (32'(m_e_q) == epw(ex_sew_q) - 1);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      m_state_q <= M_IDLE;
      m_j_q     <= '0;
      m_jend_q  <= '0;
      m_e_q     <= '0;
      m_wbuf_q  <= '0;
      m_src_q   <= '0;
      m_res_v_q <= 1'b0;
      m_res_q   <= '0;
    end else begin
      m_res_v_q <= 1'b0;
      if (en) begin
        unique case (m_state_q)
          M_IDLE: if (dispatch && is_q.eu == EU_MOVE) begin
            if (is_q.op == V_EMVX) begin
              m_j_q     <= is_q.idx / epw(sew);
              m_e_q     <= 3'(is_q.idx % epw(sew));
              m_state_q <= M_XRD;
            end else if (is_q.op == V_EMVV) begin
              m_j_q     <= is_q.idx / epw(sew);
              m_jend_q  <= is_q.idx / epw(sew);
              m_state_q <= M_RDVD;
            end else if (d_vl_bytes != 0) begin
              m_j_q     <= '0;
              m_jend_q  <= (d_vl_bytes + 3) / 4 - 1;
              m_state_q <= M_RDVD;
            end
          end
          M_RDVD:   m_state_q <= M_WAITVD;
          M_WAITVD: begin
            m_wbuf_q  <= vrf_rdata_i[w_bank(m_j_q)];
            m_e_q     <= '0;
            m_state_q <= M_ELEM;
          end
          M_ELEM: begin
            if (m_act == A_SRC) begin
              m_src_q   <= m_s;
              m_state_q <= M_EWAIT;
            end else begin
              if (m_act == A_SCALAR) m_wbuf_q <= put_elem(m_wbuf_q, 32'(m_e_q), ex_sew_q, ex_q.scalar);
              if (m_act == A_ZERO)   m_wbuf_q <= put_elem(m_wbuf_q, 32'(m_e_q), ex_sew_q, '0);
              if (m_last_e) m_state_q <= M_WR;
              else          m_e_q <= m_e_q + 3'd1;
            end
          end
          M_EWAIT: begin
            m_wbuf_q <= put_elem(m_wbuf_q, 32'(m_e_q), ex_sew_q,
                                 get_elem(vrf_rdata_i[w_bank(m_fetch_word)],
                                          m_src_q % epw(ex_sew_q), ex_sew_q));
            if (m_last_e) m_state_q <= M_WR;
            else begin
              m_e_q     <= m_e_q + 3'd1;
              m_state_q <= M_ELEM;
            end
          end
          M_WR: begin
            if (m_j_q == m_jend_q) m_state_q <= M_IDLE;
            else begin
              m_j_q     <= m_j_q + 1;
              m_state_q <= M_RDVD;
            end
          end
          M_XRD: m_state_q <= M_XWAIT;
          M_XWAIT: begin
            logic [31:0] e;
            e = get_elem(vrf_rdata_i[w_bank(m_j_q)], 32'(m_e_q), ex_sew_q);
            unique case (ex_sew_q)      // sign-extended to XLEN, as RVV vmv.x.s
              SEW8:    m_res_q <= 32'(signed'(e[7:0]));
              SEW16:   m_res_q <= 32'(signed'(e[15:0]));
              default: m_res_q <= e;
            endcase
            m_res_v_q <= 1'b1;
            m_state_q <= M_IDLE;
          end
          default: m_state_q <= M_IDLE;
        endcase
      end
    end
  end

  // ---------------------------------------------------- instruction context
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ex_q       <= '0;
      ex_sew_q   <= SEW32;
      ex_vl_q    <= '0;
      vl_bytes_q <= '0;
    end else if (dispatch) begin
      ex_q       <= is_q;
      ex_sew_q   <= sew;
      ex_vl_q    <= vl;
      vl_bytes_q <= d_vl_bytes;
    end
  end

  assign ex_busy = ar_busy_q || (m_state_q != M_IDLE);
  assign busy_o  = is_v_q || ex_busy;

  // ---------------------------------------------------------- result port
  logic        csr_res_v_q;
  logic [31:0] csr_res_q;
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      csr_res_v_q <= 1'b0;
      csr_res_q   <= '0;
    end else begin
      csr_res_v_q <= dispatch && is_q.eu == EU_CSR;
      csr_res_q   <= csr_res;
    end
  end
  assign x_result_valid_o = csr_res_v_q || m_res_v_q;
  assign x_result_data_o  = csr_res_v_q ? csr_res_q : m_res_q;
  assign x_result_rd_o    = ex_q.rd;

  // --------------------------------------------------------------- VRF port
  always_comb begin
    for (int l = 0; l < NLANES; l++) begin
      logic [31:0] wj;
      wj             = '0;
      vrf_req_o[l]   = 1'b0;
      vrf_we_o[l]    = 1'b0;
      vrf_be_o[l]    = 4'hf;
      vrf_addr_o[l]  = '0;
      vrf_wdata_o[l] = res_q[l];
      if (ar_rd) begin
        vrf_req_o[l]  = 1'b1;
        vrf_addr_o[l] = row_addr(ar_reg_q[ar_ph_q[1:0]], int'(ar_k_q));
      end
      if (ar_wr) begin
        wj = 32'(ar_k_q - 16'd2) * NLANES + l;
        for (int b = 0; b < 4; b++) vrf_be_o[l][b] = (wj * 4 + b) < vl_bytes_q;
        vrf_req_o[l]  = (wj * 4) < vl_bytes_q;
        vrf_we_o[l]   = 1'b1;
        vrf_addr_o[l] = row_addr(ex_q.vd, int'(ar_k_q) - 2);
      end
    end
    unique case (m_state_q)
      M_RDVD: begin
        vrf_req_o[w_bank(m_j_q)]  = 1'b1;
        vrf_addr_o[w_bank(m_j_q)] = w_row(ex_q.vd, m_j_q);
      end
      M_ELEM: if (m_act == A_SRC) begin
        vrf_req_o[w_bank(m_src_word)]  = 1'b1;
        vrf_addr_o[w_bank(m_src_word)] = w_row(ex_q.vs2, m_src_word);
      end
      M_WR: begin
        vrf_req_o[w_bank(m_j_q)]   = 1'b1;
        vrf_we_o[w_bank(m_j_q)]    = 1'b1;
        vrf_addr_o[w_bank(m_j_q)]  = w_row(ex_q.vd, m_j_q);
        vrf_wdata_o[w_bank(m_j_q)] = m_wbuf_q;
      end
      M_XRD: begin
        vrf_req_o[w_bank(m_j_q)]  = 1'b1;
        vrf_addr_o[w_bank(m_j_q)] = w_row(ex_q.vs2, m_j_q);
      end
      default: ;
    endcase
  end

  // At most one instruction leaves the issue register per cycle, and only to
  // an idle execution stage.
  assert property (@(posedge clk_i) disable iff (!rst_ni) dispatch |-> !ex_busy);

endmodule
