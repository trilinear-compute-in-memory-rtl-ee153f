// tcim_chip: top level of the trilinear compute-in-memory attention
// accelerator. Four tiles of DG-FeFET subarrays, a global buffer, a chip-level
// accumulation unit and a special function unit (softmax, LayerNorm, GELU)
// under one controller.
//
// Attention without rewriting memory. The projection weights stay in the
// crossbars for good; the dynamic operands enter as row inputs or as
// back-gate codes, and each query token streams through three trilinear
// stages:
//   Stage 1, scaled query:  R1 = X[n] . W_Q^T . (1/sqrt(d_k))
//     tile 0 holds W_Q^T; row input X[n]; the constant S1_BG
//     (= BG_ONE/sqrt(d_k)) is broadcast on every back gate.
//   Stage 2, scores:        R2[m] = R1 . W_K . X[m]^T, for every key token m
//     tile 1 holds W_K (configuration (a)); row input R1; back-gate code of
//     weight column t is X[m][t]; the tile adds all column results.
//   softmax over the SEQ_P scores in the special function unit.
//   Stage 3, value sum:     Result[n] = sum_i Score[i] . X[i] . W_V^T
//     tiles 2 and 3 both hold W_V^T (configuration (b)); row inputs X[i] and
//     X[i+1]; back gates broadcast Score[i] and Score[i+1]; the accumulation
//     unit adds the two tiles (inter-crossbar addition) and accumulates over
//     the sequence.
// Only X is kept in the global buffer; R1 and the scores live in controller
// registers for the current query token.
//
// Weight mapping (load through prog_*; subarray a of a tile, row r, weight
// column j; k = a*NW + j, a < D_K/NW):
//   tile 0: W_Q[k][r]   tile 1: W_K[r][k]   tiles 2 and 3: W_V[k][r]
// Fixed point (design choices): X, R1, scores and results are INT8; every
// stage output is requantised as sat8(raw >>> SH_*); softmax inputs are read
// as Q3.4 and probabilities are unsigned with 256 = 1.0.
//
// Command port (accepted when cmd_ready):
//   OP_ATTN:      X at words cmd_src .. cmd_src+SEQ_P-1, results to cmd_dst..
//   OP_LAYERNORM: LayerNorm of word cmd_src with gamma at word cmd_aux and
//                 beta at cmd_aux+1, result to cmd_dst
//   OP_GELU:      GELU of every element of word cmd_src, result to cmd_dst
// done pulses when the command ends. While idle, the host reads and writes the
// global buffer through host_*; prog_* writes one weight per cycle.
//
// Departures from the paper: stages run one after another per query token,
// without overlapping different tokens; the value aggregation time-multiplexes
// two tiles over the sequence instead of one crossbar per token; the H-tree is
// plain broadcast wiring. The paper leaves the grid size to a floorplanner;
// the 2x2x2 grid follows its Fig. 3.
module tcim_chip
  import tcim_pkg::*;
#(
  parameter int unsigned SEQ_P    = SEQ,
  parameter int unsigned GB_B     = GB_BYTES,
  parameter int unsigned ADC_B    = ADC_BITS,
  parameter int unsigned ADC_SH   = ADC_SHIFT,
  parameter int          S1_BG    = 32,    // BG_ONE / sqrt(64)
  parameter int unsigned SH_R1    = 6,
  parameter int unsigned SH_SCORE = 10,
  parameter int unsigned SH_OUT   = 8,
  localparam int unsigned AW      = $clog2(GB_B / D_MODEL),
  localparam int unsigned WB      = D_MODEL * 8,
  localparam int unsigned NARR_T  = N_PE * N_ARR
) (
  input  logic                              clk,
  input  logic                              rst_n,
  // host access to the global buffer (while idle)
  input  logic                              host_en,
  input  logic                              host_we,
  input  logic [AW-1:0]                     host_addr,
  input  logic [WB-1:0]                     host_wdata,
  output logic [WB-1:0]                     host_rdata,
  // weight programming
  input  logic                              prog_en,
  input  logic [$clog2(N_TILE)-1:0]         prog_tile,
  input  logic [$clog2(NARR_T)-1:0]         prog_arr,
  input  logic [$clog2(ROWS)-1:0]           prog_row,
  input  logic [$clog2(NW)-1:0]             prog_wcol,
  input  logic signed [W_BITS-1:0]          prog_weight,
  // commands
  input  logic                              cmd_valid,
  input  op_e                               cmd_op,
  input  logic [AW-1:0]                     cmd_src,
  input  logic [AW-1:0]                     cmd_dst,
  input  logic [AW-1:0]                     cmd_aux,
  output logic                              cmd_ready,
  output logic                              done,
  output logic                              adc_clip
);

  localparam int unsigned LANES = NARR_T * NW;       // 128 result lanes per tile
  localparam int unsigned NARR_STAGE = D_K / NW;     // subarrays per stage: 8
  localparam logic [NARR_T-1:0] STAGE_MASK = NARR_T'((64'd1 << NARR_STAGE) - 1);
  localparam int unsigned Y_W = 40;

  if (SEQ_P % 2 != 0) begin : g_bad_seq
    $error("tcim_chip: SEQ_P must be even (two value tiles)");
  end
  if (D_K % NW != 0 || NARR_STAGE > NARR_T || D_K != D_MODEL) begin : g_bad_map
    $error("tcim_chip: head does not map onto one tile");
  end

  // ---------------- controller state ----------------
  typedef enum logic [5:0] {
    C_IDLE,
    A_RDQ, A_RDQW, A_S1, A_S1W,
    A_RDK, A_RDKW, A_S2, A_S2W,
    A_SM, A_SMW,
    A_RDV0, A_RDV0W, A_RDV1, A_RDV1W, A_S3, A_S3W, A_ACC, A_WR,
    L_RDX, L_RDXW, L_RDG, L_RDGW, L_RDB, L_RDBW, L_RUN, L_WAIT, L_WR,
    G_RD, G_RDW, G_RUN, G_WAIT, G_WR
  } cstate_e;
  cstate_e st;

  logic [AW-1:0]              src_q, dst_q, aux_q;
  logic [$clog2(SEQ_P)-1:0]   n_q, m_q, i_q;

  logic signed [7:0] xq   [D_MODEL];   // query token X[n]
  logic signed [7:0] r1   [D_K];       // scaled query R1
  logic signed [7:0] xk   [D_MODEL];   // key token X[m]
  logic signed [7:0] xv0  [D_MODEL];   // value tokens X[i], X[i+1]
  logic signed [7:0] xv1  [D_MODEL];
  logic signed [7:0] score[SEQ_P];
  logic [7:0]        prob [SEQ_P];
  logic signed [7:0] lnx [D_MODEL], lng [D_MODEL], lnb [D_MODEL];

  // ---------------- global buffer ----------------
  logic            gb_en, gb_we;
  logic [AW-1:0]   gb_addr;
  logic [WB-1:0]   gb_wdata, gb_rdata, ctl_wdata;
  logic            ctl_en, ctl_we;
  logic [AW-1:0]   ctl_addr;

  global_buffer #(.BYTES(GB_B), .WORD_BYTES(D_MODEL)) u_gb (
    .clk, .en(gb_en), .we(gb_we), .addr(gb_addr), .wdata(gb_wdata), .rdata(gb_rdata));

  always_comb begin
    if (st == C_IDLE) begin
      gb_en = host_en; gb_we = host_we; gb_addr = host_addr; gb_wdata = host_wdata;
    end else begin
      gb_en = ctl_en;  gb_we = ctl_we;  gb_addr = ctl_addr;  gb_wdata = ctl_wdata;
    end
  end
  assign host_rdata = gb_rdata;

  function automatic void unpack(input logic [WB-1:0] w, output logic signed [7:0] v [D_MODEL]);
    for (int k = 0; k < int'(D_MODEL); k++) v[k] = w[8*k +: 8];
  endfunction

  // ---------------- tiles ----------------
  logic                      t_start [N_TILE];
  logic                      t_done  [N_TILE];
  logic                      t_busy  [N_TILE];
  logic                      t_clip  [N_TILE];
  logic signed [7:0]         t_x     [N_TILE][ROWS];
  logic signed [BG_BITS-1:0] t_bg    [N_TILE][LANES];
  bg_mode_e                  t_mode  [N_TILE];
  logic signed [Y_W-1:0]     t_y     [N_TILE][LANES];
  logic signed [Y_W-1:0]     t_sum   [N_TILE];

  always_comb begin
    for (int k = 0; k < int'(ROWS); k++) begin
      t_x[0][k] = xq[k];
      t_x[1][k] = r1[k];
      t_x[2][k] = xv0[k];
      t_x[3][k] = xv1[k];
    end
    for (int k = 0; k < int'(LANES); k++) begin
      t_bg[0][k] = BG_BITS'(S1_BG);
      t_bg[1][k] = (k < int'(D_MODEL)) ? BG_BITS'(xk[k]) : '0;
      t_bg[2][k] = BG_BITS'({1'b0, prob[i_q]});
      t_bg[3][k] = BG_BITS'({1'b0, prob[i_q + 1'b1]});
    end
    t_mode[0] = BG_BROADCAST;
    t_mode[1] = BG_PER_COLUMN;
    t_mode[2] = BG_BROADCAST;
    t_mode[3] = BG_BROADCAST;
    t_start[0] = st == A_S1;
    t_start[1] = st == A_S2;
    t_start[2] = st == A_S3;
    t_start[3] = st == A_S3;
  end

  for (genvar t = 0; t < int'(N_TILE); t++) begin : g_tile
    cim_tile #(.ADC_B(ADC_B), .ADC_SH(ADC_SH), .Y_W(Y_W)) u_tile (
      .clk, .rst_n,
      .prog_en    (prog_en && prog_tile == t[$clog2(N_TILE)-1:0] && st == C_IDLE),
      .prog_arr, .prog_row, .prog_wcol, .prog_weight,
      .start      (t_start[t]),
      .arr_en     (STAGE_MASK),
      .x          (t_x[t]),
      .bg         (t_bg[t]),
      .bg_mode    (t_mode[t]),
      .busy       (t_busy[t]),
      .done       (t_done[t]),
      .y          (t_y[t]),
      .y_sum      (t_sum[t]),
      .adc_clip   (t_clip[t])
    );
  end

  // ---------------- chip accumulation unit ----------------
  logic signed [Y_W-1:0] acc_in [2][D_K];
  logic signed [47:0]    acc_out [D_K];
  always_comb begin
    for (int k = 0; k < int'(D_K); k++) begin
      acc_in[0][k] = t_y[2][k];
      acc_in[1][k] = t_y[3][k];
    end
  end
  accum_unit #(.LANES(D_K), .N_IN(2), .IN_W(Y_W), .ACC_W(48)) u_acc (
    .clk, .rst_n, .clear(st == A_RDV0 && i_q == '0), .add(st == A_ACC), .in_v(acc_in), .acc(acc_out));

  // ---------------- special function unit ----------------
  logic                     sm_valid;
  logic [PROB_BITS-1:0]     sm_p [SEQ_P];
  softmax_unit #(.SEQ_P(SEQ_P)) u_softmax (
    .clk, .rst_n, .in_valid(st == A_SM), .x(score), .out_valid(sm_valid), .p(sm_p));

  logic                     ln_busy, ln_done;
  logic signed [7:0]        ln_y [D_MODEL];
  layernorm_unit #(.D_P(D_MODEL)) u_layernorm (
    .clk, .rst_n, .start(st == L_RUN), .x(lnx), .gamma(lng), .beta(lnb),
    .busy(ln_busy), .done(ln_done), .y(ln_y));

  logic                     ge_valid;
  logic signed [7:0]        ge_y [D_MODEL];
  gelu_unit #(.LANES(D_MODEL)) u_gelu (
    .clk, .rst_n, .in_valid(st == G_RUN), .x(lnx), .out_valid(ge_valid), .y(ge_y));

  // ---------------- controller ----------------
  assign cmd_ready = st == C_IDLE;

  always_comb begin
    ctl_en = 1'b0; ctl_we = 1'b0; ctl_addr = '0; ctl_wdata = '0;
    unique case (st)
      A_RDQ:  begin ctl_en = 1'b1; ctl_addr = src_q + AW'(n_q); end
      A_RDK:  begin ctl_en = 1'b1; ctl_addr = src_q + AW'(m_q); end
      A_RDV0: begin ctl_en = 1'b1; ctl_addr = src_q + AW'(i_q); end
      A_RDV1: begin ctl_en = 1'b1; ctl_addr = src_q + AW'(i_q) + 1'b1; end
      A_WR: begin
        ctl_en = 1'b1; ctl_we = 1'b1; ctl_addr = dst_q + AW'(n_q);
        for (int k = 0; k < int'(D_K); k++) ctl_wdata[8*k +: 8] = 8'(sat_s(64'(acc_out[k] >>> SH_OUT), 8));
      end
      L_RDX, G_RD: begin ctl_en = 1'b1; ctl_addr = src_q; end
      L_RDG:  begin ctl_en = 1'b1; ctl_addr = aux_q; end
      L_RDB:  begin ctl_en = 1'b1; ctl_addr = aux_q + 1'b1; end
      L_WR: begin
        ctl_en = 1'b1; ctl_we = 1'b1; ctl_addr = dst_q;
        for (int k = 0; k < int'(D_MODEL); k++) ctl_wdata[8*k +: 8] = ln_y[k];
      end
      G_WR: begin
        ctl_en = 1'b1; ctl_we = 1'b1; ctl_addr = dst_q;
        for (int k = 0; k < int'(D_MODEL); k++) ctl_wdata[8*k +: 8] = ge_y[k];
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= C_IDLE; src_q <= '0; dst_q <= '0; aux_q <= '0;
      n_q <= '0; m_q <= '0; i_q <= '0; done <= 1'b0; adc_clip <= 1'b0;
      for (int k = 0; k < int'(D_MODEL); k++) begin
        xq[k] <= '0; xk[k] <= '0; xv0[k] <= '0; xv1[k] <= '0; lnx[k] <= '0; lng[k] <= '0; lnb[k] <= '0;
      end
      for (int k = 0; k < int'(D_K); k++) r1[k] <= '0;
      for (int k = 0; k < int'(SEQ_P); k++) begin score[k] <= '0; prob[k] <= '0; end
    end else begin
      done <= 1'b0;
      unique case (st)
        C_IDLE: if (cmd_valid) begin
          src_q <= cmd_src; dst_q <= cmd_dst; aux_q <= cmd_aux;
          n_q <= '0;
          unique case (cmd_op)
            OP_ATTN:      begin st <= A_RDQ; adc_clip <= 1'b0; end
            OP_LAYERNORM: st <= L_RDX;
            OP_GELU:      st <= G_RD;
            default:      done <= 1'b1;
          endcase
        end
        // ---- stage 1: scaled query ----
        A_RDQ:  st <= A_RDQW;
        A_RDQW: begin unpack(gb_rdata, xq); st <= A_S1; end
        A_S1:   st <= A_S1W;
        A_S1W:  if (t_done[0]) begin
          for (int k = 0; k < int'(D_K); k++) r1[k] <= 8'(sat_s(64'(t_y[0][k] >>> SH_R1), 8));
          adc_clip <= adc_clip | t_clip[0];
          m_q <= '0;
          st  <= A_RDK;
        end
        // ---- stage 2: score synthesis, one key token per tile operation ----
        A_RDK:  st <= A_RDKW;
        A_RDKW: begin unpack(gb_rdata, xk); st <= A_S2; end
        A_S2:   st <= A_S2W;
        A_S2W:  if (t_done[1]) begin
          score[m_q] <= 8'(sat_s(64'(t_sum[1] >>> SH_SCORE), 8));
          adc_clip   <= adc_clip | t_clip[1];
          if (int'(m_q) == int'(SEQ_P) - 1) st <= A_SM;
          else begin m_q <= m_q + 1'b1; st <= A_RDK; end
        end
        // ---- softmax ----
        A_SM:   st <= A_SMW;
        A_SMW:  if (sm_valid) begin prob <= sm_p; i_q <= '0; st <= A_RDV0; end
        // ---- stage 3: value aggregation, two tokens per step ----
        A_RDV0:  st <= A_RDV0W;
        A_RDV0W: begin unpack(gb_rdata, xv0); st <= A_RDV1; end
        A_RDV1:  st <= A_RDV1W;
        A_RDV1W: begin unpack(gb_rdata, xv1); st <= A_S3; end
        A_S3:    st <= A_S3W;
        A_S3W:   if (t_done[2]) begin adc_clip <= adc_clip | t_clip[2] | t_clip[3]; st <= A_ACC; end
        A_ACC: begin
          if (int'(i_q) == int'(SEQ_P) - 2) st <= A_WR;
          else begin i_q <= i_q + 2'd2; st <= A_RDV0; end
        end
        A_WR: begin
          if (int'(n_q) == int'(SEQ_P) - 1) begin st <= C_IDLE; done <= 1'b1; end
          else begin n_q <= n_q + 1'b1; st <= A_RDQ; end
        end
        // ---- LayerNorm ----
        L_RDX:  st <= L_RDXW;
        L_RDXW: begin unpack(gb_rdata, lnx); st <= L_RDG; end
        L_RDG:  st <= L_RDGW;
        L_RDGW: begin unpack(gb_rdata, lng); st <= L_RDB; end
        L_RDB:  st <= L_RDBW;
        L_RDBW: begin unpack(gb_rdata, lnb); st <= L_RUN; end
        L_RUN:  st <= L_WAIT;
        L_WAIT: if (ln_done) st <= L_WR;
        L_WR:   begin st <= C_IDLE; done <= 1'b1; end
        // ---- GELU ----
        G_RD:   st <= G_RDW;
        G_RDW:  begin unpack(gb_rdata, lnx); st <= G_RUN; end
        G_RUN:  st <= G_WAIT;
        G_WAIT: if (ge_valid) st <= G_WR;
        G_WR:   begin st <= C_IDLE; done <= 1'b1; end
        default: st <= C_IDLE;
      endcase
    end
  end

  // Tiles 2 and 3 run in lock step.
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n) t_done[2] == t_done[3]);

endmodule
