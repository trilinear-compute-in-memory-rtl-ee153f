// tb_tcim_chip: end-to-end test of the accelerator at a reduced sequence
// length (4 tokens) and a 4 KB global buffer; every other parameter is at its
// default, so the subarrays, ADCs and tiles are full size.
// It programs random W_Q, W_K and W_V into the four tiles, writes a random
// token sequence into the global buffer, runs one attention head and compares
// every output element with a model that repeats the quantised subarray
// readout (reference and modulated read per input bit, ADC floor and clip),
// the requantisation, the softmax recipe and the accumulation. A second head
// runs on saturated data, which drives the ADCs into clipping. It then runs
// LayerNorm and GELU commands on buffer words and checks them against their
// fixed-point recipes.
// Mechanisms counted (a count of zero is a failure): static back-gate
// broadcast (stage 1), per-column back-gate operation with intra-crossbar
// addition (stage 2), broadcast back-gate with inter-crossbar addition
// (stage 3), softmax, ADC clipping, LayerNorm, GELU, host access while idle.
module tb_tcim_chip;
  import tcim_pkg::*;
  localparam int SEQ_T = 4, GB_T = 4096, ADC_B_T = ADC_BITS, ADC_SH_T = ADC_SHIFT;
  localparam int S1_BG_T = 32, SH_R1_T = 6, SH_SCORE_T = 10, SH_OUT_T = 8;
  localparam int AW_T = $clog2(GB_T / 64);
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic host_en = 0, host_we = 0;
  logic [AW_T-1:0] host_addr = '0;
  logic [511:0] host_wdata = '0, host_rdata;
  logic prog_en = 0;
  logic [1:0] prog_tile = '0;
  logic [3:0] prog_arr = '0;
  logic [5:0] prog_row = '0;
  logic [2:0] prog_wcol = '0;
  logic signed [7:0] prog_weight = '0;
  logic cmd_valid = 0, cmd_ready, done, adc_clip;
  op_e cmd_op = OP_ATTN;
  logic [AW_T-1:0] cmd_src = '0, cmd_dst = '0, cmd_aux = '0;

  tcim_chip #(.SEQ_P(SEQ_T), .GB_B(GB_T)) dut (.*);

  // ---- reference model and driver tasks ----
  // The model works from the weight matrices and the input sequence only,
  // repeating the subarray's per-bit reference and modulated reads through an
  // ADC of ADC_B_T bits with LSB 2^ADC_SH_T.

int wq [64][64];   // W_Q[k][r]
int wk [64][64];   // W_K[r][k]
int wv [64][64];   // W_V[k][r]
int xs [SEQ_T][64];

// weight of tile t, row r, weight column k as the chip stores it
function automatic int mat(int t, int r, int k);
  if (t == 0) return wq[k][r];
  if (t == 1) return wk[r][k];
  return wv[k][r];
endfunction

function automatic int sat8(longint v);
  if (v > 127) return 127;
  if (v < -128) return -128;
  return int'(v);
endfunction

// one weight column through the quantised readout
function automatic longint col_op(int t, int k, int xin [64], int bgv);
  longint y;
  int lvl [8][64];
  y = 0;
  for (int ce = 0; ce < 8; ce++)
    for (int r = 0; r < 64; r++) begin
      int w, mag;
      w = mat(t, r, k);
      mag = (ce < 4) ? (w > 0 ? w : 0) : (w < 0 ? -w : 0);
      lvl[ce][r] = (mag >> (2 * (ce % 4))) & 3;
    end
  for (int b = 0; b < 8; b++) begin
    longint rd [2];
    for (int ph = 0; ph < 2; ph++) begin
      longint acc;
      acc = 0;
      for (int ce = 0; ce < 8; ce++) begin
        longint g, cur, code, full;
        g = 0;
        for (int r = 0; r < 64; r++) if (((xin[r] >> b) & 1) != 0) g += lvl[ce][r];
        cur = g * longint'(256 + (ph == 1 ? bgv : 0));
        code = cur >> ADC_SH_T;
        full = (longint'(1) << ADC_B_T) - 1;
        if (code > full) code = full;
        acc += (ce < 4 ? code : -code) << (2 * (ce % 4));
      end
      rd[ph] = acc;
    end
    if (b == 7) y -= (rd[1] - rd[0]) << b; else y += (rd[1] - rd[0]) << b;
  end
  return y;
endfunction

function automatic void softmax_ref(int sc [SEQ_T], output int pr [SEQ_T]);
  int mx, s, L, m, rcp;
  int e [SEQ_T];
  mx = -128; for (int i = 0; i < SEQ_T; i++) if (sc[i] > mx) mx = sc[i];
  s = 0;
  for (int i = 0; i < SEQ_T; i++) begin e[i] = int'($floor(255.0 * $exp(-real'(mx - sc[i]) / 16.0) + 0.5)); s += e[i]; end
  L = 0; for (int b = 0; b < 24; b++) if (((s >> b) & 1) != 0) L = b;
  m = s >> (L - 7); rcp = 32768 / m;
  for (int i = 0; i < SEQ_T; i++) begin pr[i] = (e[i] * rcp) >> L; if (pr[i] > 255) pr[i] = 255; end
endfunction

// expected attention output of query token n
function automatic void attn_ref(int n, output int res [64]);
  int r1 [64], sc [SEQ_T], pr [SEQ_T];
  longint acc [64];
  for (int k = 0; k < 64; k++) r1[k] = sat8(col_op(0, k, xs[n], S1_BG_T) >>> SH_R1_T);
  for (int m = 0; m < SEQ_T; m++) begin
    longint s;
    s = 0;
    for (int k = 0; k < 64; k++) s += col_op(1, k, r1, xs[m][k]);
    sc[m] = sat8(s >>> SH_SCORE_T);
  end
  softmax_ref(sc, pr);
  for (int k = 0; k < 64; k++) acc[k] = 0;
  for (int i = 0; i < SEQ_T; i++)
    for (int k = 0; k < 64; k++) acc[k] += col_op(2, k, xs[i], pr[i]);
  for (int k = 0; k < 64; k++) res[k] = sat8(acc[k] >>> SH_OUT_T);
endfunction

task automatic gb_write(int a, logic [511:0] d);
  @(negedge clk); host_en = 1; host_we = 1; host_addr = AW_T'(a); host_wdata = d;
  @(negedge clk); host_en = 0; host_we = 0;
endtask

task automatic gb_read(int a, output logic [511:0] d);
  @(negedge clk); host_en = 1; host_we = 0; host_addr = AW_T'(a);
  @(negedge clk); host_en = 0; d = host_rdata;
endtask

task automatic program_weights();
  for (int t = 0; t < 4; t++)
    for (int r = 0; r < 64; r++)
      for (int k = 0; k < 64; k++) begin
        @(negedge clk);
        prog_en = 1; prog_tile = 2'(t); prog_arr = 4'(k / 8); prog_row = 6'(r); prog_wcol = 3'(k % 8);
        prog_weight = 8'(mat(t, r, k));
      end
  @(negedge clk); prog_en = 0;
endtask

task automatic run_cmd(op_e op, int src, int dst, int aux, output int cycles);
  @(negedge clk); cmd_valid = 1; cmd_op = op; cmd_src = AW_T'(src); cmd_dst = AW_T'(dst); cmd_aux = AW_T'(aux);
  @(negedge clk); cmd_valid = 0; cycles = 1;
  while (!done) begin @(negedge clk); cycles++; end
endtask

// LayerNorm reference: the fixed-point recipe of the special function unit
function automatic void ln_ref(int x [64], int g [64], int be [64], output int y [64]);
  int s, mu, vs, vv, kk, isq;
  s = 0; for (int k = 0; k < 64; k++) s += x[k];
  mu = s >>> 6;
  vs = 0; for (int k = 0; k < 64; k++) vs += (x[k] - mu) * (x[k] - mu);
  vv = vs / 64;
  kk = 0; while ((vv >> (2 * kk)) > 255) kk++;
  isq = ((vv >> (2 * kk)) == 0) ? 4095 : int'($floor(4096.0 / $sqrt(real'(vv >> (2 * kk))) + 0.5));
  if (isq > 4095) isq = 4095;
  for (int k = 0; k < 64; k++) begin
    int n, a;
    n = ((x[k] - mu) * isq) >>> (7 + kk);
    a = ((n * g[k]) >>> 6) + be[k];
    y[k] = sat8(a);
  end
endfunction

// GELU reference: x * sigmoid(1.703 x) with the table entry recomputed
function automatic int gelu_ref(int xv);
  int s, sg, e;
  s = (xv * 109) >>> 6;
  if (s > 127) s = 127; if (s < -128) s = -128;
  sg = int'($floor(256.0 / (1.0 + $exp(-real'(s) / 16.0)) + 0.5)); if (sg > 255) sg = 255;
  e = (xv * sg) >>> 8;
  return sat8(e);
endfunction

  // mechanism counters
  int n_s1 = 0, n_s2 = 0, n_s3 = 0, n_sm = 0, n_clip = 0, n_ln = 0, n_ge = 0, n_host = 0;
  always @(posedge clk) begin
    if (dut.t_start[0]) n_s1++;
    if (dut.t_start[1] && dut.t_mode[1] == BG_PER_COLUMN) n_s2++;
    if (dut.t_start[2] && dut.t_start[3] && dut.t_mode[2] == BG_BROADCAST) n_s3++;
    if (dut.sm_valid) n_sm++;
    if (dut.t_done[1] && dut.t_clip[1]) n_clip++;
    if (dut.ln_done) n_ln++;
    if (dut.ge_valid) n_ge++;
    if (host_en && cmd_ready) n_host++;
  end

  task automatic attn_case(string tag, int src, int dst);
    int cyc;
    logic [511:0] w;
    for (int n = 0; n < SEQ_T; n++) begin
      for (int k = 0; k < 64; k++) w[8*k +: 8] = 8'(xs[n][k]);
      gb_write(src + n, w);
    end
    run_cmd(OP_ATTN, src, dst, 0, cyc);
    $display("%s: attention over %0d tokens took %0d cycles", tag, SEQ_T, cyc);
    for (int n = 0; n < SEQ_T; n++) begin
      int res [64];
      attn_ref(n, res);
      gb_read(dst + n, w);
      for (int k = 0; k < 64; k++) begin
        checks++;
        if (int'($signed(w[8*k +: 8])) != res[k]) begin
          failures++;
          if (failures < 10) $display("FAIL %s n=%0d k=%0d got %0d exp %0d", tag, n, k, $signed(w[8*k +: 8]), res[k]);
        end
      end
    end
  endtask

  initial begin
    logic [511:0] w;
    int cyc;
    #1 rst_n = 0; #10 rst_n = 1;
    // ---- head 1: random data ----
    for (int k = 0; k < 64; k++)
      for (int r = 0; r < 64; r++) begin
        wq[k][r] = int'($signed(8'($urandom)));
        wk[k][r] = int'($signed(8'($urandom)));
        wv[k][r] = int'($signed(8'($urandom)));
      end
    for (int n = 0; n < SEQ_T; n++) for (int k = 0; k < 64; k++) xs[n][k] = int'($signed(8'($urandom)));
    program_weights();
    attn_case("random", 0, 16);
    checks++; if (adc_clip) begin failures++; $display("FAIL random head reports ADC clipping"); end
    // ---- head 2: saturated operands, large weights ----
    for (int k = 0; k < 64; k++)
      for (int r = 0; r < 64; r++) begin
        wq[k][r] = 127; wk[k][r] = 127; wv[k][r] = ((k + r) % 2 == 0) ? 127 : -128;
      end
    for (int n = 0; n < SEQ_T; n++) for (int k = 0; k < 64; k++) xs[n][k] = (n == 0) ? 127 : 100 + k % 20;
    program_weights();
    attn_case("saturated", 32, 40);
    checks++; if (!adc_clip) begin failures++; $display("FAIL saturated head did not report clipping"); end
    // ---- LayerNorm ----
    begin
      int x [64], g [64], be [64], y [64];
      for (int k = 0; k < 64; k++) begin
        x[k] = int'($signed(8'($urandom))); g[k] = int'($signed(8'($urandom))); be[k] = int'($signed(8'($urandom)));
      end
      for (int k = 0; k < 64; k++) w[8*k +: 8] = 8'(x[k]);  gb_write(48, w);
      for (int k = 0; k < 64; k++) w[8*k +: 8] = 8'(g[k]);  gb_write(50, w);
      for (int k = 0; k < 64; k++) w[8*k +: 8] = 8'(be[k]); gb_write(51, w);
      run_cmd(OP_LAYERNORM, 48, 52, 50, cyc);
      ln_ref(x, g, be, y);
      gb_read(52, w);
      for (int k = 0; k < 64; k++) begin
        checks++;
        if (int'($signed(w[8*k +: 8])) != y[k]) begin failures++; $display("FAIL LN k=%0d got %0d exp %0d", k, $signed(w[8*k +: 8]), y[k]); end
      end
      // ---- GELU on the LayerNorm output ----
      run_cmd(OP_GELU, 52, 53, 0, cyc);
      gb_read(53, w);
      for (int k = 0; k < 64; k++) begin
        checks++;
        if (int'($signed(w[8*k +: 8])) != gelu_ref(y[k])) begin failures++; $display("FAIL GELU k=%0d got %0d exp %0d", k, $signed(w[8*k +: 8]), gelu_ref(y[k])); end
      end
    end
    // ---- mechanism coverage ----
    $display("mechanisms: stage1_broadcast=%0d stage2_per_column=%0d stage3_inter_crossbar=%0d softmax=%0d adc_clip=%0d layernorm=%0d gelu=%0d host=%0d",
             n_s1, n_s2, n_s3, n_sm, n_clip, n_ln, n_ge, n_host);
    checks++; if (n_s1 == 0) failures++;
    checks++; if (n_s2 == 0) failures++;
    checks++; if (n_s3 == 0) failures++;
    checks++; if (n_sm == 0) failures++;
    checks++; if (n_clip == 0) failures++;
    checks++; if (n_ln == 0) failures++;
    checks++; if (n_ge == 0) failures++;
    checks++; if (n_host == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
