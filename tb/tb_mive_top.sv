// tb_mive_top -- end-to-end test of the MIVE engine at its default parameters
// (L = 8, ROWS = 1024).
//
// The testbench plays the host: it streams the input vector into the on-chip
// buffer, issues the instruction program of LayerNorm, RMSNorm or Softmax one
// instruction per cycle (the two passes of each algorithm, with the LayerNorm
// and Softmax correction routines between the first-pass sub-vectors), and
// reads the normalised vector back out of the buffer.
//
// Every output element is checked twice:
//   * exactly against an integer model of the same program written here from
//     the formulas (its PWL end points come from real or integer arithmetic
//     of this file, not from the design's tables);
//   * against the real-valued function (LayerNorm, RMSNorm, Softmax) within
//     a small tolerance in output LSBs.
// Each program must take exactly one cycle per instruction (L elements per
// cycle for a vector instruction, the throughput the engine is rated at).
// The running mean, running maximum and sums are also checked at the end of
// the first pass.  Sizes: short vectors first, then the sizes of the models
// evaluated with the engine: LayerNorm over 7168 elements and Softmax over
// 2048 (OPT-30B hidden size and context), RMSNorm over 4096 and Softmax over
// 4096 (Llama2-7B).  Mechanisms counted (each must occur): running-maximum
// updates, LayerNorm mean corrections with a non-zero shift, exponentials
// below the table range (zero), INT8 saturation on write-back, buffer
// pointer wrap-around, and each of the three functions.
`timescale 1ns/1ps
module tb_mive_top;
  import mive_pkg::*;

  localparam int L = 8;
  localparam int ROWS = 1024;
  localparam int MAXN = 8192;

  int checks = 0, failures = 0;
  int n_maxupd = 0, n_lncorr = 0, n_expzero = 0, n_sat = 0, n_wrap = 0;
  int n_ln = 0, n_rms = 0, n_sm = 0;
  longint cycles = 0;
  longint cyc0;
  logic clk = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  logic rst_n, instr_valid, out_valid, buf_empty, buf_full;
  instr_t instr;
  elem_t ext_row [L], out_row [L];
  word_t pvec_b [L], pvec_c [L];
  logic [$clog2(ROWS+1)-1:0] buf_count;

  mive_top dut (.clk, .rst_n, .instr_valid, .instr, .ext_row, .pvec_b, .pvec_c,
                .out_row, .out_valid, .buf_count, .buf_empty, .buf_full);

  // ---------------------------------------------------------------- data
  int xin  [MAXN];
  int gq   [MAXN];   // gamma, Q6 of the output scale
  int bq   [MAXN];   // beta, output LSBs
  int yout [MAXN];
  int ymod [MAXN];

  // ---------------------------------------------------------------- instructions
  function automatic instr_t scal(sop_sel_t a, sop_sel_t b, sop_sel_t c, logic sub, int shamt,
                                  reg_ctl_t r, word_t imm);
    instr_t i;
    i = NOP;
    i.s.a = a; i.s.b = b; i.s.c = c; i.s.sub = sub; i.s.shamt = SHW'(shamt);
    i.r = r; i.imm = imm;
    return i;
  endfunction

  function automatic instr_t spwl(sop_sel_t a, pwl_fn_t fn, reg_ctl_t r, word_t imm);
    instr_t i;
    i = NOP;
    i.s.a = a; i.s.pwl = 1'b1; i.s.fn = fn; i.r = r; i.imm = imm;
    return i;
  endfunction

  function automatic instr_t vec(vb_sel_t b, vc_sel_t c, vsc_sel_t sc, logic sub, int shamt, word_t imm);
    instr_t i;
    i = NOP;
    i.v.b = b; i.v.c = c; i.v.sc = sc; i.v.sub = sub; i.v.shamt = SHW'(shamt);
    i.mv.x_we = 1'b1; i.imm = imm;
    return i;
  endfunction

  function automatic instr_t vexp();
    instr_t i;
    i = NOP;
    i.v.pwl = 1'b1; i.mv.x_we = 1'b1;
    return i;
  endfunction

  function automatic instr_t vsum(logic mx, logic wm, logic to_mnew);
    instr_t i;
    i = NOP;
    i.vs.max = mx; i.vs.with_mold = wm;
    if (to_mnew) begin i.r.mnew_we = 1'b1; i.r.mnew_from_vs = 1'b1; end
    else begin i.r.snew_we = 1'b1; i.r.snew_from_vs = 1'b1; end
    return i;
  endfunction

  function automatic instr_t pop_x();
    instr_t i;
    i = NOP;
    i.mv.pop = 1'b1; i.mv.x_we = 1'b1; i.mv.x_from_buf = 1'b1;
    return i;
  endfunction

  function automatic instr_t push_x();
    instr_t i;
    i = NOP;
    i.mv.push = 1'b1;
    return i;
  endfunction

  localparam reg_ctl_t W_MOLD = '{mold_we: 1'b1, default: 1'b0};
  localparam reg_ctl_t W_MNEW = '{mnew_we: 1'b1, default: 1'b0};
  localparam reg_ctl_t W_SOLD = '{sold_we: 1'b1, default: 1'b0};
  localparam reg_ctl_t W_SNEW = '{snew_we: 1'b1, default: 1'b0};
  localparam reg_ctl_t W_MOLD_FROM_MNEW = '{mold_we: 1'b1, mold_from_mnew: 1'b1, default: 1'b0};

  int instr_count;
  task automatic issue(instr_t i);
    @(negedge clk);
    instr = i; instr_valid = 1'b1;
    instr_count++;
    if (i.mv.push && !i.mv.push_ext)
      for (int l = 0; l < L; l++)
        if (dut.x[l] > 127 || dut.x[l] < -128) n_sat++;
    @(posedge clk);
    #1;
    instr_valid = 1'b0; instr = NOP;
  endtask

  // ---------------------------------------------------------------- host I/O
  task automatic load_vector(int n);
    for (int r = 0; r < n / L; r++) begin
      instr_t i;
      i = NOP; i.mv.push = 1'b1; i.mv.push_ext = 1'b1;
      @(negedge clk);
      for (int l = 0; l < L; l++) ext_row[l] = elem_t'(xin[r*L + l]);
      instr = i; instr_valid = 1'b1;
      @(posedge clk); #1;
      instr_valid = 1'b0; instr = NOP;
    end
  endtask

  task automatic drain_vector(int n);
    for (int r = 0; r < n / L; r++) begin
      instr_t i;
      i = NOP; i.mv.pop = 1'b1;
      @(negedge clk);
      instr = i; instr_valid = 1'b1;
      #1;
      if (!out_valid) begin failures++; $display("FAIL out_valid low on a pop"); end
      for (int l = 0; l < L; l++) yout[r*L + l] = int'(out_row[l]);
      @(posedge clk); #1;
      instr_valid = 1'b0; instr = NOP;
    end
  endtask

  task automatic set_params(int r);
    for (int l = 0; l < L; l++) begin
      pvec_b[l] = word_t'(gq[r*L + l]);
      pvec_c[l] = word_t'(bq[r*L + l]);
    end
  endtask

  // ---------------------------------------------------------------- reference PWL
  function automatic longint pwl_exp(longint v);
    longint t, k, o, e0, e1;
    t = (v > 0) ? 0 : -v;
    if (t >= 128) return 0;
    k = t / 8; o = t % 8;
    e0 = longint'($floor(32768.0 * $exp(-real'(k) / 2.0) + 0.5));
    e1 = longint'($floor(32768.0 * $exp(-real'(k + 1) / 2.0) + 0.5));
    return e0 + (((e1 - e0) * o) >>> 3);
  endfunction

  function automatic longint fend(int f, longint v);
    longint r;
    case (f)
      1: r = ((64'sd1 <<< 37) + v / 2) / v;                             // 2^37/v rounded
      2: r = longint'($floor(1073741824.0 / $sqrt(real'(v))));           // 2^30/sqrt(v)
      default: r = 32768 - (32768 + v / 2) / v;                          // 2^15 (v-1)/v
    endcase
    return (r > 2147483647) ? 2147483647 : r;
  endfunction

  function automatic longint pwl_oct(int f, longint v);
    longint x0, x1, o;
    int p;
    if (v <= 0) v = 1;
    p = 0;
    for (int n = 0; n < 62; n++) if (v >= (64'sd1 <<< n)) p = n;
    if (p < 3) return fend(f, v);
    x0 = v & ~((64'sd1 <<< (p - 3)) - 1);
    x1 = x0 + (64'sd1 <<< (p - 3));
    o  = v - x0;
    return fend(f, x0) + (((fend(f, x1) - fend(f, x0)) * o) >>> (p - 3));
  endfunction

  // 32-bit wrap helper and multiply-shift
  function automatic longint w32(longint v);
    return longint'(int'(v[31:0]));
  endfunction
  function automatic longint msh(longint a, longint b, int shamt);
    return w32((a * b) >>> shamt);
  endfunction
  function automatic int sat8(longint v);
    return (v > 127) ? 127 : (v < -128) ? -128 : int'(v);
  endfunction

  function automatic int isqrt_n(int n);   // round(sqrt(n) * 256)
    return int'($floor($sqrt(real'(n)) * 256.0 + 0.5));
  endfunction

  task automatic check_row_out(string name, int n, real tol, ref real yr [MAXN]);
    int bad;
    bad = 0;
    for (int k = 0; k < n; k++) begin
      real d;
      checks++;
      if (yout[k] != ymod[k]) begin
        failures++; bad++;
        if (bad < 5) $display("FAIL %s n=%0d elem %0d: got %0d model %0d", name, n, k, yout[k], ymod[k]);
      end
      d = real'(yout[k]) - yr[k]; if (d < 0) d = -d;
      checks++;
      if (d > tol) begin
        failures++; bad++;
        if (bad < 5) $display("FAIL %s n=%0d elem %0d: got %0d exact %f", name, n, k, yout[k], yr[k]);
      end
    end
  endtask

  real yreal [MAXN];

  // ================================================================ LayerNorm
  task automatic run_layernorm(int n);
    int R;
    longint sold, mold, snew, mnew, xm [L];
    real mu, var_, sd;
    int c0;
    R = n / L;
    load_vector(n);
    c0 = instr_count;
    cyc0 = cycles;
    issue(scal(SOP_ZERO, SOP_ZERO, SOP_ZERO, 0, 0, W_SOLD, 0));
    issue(scal(SOP_ZERO, SOP_ZERO, SOP_ZERO, 0, 0, W_MOLD, 0));
    sold = 0; mold = 0;
    for (int i = 1; i <= R; i++) begin
      issue(pop_x());
      issue(vsum(0, 0, 1));                                        // M_new <- mean (Q3)
      issue(scal(SOP_MNEW, SOP_IMM, SOP_ZERO, 0, 0, W_MNEW, 256)); // mean to Q11
      issue(push_x());
      issue(vec(VB_IMM, VC_SCALAR, VSC_MNEW, 1, 0, 2048));         // X <- 2048X - M_new
      issue(vec(VB_X, VC_ZERO, VSC_SOLD, 0, 22, 0));               // X <- X^2 >>> 22
      issue(vsum(0, 0, 0));                                        // S_new <- sum
      // LNC (Alg. 1)
      issue(scal(SOP_SOLD, SOP_IMM, SOP_SNEW, 0, 0, W_SOLD, 1));   // 1
      issue(spwl(SOP_IMM, FN_LNC, W_SNEW, i));                     // 2
      issue(scal(SOP_MOLD, SOP_IMM, SOP_MNEW, 1, 0, W_MOLD, 1));   // 3
      issue(scal(SOP_MOLD, SOP_SNEW, SOP_ZERO, 0, 15, W_SNEW, 0)); // 4
      issue(scal(SOP_MNEW, SOP_IMM, SOP_SNEW, 0, 0, W_MNEW, 1));   // 5
      issue(scal(SOP_MOLD, SOP_MOLD, SOP_ZERO, 0, 16, W_MOLD, 0)); // 6 (Q22 -> Q6)
      issue(spwl(SOP_IMM, FN_LNC, W_SNEW, i));                     // 7
      issue(scal(SOP_SNEW, SOP_MOLD, SOP_ZERO, 0, 18, W_MOLD, 0)); // 8 (x L folded in shift)
      issue(scal(SOP_MOLD, SOP_IMM, SOP_SOLD, 0, 0, W_SOLD, 1));   // 9
      issue(scal(SOP_ZERO, SOP_ZERO, SOP_ZERO, 0, 0, W_MOLD_FROM_MNEW, 0)); // 10
      // model
      mnew = 0;
      for (int l = 0; l < L; l++) mnew += xin[(i-1)*L + l];
      mnew = mnew * 256;
      snew = 0;
      for (int l = 0; l < L; l++) begin
        xm[l] = w32(2048 * xin[(i-1)*L + l] - mnew);
        xm[l] = msh(xm[l], xm[l], 22);
        snew = w32(snew + xm[l]);
      end
      sold = w32(sold + snew);
      snew = pwl_oct(3, i);
      mold = w32(mold - mnew);
      if (mold != 0 && i > 1) n_lncorr++;
      snew = msh(mold, snew, 15);
      mnew = w32(mnew + snew);
      mold = msh(mold, mold, 16);
      snew = pwl_oct(3, i);
      mold = msh(snew, mold, 18);
      sold = w32(mold + sold);
      mold = mnew;
    end
    // first-pass results
    checks += 2;
    if (dut.u_scalar.sold != word_t'(sold) || dut.u_scalar.mold != word_t'(mold)) begin
      failures++; $display("FAIL LN pass1 S=%0d M=%0d model S=%0d M=%0d", dut.u_scalar.sold, dut.u_scalar.mold, sold, mold);
    end
    mu = 0; for (int k = 0; k < n; k++) mu += xin[k]; mu /= n;
    var_ = 0; for (int k = 0; k < n; k++) var_ += (xin[k] - mu) * (xin[k] - mu);
    if ((real'(mold) / 2048.0 - mu) > 0.5 || (mu - real'(mold) / 2048.0) > 0.5) begin
      failures++; $display("FAIL LN running mean %f vs %f", real'(mold) / 2048.0, mu);
    end
    if (real'(sold) < 0.97 * var_ - 2.0 * n || real'(sold) > 1.03 * var_ + 2.0 * n) begin
      failures++; $display("FAIL LN running sum %0d vs %f", sold, var_);
    end
    checks++;
    // normalisation factor
    issue(spwl(SOP_SOLD, FN_RSQRT, W_SOLD, 0));
    issue(scal(SOP_SOLD, SOP_IMM, SOP_ZERO, 0, 22, W_SOLD, isqrt_n(n)));
    sold = pwl_oct(2, sold);
    sold = msh(sold, isqrt_n(n), 22);
    // second pass
    for (int i = 1; i <= R; i++) begin
      set_params(i - 1);
      issue(pop_x());
      issue(vec(VB_IMM, VC_SCALAR, VSC_MOLD, 1, 0, 2048));        // X <- 2048X - mu (Q11)
      issue(vec(VB_SCALAR, VC_ZERO, VSC_SOLD, 0, 19, 0));         // X <- X * inv_sigma (Q8)
      issue(vec(VB_PVEC, VC_PVEC, VSC_SOLD, 0, 14, 0));           // X <- gamma X + beta
      issue(push_x());
      for (int l = 0; l < L; l++) begin
        longint v;
        int k;
        k = (i-1)*L + l;
        v = w32(2048 * xin[k] - mold);
        v = msh(v, sold, 19);
        v = w32(msh(v, gq[k], 14) + bq[k]);
        ymod[k] = sat8(v);
      end
    end
    $display("LayerNorm N=%0d: %0d instructions, %0d cycles, %0d elements per vector instruction",
             n, instr_count - c0, cycles - cyc0, L);
    checks++;
    if (cycles - cyc0 != longint'(instr_count - c0)) begin
      failures++; $display("FAIL LayerNorm: %0d cycles for %0d instructions", cycles - cyc0, instr_count - c0);
    end
    drain_vector(n);
    sd = $sqrt(var_ / n);
    for (int k = 0; k < n; k++) begin
      real y;
      y = (xin[k] - mu) / sd * real'(gq[k]) / 64.0 + bq[k];
      yreal[k] = (y > 127.0) ? 127.0 : (y < -128.0) ? -128.0 : y;
    end
    check_row_out("LayerNorm", n, 3.0, yreal);
    n_ln++;
  endtask

  // ================================================================ RMSNorm
  task automatic run_rmsnorm(int n);
    int R, c0;
    longint sold, snew;
    real ms;
    R = n / L;
    load_vector(n);
    c0 = instr_count;
    cyc0 = cycles;
    issue(scal(SOP_ZERO, SOP_ZERO, SOP_ZERO, 0, 0, W_SOLD, 0));
    sold = 0;
    for (int i = 1; i <= R; i++) begin
      issue(pop_x());
      issue(push_x());
      issue(vec(VB_X, VC_ZERO, VSC_SOLD, 0, 0, 0));               // X <- X^2
      issue(vsum(0, 0, 0));                                        // S_new <- sum
      issue(scal(SOP_SOLD, SOP_IMM, SOP_SNEW, 0, 0, W_SOLD, 1));   // S <- S + S_new
      snew = 0;
      for (int l = 0; l < L; l++) snew += xin[(i-1)*L + l] * xin[(i-1)*L + l];
      sold = w32(sold + snew);
    end
    checks++;
    if (dut.u_scalar.sold != word_t'(sold)) begin failures++; $display("FAIL RMS sum %0d vs %0d", dut.u_scalar.sold, sold); end
    issue(spwl(SOP_SOLD, FN_RSQRT, W_SOLD, 0));
    issue(scal(SOP_SOLD, SOP_IMM, SOP_ZERO, 0, 22, W_SOLD, isqrt_n(n)));
    ms = real'(sold) / n;
    sold = pwl_oct(2, sold);
    sold = msh(sold, isqrt_n(n), 22);
    for (int i = 1; i <= R; i++) begin
      set_params(i - 1);
      issue(pop_x());
      issue(vec(VB_SCALAR, VC_ZERO, VSC_SOLD, 0, 8, 0));          // X <- X * inv_rms (Q8)
      issue(vec(VB_PVEC, VC_ZERO, VSC_SOLD, 0, 14, 0));           // X <- gamma X
      issue(push_x());
      for (int l = 0; l < L; l++) begin
        longint v;
        int k;
        k = (i-1)*L + l;
        v = msh(xin[k], sold, 8);
        v = msh(v, gq[k], 14);
        ymod[k] = sat8(v);
      end
    end
    $display("RMSNorm N=%0d: %0d instructions, %0d cycles, %0d elements per vector instruction",
             n, instr_count - c0, cycles - cyc0, L);
    checks++;
    if (cycles - cyc0 != longint'(instr_count - c0)) begin
      failures++; $display("FAIL RMSNorm: %0d cycles for %0d instructions", cycles - cyc0, instr_count - c0);
    end
    drain_vector(n);
    for (int k = 0; k < n; k++) begin
      real y;
      y = xin[k] / $sqrt(ms) * real'(gq[k]) / 64.0;
      yreal[k] = (y > 127.0) ? 127.0 : (y < -128.0) ? -128.0 : y;
    end
    check_row_out("RMSNorm", n, 3.0, yreal);
    n_rms++;
  endtask

  // ================================================================ Softmax
  task automatic run_softmax(int n);
    int R, c0;
    longint sold, mold, snew, mnew, e;
    real mx, den;
    R = n / L;
    load_vector(n);
    c0 = instr_count;
    cyc0 = cycles;
    issue(scal(SOP_ZERO, SOP_ZERO, SOP_ZERO, 0, 0, W_SOLD, 0));
    issue(scal(SOP_ZERO, SOP_ZERO, SOP_IMM, 0, 0, W_MOLD, -128));
    sold = 0; mold = -128;
    for (int i = 1; i <= R; i++) begin
      issue(pop_x());
      issue(vsum(1, 1, 1));                                        // M_new <- max(X, M_old)
      issue(push_x());
      issue(vec(VB_IMM, VC_SCALAR, VSC_MNEW, 1, 0, 1));            // X <- X - M_new
      issue(vexp());                                               // X <- e^X
      issue(vsum(0, 0, 0));                                        // S_new <- sum
      // SMC (Alg. 2)
      issue(scal(SOP_MOLD, SOP_IMM, SOP_MNEW, 1, 0, W_MOLD, 1));
      issue(spwl(SOP_MOLD, FN_EXP, W_MOLD, 0));
      issue(scal(SOP_SOLD, SOP_MOLD, SOP_SNEW, 0, 15, W_SOLD, 0));
      issue(scal(SOP_ZERO, SOP_ZERO, SOP_ZERO, 0, 0, W_MOLD_FROM_MNEW, 0));
      // model
      mnew = mold;
      for (int l = 0; l < L; l++) if (xin[(i-1)*L + l] > mnew) mnew = xin[(i-1)*L + l];
      if (mnew > mold && i > 1) n_maxupd++;
      snew = 0;
      for (int l = 0; l < L; l++) begin
        e = pwl_exp(xin[(i-1)*L + l] - mnew);
        if (xin[(i-1)*L + l] - mnew < -127) n_expzero++;
        snew = w32(snew + e);
      end
      mold = pwl_exp(mold - mnew);
      sold = w32(msh(sold, mold, 15) + snew);
      mold = mnew;
    end
    checks++;
    if (dut.u_scalar.sold != word_t'(sold) || dut.u_scalar.mold != word_t'(mold)) begin
      failures++; $display("FAIL SM pass1 S=%0d M=%0d model S=%0d M=%0d", dut.u_scalar.sold, dut.u_scalar.mold, sold, mold);
    end
    issue(spwl(SOP_SOLD, FN_RECIP, W_SOLD, 0));                   // S <- 2^37 / S
    sold = pwl_oct(1, sold);
    for (int i = 1; i <= R; i++) begin
      issue(pop_x());
      issue(vec(VB_IMM, VC_SCALAR, VSC_MOLD, 1, 0, 1));            // X <- X - max
      issue(vexp());                                               // X <- e^X (Q15)
      issue(vec(VB_SCALAR, VC_ZERO, VSC_SOLD, 0, 30, 0));          // X <- X / S (Q7)
      issue(push_x());
      for (int l = 0; l < L; l++) begin
        int k;
        k = (i-1)*L + l;
        ymod[k] = sat8(msh(pwl_exp(xin[k] - mold), sold, 30));
      end
    end
    $display("Softmax N=%0d: %0d instructions, %0d cycles, %0d elements per vector instruction",
             n, instr_count - c0, cycles - cyc0, L);
    checks++;
    if (cycles - cyc0 != longint'(instr_count - c0)) begin
      failures++; $display("FAIL Softmax: %0d cycles for %0d instructions", cycles - cyc0, instr_count - c0);
    end
    drain_vector(n);
    mx = -1.0e9;
    for (int k = 0; k < n; k++) if (xin[k] > mx) mx = xin[k];
    den = 0;
    for (int k = 0; k < n; k++) den += $exp((xin[k] - mx) / 16.0);
    for (int k = 0; k < n; k++) begin
      real y;
      y = 128.0 * $exp((xin[k] - mx) / 16.0) / den;
      yreal[k] = (y > 127.0) ? 127.0 : y;
    end
    check_row_out("Softmax", n, 2.0, yreal);
    n_sm++;
  endtask

  // ---------------------------------------------------------------- stimulus
  // Normalisation inputs: INT8 with a slowly drifting offset so that sub-vector
  // means differ; a few large-gamma lanes push outputs into saturation.
  task automatic gen_norm(int n, int spread);
    int drift;
    drift = $urandom_range(0, 60) - 30;
    for (int k = 0; k < n; k++) begin
      int v;
      if (k % 64 == 0) drift = drift + $urandom_range(0, 20) - 10;
      v = drift + $urandom_range(0, 2 * spread) - spread;
      xin[k] = (v > 127) ? 127 : (v < -128) ? -128 : v;
      gq[k]  = $urandom_range(32 * 64, 96 * 64) / 64 * 32;      // gamma 0.5..1.5, output scale 1/32
      if ($urandom_range(0, 15) == 0) gq[k] = gq[k] * 2;
      bq[k]  = $urandom_range(0, 20) - 10;
    end
  endtask

  // Softmax logits in Q4: mostly small values, with the maximum rising along
  // the vector so that the running maximum is corrected several times.
  task automatic gen_logits(int n);
    for (int k = 0; k < n; k++) begin
      int v;
      v = $urandom_range(0, 120) - 100 + (k * 100) / n;
      if ($urandom_range(0, 63) == 0) v = $urandom_range(80, 127);
      xin[k] = (v > 127) ? 127 : (v < -128) ? -128 : v;
    end
  endtask

  logic [9:0] last_rd;
  always @(posedge clk) begin
    if (rst_n && dut.u_buffer.rd_ptr == '0 && last_rd == 10'(ROWS - 1)) n_wrap++;
    last_rd <= dut.u_buffer.rd_ptr;
  end

  initial begin
    rst_n = 0; instr_valid = 0; instr = NOP; instr_count = 0;
    for (int l = 0; l < L; l++) begin ext_row[l] = '0; pvec_b[l] = '0; pvec_c[l] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // short vectors
    gen_norm(16, 40);   run_layernorm(16);
    gen_norm(64, 30);   run_rmsnorm(64);
    gen_logits(64);     run_softmax(64);
    gen_norm(256, 60);  run_layernorm(256);
    // sizes of the evaluated models
    gen_norm(7168, 40); run_layernorm(7168);   // OPT-30B hidden size
    gen_logits(2048);   run_softmax(2048);     // OPT-30B context
    gen_norm(4096, 40); run_rmsnorm(4096);     // Llama2-7B hidden size
    gen_logits(4096);   run_softmax(4096);     // Llama2-7B context
    checks++;
    if (!buf_empty) begin failures++; $display("FAIL buffer not empty at the end"); end
    $display("COUNT max_updates=%0d ln_mean_corrections=%0d exp_zero=%0d saturations=%0d wraps=%0d ln=%0d rms=%0d sm=%0d",
             n_maxupd, n_lncorr, n_expzero, n_sat, n_wrap, n_ln, n_rms, n_sm);
    checks += 8;
    if (n_maxupd == 0) begin failures++; $display("FAIL no running-maximum update"); end
    if (n_lncorr == 0) begin failures++; $display("FAIL no LayerNorm mean correction"); end
    if (n_expzero == 0) begin failures++; $display("FAIL no exponential underflow"); end
    if (n_sat == 0) begin failures++; $display("FAIL no saturation"); end
    if (n_wrap == 0) begin failures++; $display("FAIL no buffer wrap-around"); end
    if (n_ln == 0) begin failures++; $display("FAIL LayerNorm never ran"); end
    if (n_rms == 0) begin failures++; $display("FAIL RMSNorm never ran"); end
    if (n_sm == 0) begin failures++; $display("FAIL Softmax never ran"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
