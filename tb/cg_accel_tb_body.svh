// cg_accel_tb_body.svh: signals, reference model and tasks shared by the
// end-to-end testbenches of cg_accel. The including module defines LANES,
// FM_DEPTH, OUT_DEPTH, W_DEPTH, PIX_DEPTH and MAX_COUT to match the DUT and
// instantiates it as `dut` after this file.
//
// run_layer() loads random 4-bit (or +1/-1) features and weights, picks each
// output channel's threshold from its own partial sums (either one of them at
// random, so roughly half of the positions are gated off, or E + T*sd as a
// trained merged gate would), runs the layer and compares
//   - every output word with a software model of channel gating:
//     y = f(W_p*x_p) where the gate says 0 or the channel is skipped,
//     y = f(W_p*x_p + W_r*x_r) otherwise, stored at the (shuffled) channel;
//   - the statistics counters;
//   - the cycle count from start to done with the schedule's formula:
//     per channel 1 + tiles*(base_terms+3) + 1 + batches*(cond_terms+3) + 1,
//     plus 1, where tiles = ceil(P/LANES) and batches = ceil(effective/LANES),
//     plus, per conditional batch, one cycle for each extra write that the
//     busiest output bank (word address mod LANES) receives.

localparam int FM_AW  = $clog2(FM_DEPTH);
localparam int OUT_AW = $clog2(OUT_DEPTH);
localparam int W_AW   = $clog2(W_DEPTH);
localparam int THR_AW = $clog2(MAX_COUT);

logic              clk = 1'b0, rst_n = 1'b0;
layer_cfg_t        cfg;
logic              start = 1'b0, busy, done;
logic              fm_we = 1'b0, w_we = 1'b0, thr_we = 1'b0;
logic [FM_AW-1:0]  fm_waddr = '0;
data_t             fm_wdata = '0;
logic [W_AW-1:0]   w_waddr = '0;
data_t             w_wdata = '0;
logic [THR_AW-1:0] thr_waddr = '0;
acc_t              thr_lo_wdata = '0, thr_hi_wdata = '0;
logic [OUT_AW-1:0] out_raddr = '0;
data_t             out_rdata;
cg_stats_t         stats;

int checks = 0, failures = 0;

// How often each mechanism happened over all layers run.
int seen_gated_off, seen_cond, seen_skip, seen_kept, seen_shuffle, seen_bounded,
    seen_baseline, seen_partial_batch, seen_stride2, seen_padding, seen_bank_stall;

always #5 clk = ~clk;

task automatic fail(input string msg);
  failures++;
  if (failures <= 12) $display("FAIL: %s", msg);
endtask

task automatic check_eq(input string what, input longint got, input longint exp);
  checks++;
  if (got != exp) fail($sformatf("%s: got %0d expected %0d", what, got, exp));
endtask

function automatic longint act_ref(input longint x, input gate_mode_e mode, input int shift);
  longint v, q, e;
  v = x;
  if (mode == GATE_RELU && v < 0) v = 0;
  q = longint'(1) << shift;
  e = (v >= 0) ? v / q : -((-v + q - 1) / q);
  if (e > 127) e = 127;
  if (e < -128) e = -128;
  return e;
endfunction

task automatic reset_dut();
  rst_n = 1'b0;
  repeat (3) @(posedge clk);
  @(negedge clk) rst_n = 1'b1;
endtask

// Results of the last layer run, for the workload testbenches.
longint last_cycles, last_dense_cycles, last_theory_cycles, last_effective, last_positions;
longint last_weight_words, last_skipped;

// tau_pct: channel-wise threshold as a percentage of the positions.
// delta: when >= 0, the threshold of each output channel is the merged gate
//   thr = E[x] + delta*sqrt(Var(x)) over that channel's partial sums (the
//   target threshold T of a trained network, in standard deviations); when
//   negative, a random partial sum of the channel is used instead.
// binary: features and weights are +1/-1 (binarised network) instead of
//   random 4-bit values.
task automatic run_layer(input layer_cfg_t lc, input int tau_pct, input real delta = -1.0,
                         input bit binary = 1'b0);
  int cin, cout, hin, win, hout, wout, k, s, pad, g_n, cpgi, cpgo, pix;
  int bt, ct, tiles, exp_cycles, exp_eff, exp_cond, exp_skip, exp_base, exp_condc, exp_ww;
  data_t  xm [];
  data_t  wm [];
  longint ps [];
  longint fs [];
  longint thl [], thh [];
  int     ymem [];
  longint t0, t1;

  cin = lc.c_in; cout = lc.c_out; hin = lc.h_in; win = lc.w_in;
  hout = lc.h_out; wout = lc.w_out; k = lc.k; s = lc.stride; pad = lc.pad;
  g_n = 1 << lc.log2_g; cpgi = cin / g_n; cpgo = cout / g_n; pix = hout * wout;
  lc.tau_count = 16'((tau_pct * pix + 99) / 100);

  xm = new[cin * hin * win];
  wm = new[cout * cin * k * k];
  ps = new[cout * pix];
  fs = new[cout * pix];
  thl = new[cout]; thh = new[cout];
  ymem = new[cout * pix];

  if (binary) begin
    foreach (xm[i]) xm[i] = $urandom_range(0, 1) ? data_t'(1) : data_t'(-1);
    foreach (wm[i]) wm[i] = $urandom_range(0, 1) ? data_t'(1) : data_t'(-1);
  end else begin
    foreach (xm[i]) xm[i] = data_t'($signed($urandom_range(0, 15)) - 8);
    foreach (wm[i]) wm[i] = data_t'($signed($urandom_range(0, 15)) - 8);
  end

  // reference partial and full sums
  for (int o = 0; o < cout; o++) begin
    int grp;
    grp = o / cpgo;
    for (int p = 0; p < pix; p++) begin
      longint sp, sf;
      int oy, ox;
      oy = p / wout; ox = p % wout;
      sp = 0; sf = 0;
      for (int ci = 0; ci < cin; ci++)
        for (int ky = 0; ky < k; ky++)
          for (int kx = 0; kx < k; kx++) begin
            int iy, ix;
            longint prod;
            iy = oy * s + ky - pad; ix = ox * s + kx - pad;
            if (iy < 0 || iy >= hin || ix < 0 || ix >= win) begin
              if (ci == 0 && o == 0) seen_padding++;
              continue;
            end
            prod = longint'(xm[(ci * hin + iy) * win + ix]) *
                   longint'(wm[((o * cin + ci) * k + ky) * k + kx]);
            sf += prod;
            if (ci / cpgi == grp) sp += prod;
          end
      ps[o * pix + p] = sp;
      fs[o * pix + p] = sf;
    end
    if (delta >= 0.0) begin
      real mean, var_s, sd;
      mean = 0.0; var_s = 0.0;
      for (int p = 0; p < pix; p++) mean += real'(ps[o * pix + p]);
      mean = mean / pix;
      for (int p = 0; p < pix; p++) var_s += (real'(ps[o * pix + p]) - mean) ** 2;
      sd = $sqrt(var_s / pix);
      if (lc.gate_mode == GATE_RELU) begin
        // x >= mean + delta*sd  <=>  x >= ceil(mean + delta*sd) for integer x
        thl[o] = longint'($ceil(mean + delta * sd));
        thh[o] = thl[o];
      end else begin
        thl[o] = longint'($ceil(mean - delta * sd));
        thh[o] = longint'($floor(mean + delta * sd));
      end
    end else begin
      // threshold near the middle of this channel's partial sums
      thl[o] = ps[o * pix + $urandom_range(0, pix - 1)];
      thh[o] = thl[o] + $urandom_range(20, 200);
    end
  end

  // load the buffers through the host ports
  foreach (xm[i]) begin
    @(negedge clk); fm_we = 1; fm_waddr = FM_AW'(i); fm_wdata = xm[i];
  end
  @(negedge clk); fm_we = 0;
  foreach (wm[i]) begin
    @(negedge clk); w_we = 1; w_waddr = W_AW'(i); w_wdata = wm[i];
  end
  @(negedge clk); w_we = 0;
  for (int o = 0; o < cout; o++) begin
    @(negedge clk); thr_we = 1; thr_waddr = THR_AW'(o);
    thr_lo_wdata = acc_t'(thl[o]); thr_hi_wdata = acc_t'(thh[o]);
  end
  @(negedge clk); thr_we = 0;

  // expected outputs, statistics and schedule
  bt = cpgi * k * k;
  ct = (cin - cpgi) * k * k;
  tiles = (pix + LANES - 1) / LANES;
  exp_cycles = 1; exp_eff = 0; exp_cond = 0; exp_skip = 0; exp_base = 0; exp_condc = 0; exp_ww = 0;
  for (int o = 0; o < cout; o++) begin
    int cnt, grp, m, st_ch;
    bit keep, runs;
    int eff_pix [$];
    grp = o / cpgo; m = o % cpgo;
    st_ch = lc.shuffle_en ? m * g_n + grp : o;
    cnt = 0;
    eff_pix.delete();
    for (int p = 0; p < pix; p++) begin
      longint v;
      bit d;
      v = ps[o * pix + p];
      d = (lc.gate_mode == GATE_RELU) ? (v >= thl[o]) : (v >= thl[o] && v <= thh[o]);
      if (d) begin
        cnt++;
        eff_pix.push_back(p);
      end
    end
    keep = (cnt >= int'(lc.tau_count));
    runs = (g_n > 1) && keep && (cnt > 0);
    if (g_n > 1 && !keep) exp_skip++;
    if (g_n > 1 && keep) seen_kept++;
    exp_eff += cnt;
    exp_ww += bt;
    exp_base += tiles * bt;
    exp_cycles += 1 + tiles * (bt + 3) + 1 + 1;
    if (runs) begin
      int batches;
      batches = (cnt + LANES - 1) / LANES;
      exp_cond += cnt;
      exp_condc += batches * ct;
      exp_ww += ct;
      exp_cycles += batches * (ct + 3);
      if (cnt % LANES != 0) seen_partial_batch++;
      // output bank conflicts: a batch takes as many write cycles as its
      // most-used bank (bank = word address mod LANES) has writes
      for (int b = 0; b < batches; b++) begin
        int hits [LANES];
        int worst;
        foreach (hits[i]) hits[i] = 0;
        worst = 0;
        for (int e = b * LANES; e < (b + 1) * LANES && e < cnt; e++) begin
          int bk;
          bk = (st_ch * pix + eff_pix[e]) % LANES;
          hits[bk]++;
          if (hits[bk] > worst) worst = hits[bk];
        end
        exp_cycles += worst - 1;
        seen_bank_stall += worst - 1;
      end
    end
    for (int p = 0; p < pix; p++) begin
      longint v;
      bit d;
      v = ps[o * pix + p];
      d = (lc.gate_mode == GATE_RELU) ? (v >= thl[o]) : (v >= thl[o] && v <= thh[o]);
      if (!d) seen_gated_off++;
      ymem[st_ch * pix + p] = int'(act_ref((runs && d) ? fs[o * pix + p] : v,
                                           lc.gate_mode, int'(lc.out_shift)));
    end
  end

  // run
  @(negedge clk);
  cfg = lc;
  start = 1;
  @(negedge clk);
  start = 0;
  t0 = $time;
  fork
    begin wait (done); end
    begin repeat (exp_cycles * 2 + 1000) @(posedge clk); end
  join_any
  disable fork;
  t1 = $time;
  checks++;
  if (!done) fail("layer did not finish");
  @(negedge clk);

  // read back and compare
  for (int i = 0; i < cout * pix; i++) begin
    @(negedge clk) out_raddr = OUT_AW'(i);
    @(posedge clk); #1;
    checks++;
    if (int'(out_rdata) != ymem[i]) fail($sformatf("y[%0d] = %0d, expected %0d", i, out_rdata, ymem[i]));
  end

  check_eq("stats.cycles", stats.cycles, exp_cycles);
  check_eq("stats.base_cycles", stats.base_cycles, exp_base);
  check_eq("stats.cond_cycles", stats.cond_cycles, exp_condc);
  check_eq("stats.n_effective", stats.n_effective, exp_eff);
  check_eq("stats.n_cond_done", stats.n_cond_done, exp_cond);
  check_eq("stats.ch_skipped", stats.ch_skipped, exp_skip);
  check_eq("stats.weight_words", stats.weight_words, exp_ww);

  last_cycles        = stats.cycles;
  last_dense_cycles  = longint'(cout) * tiles * cin * k * k;
  last_theory_cycles = (longint'(cout) * pix * bt + longint'(exp_cond) * ct + LANES - 1) / LANES;
  last_effective     = exp_eff;
  last_weight_words  = exp_ww;
  last_skipped       = exp_skip;
  last_positions     = longint'(cout) * pix;
  if (exp_cond > 0) seen_cond++;
  if (exp_skip > 0) seen_skip++;
  if (lc.shuffle_en && g_n > 1) seen_shuffle++;
  if (lc.gate_mode == GATE_BOUNDED) seen_bounded++;
  if (g_n == 1) seen_baseline++;
  if (s == 2) seen_stride2++;
  $display("layer cin=%0d cout=%0d %0dx%0d k=%0d s=%0d G=%0d mode=%0d shuf=%0d tau=%0d: %0d cycles (dense would be %0d MAC cycles, used %0d), %0d of %0d effective, %0d channels skipped",
           cin, cout, hout, wout, k, s, g_n, lc.gate_mode, lc.shuffle_en, lc.tau_count,
           stats.cycles, cout * tiles * cin * k * k, exp_base + exp_condc, exp_eff, cout * pix, exp_skip);
endtask

function automatic layer_cfg_t make_cfg(input int cin, input int cout, input int hin, input int win,
                                        input int k, input int s, input int lg,
                                        input gate_mode_e mode, input bit shuf);
  layer_cfg_t lc;
  int pad;
  pad = k / 2;
  lc = '0;
  lc.c_in = CH_W'(cin); lc.c_out = CH_W'(cout);
  lc.h_in = DIM_W'(hin); lc.w_in = DIM_W'(win);
  lc.h_out = DIM_W'((hin + 2 * pad - k) / s + 1);
  lc.w_out = DIM_W'((win + 2 * pad - k) / s + 1);
  lc.k = K_W'(k); lc.stride = 2'(s); lc.pad = K_W'(pad);
  lc.log2_g = LG_W'(lg); lc.gate_mode = mode; lc.shuffle_en = shuf;
  lc.out_shift = 5'd3;
  return lc;
endfunction
