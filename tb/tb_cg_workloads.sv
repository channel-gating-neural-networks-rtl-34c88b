// tb_cg_workloads: layer shapes of the networks channel gating was evaluated
// on, run on cg_accel with all default parameters. Gate thresholds are set
// the way a trained network's merged gate sets them, thr = E[x] +
// T*sqrt(Var(x)) per output channel, with the target thresholds T and group
// counts G of the CIFAR-10 results (ResNet-18: G=8 T=2.0 and G=16 T=3.0;
// VGG-16 and binary VGG-11: G=8 T=1.0, the latter with +1/-1 features and
// weights) and one 3x3 convolution from each of the four residual-block
// stages of ResNet-18 on ImageNet (64x56x56, 128x28x28, 256x14x14, 512x7x7),
// the network whose per-block execution time is broken down for the
// published accelerator. Features and weights are random, so the fraction of
// activations that pass the gate follows a normal distribution rather than a
// trained network's.
//
// The channel-wise gate is swept over the same points as the weight-access
// study of ResNet-18 on CIFAR-10 (T in {1.5, 2.0}, tau_c in {0, 0.05, 0.10,
// 0.20}) on a 64->64 32x32 layer. Each point reports the weight-access
// reduction (all weights over the words the layer needed) and fails if a
// larger tau_c needed more weight words than a smaller one.
//
// For every layer it checks outputs, statistics and the cycle count, and
// reports three times in cycles: dense (the same 16 lanes with no gating),
// measured, and the ideal "FLOPs / number of multipliers" time, plus the
// totals over the four ImageNet blocks. It counts a failure if gating made a
// layer slower than dense or faster than the ideal.
module tb_cg_workloads;
  import cg_pkg::*;

  localparam int LANES     = 16;
  localparam int FM_DEPTH  = 262144;
  localparam int OUT_DEPTH = 262144;
  localparam int W_DEPTH   = 2359296;
  localparam int PIX_DEPTH = 4096;
  localparam int MAX_COUT  = 1024;

  `include "tb/cg_accel_tb_body.svh"

  cg_accel dut (.*);

  initial begin
    repeat (100000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint sum_dense, sum_meas, sum_ideal;
  real t_pts [2] = '{1.5, 2.0};
  int  tau_pts [4] = '{0, 5, 10, 20};

  task automatic workload(input string name, input layer_cfg_t lc, input real t_target,
                          input bit binary = 1'b0);
    run_layer(lc, 0, t_target, binary);
    $display("%s: dense %0d cycles, measured %0d (speed-up %.2fx), ideal %0d (%.2fx), %0d of %0d activations effective",
             name, last_dense_cycles, last_cycles, real'(last_dense_cycles) / real'(last_cycles),
             last_theory_cycles, real'(last_dense_cycles) / real'(last_theory_cycles),
             last_effective, last_positions);
    checks++;
    if (last_cycles >= last_dense_cycles) fail({name, ": no faster than dense"});
    checks++;
    if (last_cycles < last_theory_cycles) fail({name, ": faster than the ideal bound"});
  endtask

  initial begin
    reset_dut();
    //                                                  cin cout   h   w  k  s lg  mode       shuffle    T
    workload("ResNet-18 CIFAR-10 G=8 T=2.0",  make_cfg( 64,  64, 32, 32, 3, 1, 3, GATE_RELU, 1'b1), 2.0);
    workload("ResNet-18 CIFAR-10 G=16 T=3.0", make_cfg(128, 128, 16, 16, 3, 1, 4, GATE_RELU, 1'b1), 3.0);
    workload("VGG-16 CIFAR-10 G=8 T=1.0",     make_cfg(256, 256,  8,  8, 3, 1, 3, GATE_RELU, 1'b0), 1.0);
    workload("Binary VGG-11 CIFAR-10 G=8 T=1.0",
             make_cfg(128, 128, 16, 16, 3, 1, 3, GATE_RELU, 1'b0), 1.0, 1'b1);
    // ImageNet ResNet-18, one convolution per residual-block stage
    sum_dense = 0; sum_meas = 0; sum_ideal = 0;
    for (int st = 0; st < 4; st++) begin
      int c, hw;
      c = 64 << st; hw = 56 >> st;
      workload($sformatf("ResNet-18 ImageNet stage %0d conv (%0dx%0dx%0d) G=8 T=2.0", st + 1, c, hw, hw),
               make_cfg(c, c, hw, hw, 3, 1, 3, GATE_RELU, 1'b1), 2.0);
      sum_dense += last_dense_cycles; sum_meas += last_cycles; sum_ideal += last_theory_cycles;
    end
    $display("ResNet-18 ImageNet blocks: dense %0d, measured %0d, ideal %0d cycles: speed-up %.2fx measured, %.2fx ideal",
             sum_dense, sum_meas, sum_ideal, real'(sum_dense) / real'(sum_meas),
             real'(sum_dense) / real'(sum_ideal));
    // channel-wise gate sweep
    foreach (t_pts[a]) begin
      longint prev_ww;
      prev_ww = -1;
      foreach (tau_pts[b]) begin
        layer_cfg_t lc;
        lc = make_cfg(64, 64, 32, 32, 3, 1, 3, GATE_RELU, 1'b1);
        run_layer(lc, tau_pts[b], t_pts[a]);
        $display("ResNet-18 CIFAR-10 G=8 T=%.1f tau_c=%.2f: %0d of 64 channels skip the conditional path, weight words %0d of %0d (%.2fx fewer), %0d cycles",
                 t_pts[a], real'(tau_pts[b]) / 100.0, last_skipped, last_weight_words,
                 64 * 64 * 9, real'(64 * 64 * 9) / real'(last_weight_words), last_cycles);
        checks++;
        if (prev_ww >= 0 && last_weight_words > prev_ww)
          fail("a larger tau_c needed more weight words");
        prev_ww = last_weight_words;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
