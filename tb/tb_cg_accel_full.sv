// tb_cg_accel_full: one complete channel gating layer on cg_accel with every
// parameter at its default (16 lanes, full-size buffers). The layer has the
// shape of a first-stage 3x3 convolution of the CIFAR-10 ResNet-18: 64 input
// and 64 output channels, 32x32 positions, G = 8 groups, ReLU gate, channel
// shuffle on and a channel-wise threshold of 5 % of the positions. Outputs,
// statistics and the exact cycle count are checked against the model in the
// shared body, as in tb_cg_accel.
module tb_cg_accel_full;
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
    repeat (20000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    reset_dut();
    run_layer(make_cfg(64, 64, 32, 32, 3, 1, 3, GATE_RELU, 1'b1), 5);
    checks++; if (seen_gated_off == 0) fail("no activation was gated off");
    checks++; if (seen_cond == 0)      fail("no conditional pass ran");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
