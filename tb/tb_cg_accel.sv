// tb_cg_accel: end-to-end test of the channel gating accelerator at reduced
// buffer sizes. It runs a sequence of layers that together exercise every
// mechanism of the design and counts how often each happened:
//   gated-off activations, conditional passes, compaction with a partly
//   filled last batch, the channel-wise gate skipping channels, channel
//   shuffle, the bounded (tanh/sigmoid) gate, G = 1 (dense baseline),
//   stride 2, zero padding and output bank conflicts in a conditional batch.
// A mechanism that never happened counts as a failure. Outputs, statistics
// and exact cycle counts are checked against the model in the shared body.
module tb_cg_accel;
  import cg_pkg::*;

  localparam int LANES     = 4;
  localparam int FM_DEPTH  = 4096;
  localparam int OUT_DEPTH = 4096;
  localparam int W_DEPTH   = 8192;
  localparam int PIX_DEPTH = 128;
  localparam int MAX_COUT  = 64;

  `include "tb/cg_accel_tb_body.svh"

  cg_accel #(
    .LANES(LANES), .FM_DEPTH(FM_DEPTH), .OUT_DEPTH(OUT_DEPTH), .W_DEPTH(W_DEPTH),
    .PIX_DEPTH(PIX_DEPTH), .MAX_COUT(MAX_COUT)
  ) dut (.*);

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    reset_dut();
    //                  cin cout  h  w  k  s lg  mode          shuffle   tau%
    run_layer(make_cfg(  8,   8,  6, 6, 3, 1, 2, GATE_RELU,    1'b0),    0);
    run_layer(make_cfg(  8,   8,  6, 6, 3, 1, 2, GATE_RELU,    1'b1),    0);
    run_layer(make_cfg( 16,   8,  5, 7, 3, 1, 3, GATE_RELU,    1'b0),   45);
    run_layer(make_cfg(  8,  16,  6, 6, 3, 1, 1, GATE_BOUNDED, 1'b1),    0);
    run_layer(make_cfg(  8,   8,  5, 5, 3, 1, 0, GATE_RELU,    1'b0),    0);
    run_layer(make_cfg(  8,   8,  9, 9, 3, 2, 2, GATE_RELU,    1'b0),   30);
    run_layer(make_cfg( 16,  16,  4, 4, 1, 1, 2, GATE_RELU,    1'b1),   10);
    // reset between layers must not matter
    reset_dut();
    run_layer(make_cfg(  8,   8,  6, 6, 3, 1, 2, GATE_RELU,    1'b0),   20);

    $display("mechanisms: gated_off=%0d cond_pass=%0d partial_batch=%0d skip=%0d kept=%0d shuffle=%0d bounded=%0d baseline=%0d stride2=%0d padding=%0d bank_stalls=%0d",
             seen_gated_off, seen_cond, seen_partial_batch, seen_skip, seen_kept, seen_shuffle,
             seen_bounded, seen_baseline, seen_stride2, seen_padding, seen_bank_stall);
    checks++; if (seen_gated_off == 0)     fail("no activation was gated off");
    checks++; if (seen_cond == 0)          fail("no conditional pass ran");
    checks++; if (seen_partial_batch == 0) fail("no partly filled conditional batch");
    checks++; if (seen_skip == 0)          fail("the channel-wise gate never skipped a channel");
    checks++; if (seen_kept == 0)          fail("the channel-wise gate never kept a channel");
    checks++; if (seen_shuffle == 0)       fail("channel shuffle never used");
    checks++; if (seen_bounded == 0)       fail("bounded gate never used");
    checks++; if (seen_baseline == 0)      fail("G = 1 never run");
    checks++; if (seen_stride2 == 0)       fail("stride 2 never run");
    checks++; if (seen_padding == 0)       fail("zero padding never used");
    checks++; if (seen_bank_stall == 0)    fail("no output bank conflict was ever serialised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
