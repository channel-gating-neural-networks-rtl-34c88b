// cg_mac_array: the row of MAC lanes that computes convolution sums.
//
// LANES processing elements each accumulate one output activation of the
// current output channel, so one weight word is shared by all lanes in a
// cycle while every lane reads its own input activation. The base pass runs
// one lane per output position; the conditional pass refills the lanes with
// the compacted positions whose gate said 1 and resumes from their stored
// partial sums. The paper's accelerator is a TPU-like systolic array; this
// design keeps the dataflow (dense lanes, partial-sum reuse) but broadcasts
// the weight instead of pipelining it through the lanes.
//
// Timing: as cg_pe, one MAC per lane per cycle with en; acc is registered.
module cg_mac_array
  import cg_pkg::*;
#(
  parameter int unsigned LANES = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load,
  input  acc_t             init [LANES],
  input  logic             en,
  input  logic [LANES-1:0] ok,
  input  data_t            act  [LANES],
  input  data_t            weight,
  output acc_t             acc  [LANES]
);

  for (genvar l = 0; l < LANES; l++) begin : g_pe
    cg_pe u_pe (
      .clk  (clk),
      .rst_n(rst_n),
      .load (load),
      .init (init[l]),
      .en   (en),
      .ok   (ok[l]),
      .a    (act[l]),
      .w    (weight),
      .acc  (acc[l])
    );
  end

endmodule
