// cg_channel_gate: channel-wise gate for one output channel at a time.
//
// While the base pass of an output channel runs, the activation-wise decision
// vectors of each tile are added up (popcount). After the last tile, keep = 1
// when at least tau_count activations of the channel chose the conditional
// path, i.e. S = theta(sum_{j,k} d - tau_c*w*h) as in the paper; keep = 0
// means the whole channel skips its conditional path and its conditional
// weights are never read. The host supplies tau_count = ceil(tau_c*w_out*h_out)
// (this design's choice of representation); tau_count = 0 disables the gate.
//
// Timing: clear resets the count (one cycle); each cycle with add = 1 adds
// popcount(d) to the count; count and keep are combinational from the
// registered count.
module cg_channel_gate #(
  parameter int unsigned LANES = 16,
  parameter int unsigned CNT_W = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             add,
  input  logic [LANES-1:0] d,
  input  logic [15:0]      tau_count,
  output logic [CNT_W-1:0] count,
  output logic             keep
);

  logic [CNT_W-1:0] pop;

  always_comb begin
    pop = '0;
    for (int l = 0; l < LANES; l++) pop += CNT_W'(d[l]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     count <= '0;
    else if (clear) count <= '0;
    else if (add)   count <= count + pop;
  end

  assign keep = (32'(count) >= 32'(tau_count));

endmodule
