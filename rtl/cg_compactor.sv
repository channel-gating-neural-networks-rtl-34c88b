// cg_compactor: packs the sparse set of gated-on activations into dense
// groups of LANES for the conditional pass.
//
// After each base-pass tile, push = 1 appends the entries of the lanes whose
// mask bit is set, in lane order, to a circular queue (a prefix count gives
// each its slot, so up to LANES entries enter per cycle). pop = 1 removes up to
// LANES entries from the head; pop_data/pop_valid show them in the cycle
// before the pop (first-word-fall-through), lane l holding the l-th oldest.
// The paper only names "custom data layout and memory banking to support
// sparse data movements"; this queue is this design's way of keeping every
// MAC lane busy on the conditional path.
//
// clear empties the queue. Pushing beyond DEPTH entries is an error caught
// by an assertion. A push and a pop in the same cycle are allowed.
module cg_compactor #(
  parameter int unsigned LANES = 16,
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned EW    = 28,
  localparam int unsigned PW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             push,
  input  logic [LANES-1:0] push_mask,
  input  logic [EW-1:0]    push_data [LANES],
  input  logic             pop,
  output logic [EW-1:0]    pop_data  [LANES],
  output logic [LANES-1:0] pop_valid,
  output logic [PW:0]      count
);

  logic [EW-1:0] q [DEPTH];
  logic [PW-1:0] wr_ptr, rd_ptr;
  logic [PW:0]   n_push, n_pop;
  logic [PW-1:0] slot [LANES];

  // Slot of every pushed lane: write pointer plus the number of set mask bits
  // in the lanes below it.
  always_comb begin
    logic [PW:0] run;
    run = '0;
    for (int l = 0; l < LANES; l++) begin
      slot[l] = PW'(32'(wr_ptr) + 32'(run));
      if (push_mask[l]) run = run + 1'b1;
    end
    n_push = push ? run : '0;
  end

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      pop_valid[l] = (32'(l) < 32'(count));
      pop_data[l]  = q[PW'(32'(rd_ptr) + l)];
    end
    n_pop = (!pop) ? '0 : (32'(count) >= LANES) ? (PW+1)'(LANES) : count;
  end

  always_ff @(posedge clk) begin
    if (push)
      for (int l = 0; l < LANES; l++)
        if (push_mask[l]) q[slot[l]] <= push_data[l];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else if (clear) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      wr_ptr <= PW'(32'(wr_ptr) + 32'(n_push));
      rd_ptr <= PW'(32'(rd_ptr) + 32'(n_pop));
      count  <= count + n_push - n_pop;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
    end else if (!clear) begin
      a_no_overflow: assert (32'(count) + 32'(n_push) - 32'(n_pop) <= DEPTH)
        else $error("cg_compactor: queue overflow");
    end
  end

endmodule
