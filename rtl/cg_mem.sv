// cg_mem: on-chip buffer with NW write ports and NR synchronous read ports.
//
// One generic memory serves as the input feature buffer (host write port,
// one read port per MAC lane), the weight buffer (host write port, one
// broadcast read port), the threshold table, and each bank of the banked
// output buffer (one write port, one read port). The paper names memory
// banking for sparse data movement but not its organisation. For the input
// buffer every read port reaches every word, which a real implementation
// would build from banks or replicated SRAMs.
//
// Timing: a read address presented in cycle t gives its data in cycle t+1
// (read-first: a write to the same address in cycle t is not seen). Writes
// take effect at the clock edge; when several ports write one address in the
// same cycle the highest-numbered port wins. Contents are not reset.
module cg_mem #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned NW    = 1,
  parameter int unsigned NR    = 1,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic [NW-1:0]    we,
  input  logic [AW-1:0]    waddr [NW],
  input  logic [WIDTH-1:0] wdata [NW],
  input  logic [AW-1:0]    raddr [NR],
  output logic [WIDTH-1:0] rdata [NR]
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    for (int p = 0; p < NW; p++)
      if (we[p] && 32'(waddr[p]) < DEPTH) mem[waddr[p]] <= wdata[p];
  end

  always_ff @(posedge clk) begin
    for (int p = 0; p < NR; p++)
      rdata[p] <= (32'(raddr[p]) < DEPTH) ? mem[raddr[p]] : '0;
  end

endmodule
