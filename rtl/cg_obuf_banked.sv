// cg_obuf_banked: output feature buffer built from LANES single-write-port
// banks, with per-bank arbitration of the lanes' write requests.
//
// Word address a lives in bank a % LANES at row a / LANES (LANES must be a
// power of two, so the bank is the low address bits). Each cycle every bank
// accepts the request of the lowest-numbered lane that addresses it; grant
// says which requests were written, and the lanes that lost retry in a later
// cycle. LANES consecutive addresses fall in LANES different banks, so a
// base-pass tile (LANES consecutive output positions of one channel) is
// always written in one cycle. The scattered positions of a conditional batch
// can collide and then take as many cycles as the most-requested bank has
// requests.
//
// The host read port reads the same row of every bank and selects one bank
// with a registered select: data appear one cycle after out_raddr, as with a
// single memory.
//
// The paper says that memory banking supports the sparse data movement of
// the conditional path but not how; this interleaving and the lowest-lane-
// first arbitration are this design's own.
module cg_obuf_banked #(
  parameter int unsigned LANES = 16,
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 262144,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned BW   = (LANES > 1) ? $clog2(LANES) : 1,
  localparam int unsigned BANK_DEPTH = DEPTH / LANES
) (
  input  logic             clk,
  input  logic [LANES-1:0] req,
  input  logic [AW-1:0]    waddr [LANES],
  input  logic [WIDTH-1:0] wdata [LANES],
  output logic [LANES-1:0] grant,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  localparam int unsigned RW = (BANK_DEPTH > 1) ? $clog2(BANK_DEPTH) : 1;

  function automatic logic [BW-1:0] bank_of(input logic [AW-1:0] a);
    return BW'(32'(a) % LANES);
  endfunction

  function automatic logic [RW-1:0] row_of(input logic [AW-1:0] a);
    return RW'(32'(a) / LANES);
  endfunction

  // Lowest-numbered requesting lane wins each bank.
  logic [LANES-1:0] b_we;
  logic [BW-1:0]    b_sel [LANES];
  always_comb begin
    grant = '0;
    b_we  = '0;
    for (int b = 0; b < LANES; b++) b_sel[b] = '0;
    for (int l = 0; l < LANES; l++) begin
      if (req[l] && !b_we[bank_of(waddr[l])]) begin
        b_we[bank_of(waddr[l])]  = 1'b1;
        b_sel[bank_of(waddr[l])] = BW'(l);
        grant[l] = 1'b1;
      end
    end
  end

  logic [WIDTH-1:0] b_rd [LANES];
  logic [BW-1:0]    rsel_q;

  for (genvar b = 0; b < LANES; b++) begin : g_bank
    logic [RW-1:0]    wa [1];
    logic [WIDTH-1:0] wd [1];
    logic [RW-1:0]    ra [1];
    logic [WIDTH-1:0] rd [1];
    assign wa[0]   = row_of(waddr[b_sel[b]]);
    assign wd[0]   = wdata[b_sel[b]];
    assign ra[0]   = row_of(raddr);
    assign b_rd[b] = rd[0];
    cg_mem #(.WIDTH(WIDTH), .DEPTH(BANK_DEPTH), .NW(1), .NR(1)) u_bank (
      .clk(clk), .we(b_we[b]), .waddr(wa), .wdata(wd), .raddr(ra), .rdata(rd));
  end

  always_ff @(posedge clk) rsel_q <= bank_of(raddr);
  assign rdata = b_rd[rsel_q];

endmodule
