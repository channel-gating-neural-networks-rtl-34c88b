// cg_pe: one multiply-accumulate processing element of the MAC array.
//
// Holds the running sum of one output activation. load = 1 replaces the sum
// with init (zero for the base path, the stored partial sum W_p*x_p when the
// activation resumes on the conditional path, which is how partial sums are
// reused). en = 1 adds a*w when ok = 1 and leaves the sum when ok = 0 (zero
// padding or an empty lane). load has priority over en. One cycle per MAC.
module cg_pe
  import cg_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  load,
  input  acc_t  init,
  input  logic  en,
  input  logic  ok,
  input  data_t a,
  input  data_t w,
  output acc_t  acc
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        acc <= '0;
    else if (load)     acc <= init;
    else if (en && ok) acc <= acc + acc_t'(a * w);
  end

endmodule
