// cg_act_fn: activation function f and requantisation of one output value.
//
// Takes the accumulator value chosen by Eq. 1 of the channel gating scheme
// (the partial sum when the gate said 0, the full sum otherwise) and produces
// the 8-bit activation stored for the next layer:
//   GATE_RELU    : y = sat8(max(x, 0) >>> shift)
//   GATE_BOUNDED : y = sat8(x >>> shift)  -- a hard clip at the 8-bit limits
//                  standing in for tanh/sigmoid.
// ReLU follows the paper. The arithmetic shift, the saturation and the hard
// clip for bounded activations are this design's choices; batch normalisation
// is assumed folded into the weights and the shift.
// Purely combinational.
module cg_act_fn
  import cg_pkg::*;
(
  input  acc_t       x,
  input  gate_mode_e mode,
  input  logic [4:0] shift,
  output data_t      y
);

  localparam acc_t MAXV = acc_t'(2**(DATA_W-1) - 1);
  localparam acc_t MINV = -acc_t'(2**(DATA_W-1));

  acc_t a, s;

  always_comb begin
    a = x;
    if (mode == GATE_RELU && x < 0) a = '0;
    s = a >>> shift;
    if (s > MAXV)      y = data_t'(MAXV);
    else if (s < MINV) y = data_t'(MINV);
    else               y = data_t'(s);
  end

endmodule
