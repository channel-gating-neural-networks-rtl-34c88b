// cg_act_gate: activation-wise gate, one comparator pair per MAC lane.
//
// Decides for every lane whether its output activation takes the conditional
// path. The gate is the Heaviside step of the paper applied to the base-path
// partial sum x with batch normalisation already merged into the threshold,
// so the host passes thr_lo = Delta*sqrt(Var)+E (in partial-sum units):
//   ReLU networks     : d = (x >= thr_lo)
//   tanh/sigmoid nets : d = (x >= thr_lo) && (x <= thr_hi)
// Both gate forms and the ">=" of the step function follow the paper; that the
// thresholds arrive as integers in accumulator units is this design's choice.
//
// Purely combinational: d is valid in the cycle psum, valid and the
// thresholds are. Lanes with valid = 0 give d = 0.
module cg_act_gate
  import cg_pkg::*;
#(
  parameter int unsigned LANES = 16
) (
  input  acc_t             psum  [LANES],
  input  logic [LANES-1:0] valid,
  input  gate_mode_e       mode,
  input  acc_t             thr_lo,
  input  acc_t             thr_hi,
  output logic [LANES-1:0] d
);

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      logic above_lo, below_hi;
      above_lo = (psum[l] >= thr_lo);
      below_hi = (psum[l] <= thr_hi);
      unique case (mode)
        GATE_RELU:    d[l] = valid[l] & above_lo;
        GATE_BOUNDED: d[l] = valid[l] & above_lo & below_hi;
        default:      d[l] = 1'b0;
      endcase
    end
  end

endmodule
