// cg_pkg: types and constants shared by the channel gating accelerator.
//
// A channel gating layer splits the input channels of a convolution into G
// groups. For output group i the base path convolves input group i only; the
// resulting partial sum is compared with a per-output-channel threshold and
// only activations that pass continue on the conditional path over the other
// G-1 groups. This package holds the layer configuration that a host writes
// before a run, the gate mode and the statistics the accelerator reports.
//
// The word widths are this design's choice (the paper only says the model is
// quantized): 8-bit signed activations and weights, 32-bit accumulators.
package cg_pkg;

  localparam int unsigned DATA_W = 8;   // activation and weight width
  localparam int unsigned ACC_W  = 32;  // partial-sum / accumulator width
  localparam int unsigned CH_W   = 11;  // channel counts up to 1024
  localparam int unsigned DIM_W  = 8;   // feature-map height/width up to 255
  localparam int unsigned K_W    = 3;   // kernel size up to 7
  localparam int unsigned LG_W   = 3;   // log2 of the number of groups

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  // Gate function, chosen after the network's activation function.
  //   GATE_RELU    : d = theta(x - thr_lo)                      (ReLU)
  //   GATE_BOUNDED : d = theta(thr_hi - x) * theta(x - thr_lo)  (tanh/sigmoid)
  typedef enum logic [0:0] {
    GATE_RELU    = 1'b0,
    GATE_BOUNDED = 1'b1
  } gate_mode_e;

  // One convolution layer. Output size, padding and stride are given by the
  // host; the accelerator does not derive them.
  typedef struct packed {
    logic [CH_W-1:0]  c_in;       // input channels
    logic [CH_W-1:0]  c_out;      // output channels
    logic [DIM_W-1:0] h_in;
    logic [DIM_W-1:0] w_in;
    logic [DIM_W-1:0] h_out;
    logic [DIM_W-1:0] w_out;
    logic [K_W-1:0]   k;          // square kernel size
    logic [1:0]       stride;     // 1 or 2
    logic [K_W-1:0]   pad;        // zero padding on each side
    logic [LG_W-1:0]  log2_g;     // number of channel groups G = 2**log2_g
    gate_mode_e       gate_mode;
    logic             shuffle_en; // write outputs in channel-shuffled order
    logic [15:0]      tau_count;  // channel-wise gate: ceil(tau_c * w_out * h_out)
    logic [4:0]       out_shift;  // requantisation right shift
  } layer_cfg_t;

  // Counters reported after a layer.
  typedef struct packed {
    logic [31:0] cycles;          // start to done
    logic [31:0] base_cycles;     // MAC cycles of the base pass
    logic [31:0] cond_cycles;     // MAC cycles of the conditional pass
    logic [31:0] n_effective;     // activations whose gate decision was 1
    logic [31:0] n_cond_done;     // activations that took the conditional path
    logic [15:0] ch_skipped;      // channels whose conditional path was skipped
    logic [31:0] weight_words;    // distinct weight words the layer needed:
                                  // W_p of every channel, W_r only of kept ones
  } cg_stats_t;

endpackage
