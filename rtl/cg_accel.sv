// cg_accel: channel gating convolution accelerator (top level).
//
// Runs one convolution layer with channel gating and channel grouping. The
// input channels are split into G = 2**log2_g groups and so are the output
// channels. For an output channel of group g:
//   1. Base pass. LANES output positions at a time are accumulated over the
//      input channels of group g only (partial sum W_p*x_p).
//   2. Activation-wise gate. Each partial sum is compared with the channel's
//      threshold. Every result is written to the output at once as f(partial
//      sum). Positions whose decision is 1 are appended, with their partial
//      sum, to the compaction queue. The decisions are also counted.
//   3. Channel-wise gate. If fewer than tau_count positions of the channel
//      said 1, the whole channel skips its conditional path.
//   4. Conditional pass. The queue is drained LANES entries at a time. Each
//      lane resumes from its stored partial sum and accumulates over the other
//      G-1 input groups. It then overwrites its output with f(full sum).
// This is Eq. 1 of channel gating: y = f(W_p*x_p) when d = 0, otherwise
// y = f(W_p*x_p + W_r*x_r). The work of the conditional pass is
// ceil(#effective/LANES) * (C_in - C_in/G)*K*K cycles, so the time saved
// follows the number of gated-off activations. Output channels can be written
// in channel-shuffled order for the next layer.
//
// What follows the paper: the base/conditional split by channel group, the
// step-function gates with merged thresholds, the channel-wise gate, reuse of
// the partial sum, comparators as the only addition to a dense MAC array,
// and the optional shuffle. This design's own choices: one output channel at a
// time, one lane per output position, the weight broadcast to all lanes (the
// paper's array is systolic), the compaction queue, 8-bit data, 32-bit sums,
// the requantising shift and the host interface below.
//
// Interface. The host fills the input feature buffer (fm_*), the weight
// buffer (w_*) and the per-output-channel thresholds (thr_*), sets cfg and
// pulses start. busy stays high until done pulses for one cycle. The host then
// reads the output buffer (out_raddr, data one cycle later) and stats.
// The output buffer is banked by word address mod LANES (cg_obuf_banked). A
// base tile writes LANES consecutive words and always finishes in one cycle;
// a conditional batch stays in S_C_WRITE until every lane has been written,
// one extra cycle per extra write to its busiest bank.
// Memory layouts, all channel-major:
//   input  [ci][iy][ix]         at (ci*h_in + iy)*w_in + ix
//   weight [co][ci][ky][kx]     at ((co*c_in + ci)*k + ky)*k + kx
//   output [ch][oy][ox]         at ch*h_out*w_out + oy*w_out + ox,
//                               ch = shuffled channel when cfg.shuffle_en
// Required: c_in and c_out divisible by G; h_out*w_out <= PIX_DEPTH.
// With G = 1 the conditional path is empty and the layer runs as a plain
// dense convolution (the baseline accelerator).
module cg_accel
  import cg_pkg::*;
#(
  parameter int unsigned LANES     = 16,
  parameter int unsigned FM_DEPTH  = 262144,   // input feature words
  parameter int unsigned OUT_DEPTH = 262144,   // output feature words
  parameter int unsigned W_DEPTH   = 2359296,  // weight words (512*512*3*3)
  parameter int unsigned PIX_DEPTH = 4096,     // output positions per channel
  parameter int unsigned MAX_COUT  = 1024,     // threshold entries
  localparam int unsigned FM_AW    = $clog2(FM_DEPTH),
  localparam int unsigned OUT_AW   = $clog2(OUT_DEPTH),
  localparam int unsigned W_AW     = $clog2(W_DEPTH),
  localparam int unsigned PIX_W    = $clog2(PIX_DEPTH),
  localparam int unsigned THR_AW   = $clog2(MAX_COUT)
) (
  input  logic              clk,
  input  logic              rst_n,
  // layer control
  input  layer_cfg_t        cfg,
  input  logic              start,
  output logic              busy,
  output logic              done,
  // host loads the input feature map
  input  logic              fm_we,
  input  logic [FM_AW-1:0]  fm_waddr,
  input  data_t             fm_wdata,
  // host loads the weights
  input  logic              w_we,
  input  logic [W_AW-1:0]   w_waddr,
  input  data_t             w_wdata,
  // host loads the merged gate thresholds of one output channel
  input  logic              thr_we,
  input  logic [THR_AW-1:0] thr_waddr,
  input  acc_t              thr_lo_wdata,
  input  acc_t              thr_hi_wdata,
  // host reads the output feature map
  input  logic [OUT_AW-1:0] out_raddr,
  output data_t             out_rdata,
  // run statistics
  output cg_stats_t         stats
);

  // ------------------------------------------------------------------
  // Layer configuration, latched at start
  // ------------------------------------------------------------------
  layer_cfg_t c;
  logic [CH_W-1:0]  cpg_in, cpg_out;   // channels per group
  logic [PIX_W:0]   n_pix;             // h_out * w_out
  logic [31:0]      kk;                // k * k

  assign cpg_in  = c.c_in  >> c.log2_g;
  assign cpg_out = c.c_out >> c.log2_g;
  assign n_pix   = (PIX_W+1)'(c.h_out * c.w_out);
  assign kk      = 32'(c.k) * 32'(c.k);

  // ------------------------------------------------------------------
  // Controller state
  // ------------------------------------------------------------------
  typedef enum logic [3:0] {
    S_IDLE, S_CH_START, S_B_SETUP, S_B_RUN, S_B_DRAIN, S_B_GATE,
    S_C_DECIDE, S_C_POP, S_C_RUN, S_C_DRAIN, S_C_WRITE, S_CH_DONE, S_DONE
  } state_e;

  state_e           st;
  logic [CH_W-1:0]  o, grp, m;         // output channel, its group and index
  logic [PIX_W:0]   p0;                // first position of the base tile
  logic [CH_W-1:0]  ci_t;              // channel counter inside a pass
  logic [K_W-1:0]   ky, kx;
  logic             cond;              // 1 while in the conditional pass

  // Lane registers: which output position each MAC lane works on.
  localparam int unsigned EW = ACC_W + PIX_W + 2*DIM_W;
  typedef struct packed {
    acc_t             psum;
    logic [PIX_W-1:0] pix;
    logic [DIM_W-1:0] oy;
    logic [DIM_W-1:0] ox;
  } entry_t;

  logic [LANES-1:0] lane_v;
  logic [PIX_W-1:0] lane_pix [LANES];
  logic [DIM_W-1:0] lane_oy  [LANES];
  logic [DIM_W-1:0] lane_ox  [LANES];

  // ------------------------------------------------------------------
  // Term counter: (channel, ky, kx) of the current MAC step
  // ------------------------------------------------------------------
  logic [CH_W-1:0] n_ci;               // channels in this pass
  logic [CH_W-1:0] ci;                 // absolute input channel
  logic [CH_W-1:0] own0;               // first input channel of group grp
  logic            last_term;

  assign own0 = CH_W'(grp * cpg_in);
  assign n_ci = cond ? CH_W'(c.c_in - cpg_in) : cpg_in;
  always_comb begin
    if (!cond)             ci = CH_W'(own0 + ci_t);
    else if (ci_t < own0)  ci = ci_t;
    else                   ci = CH_W'(ci_t + cpg_in);
  end
  assign last_term = (ci_t == n_ci - 1'b1) && (ky == c.k - 1'b1) && (kx == c.k - 1'b1);

  // ------------------------------------------------------------------
  // Memories
  // ------------------------------------------------------------------
  logic [FM_AW-1:0]  fm_raddr [LANES];
  logic [DATA_W-1:0] fm_rdata [LANES];
  data_t             act_in   [LANES];
  logic [W_AW-1:0]   w_raddr  [1];
  logic [DATA_W-1:0] w_rdata  [1];
  logic [THR_AW-1:0] thr_raddr [1];
  logic [2*ACC_W-1:0] thr_rdata [1];
  logic [LANES-1:0]  out_req, out_grant, wr_pend;
  logic [OUT_AW-1:0] out_waddr [LANES];
  logic [DATA_W-1:0] out_wdata [LANES];
  data_t             y_out     [LANES];
  logic [DATA_W-1:0] out_rd;

  cg_mem #(.WIDTH(DATA_W), .DEPTH(FM_DEPTH), .NW(1), .NR(LANES)) u_fmap (
    .clk(clk), .we(fm_we), .waddr('{fm_waddr}), .wdata('{fm_wdata}),
    .raddr(fm_raddr), .rdata(fm_rdata));

  cg_mem #(.WIDTH(DATA_W), .DEPTH(W_DEPTH), .NW(1), .NR(1)) u_wbuf (
    .clk(clk), .we(w_we), .waddr('{w_waddr}), .wdata('{w_wdata}),
    .raddr(w_raddr), .rdata(w_rdata));

  cg_mem #(.WIDTH(2*ACC_W), .DEPTH(MAX_COUT), .NW(1), .NR(1)) u_thr (
    .clk(clk), .we(thr_we), .waddr('{thr_waddr}), .wdata('{{thr_hi_wdata, thr_lo_wdata}}),
    .raddr(thr_raddr), .rdata(thr_rdata));

  cg_obuf_banked #(.LANES(LANES), .WIDTH(DATA_W), .DEPTH(OUT_DEPTH)) u_obuf (
    .clk(clk), .req(out_req), .waddr(out_waddr), .wdata(out_wdata), .grant(out_grant),
    .raddr(out_raddr), .rdata(out_rd));

  assign out_rdata    = data_t'(out_rd);
  assign thr_raddr[0] = THR_AW'(o);

  acc_t thr_lo, thr_hi;
  assign thr_lo = thr_rdata[0][ACC_W-1:0];
  assign thr_hi = thr_rdata[0][2*ACC_W-1:ACC_W];

  // Address generation for the current term, one input read per lane.
  logic             issue;
  logic [LANES-1:0] ok_now;
  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      int iy, ix;
      iy = int'(lane_oy[l]) * int'(c.stride) + int'(ky) - int'(c.pad);
      ix = int'(lane_ox[l]) * int'(c.stride) + int'(kx) - int'(c.pad);
      ok_now[l] = lane_v[l] && iy >= 0 && iy < int'(c.h_in) && ix >= 0 && ix < int'(c.w_in);
      fm_raddr[l] = ok_now[l] ? FM_AW'((int'(ci) * int'(c.h_in) + iy) * int'(c.w_in) + ix) : '0;
    end
    w_raddr[0] = W_AW'(((32'(o) * 32'(c.c_in) + 32'(ci)) * 32'(c.k) + 32'(ky)) * 32'(c.k) + 32'(kx));
  end
  assign issue = (st == S_B_RUN) || (st == S_C_RUN);

  // ------------------------------------------------------------------
  // MAC array (data arrives one cycle after the address)
  // ------------------------------------------------------------------
  logic             mac_load, mac_en;
  logic [LANES-1:0] mac_ok;
  acc_t             mac_init [LANES];
  acc_t             acc      [LANES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mac_en <= 1'b0;
      mac_ok <= '0;
    end else begin
      mac_en <= issue;
      mac_ok <= ok_now;
    end
  end

  cg_mac_array #(.LANES(LANES)) u_mac (
    .clk(clk), .rst_n(rst_n), .load(mac_load), .init(mac_init),
    .en(mac_en), .ok(mac_ok), .act(act_in), .weight(data_t'(w_rdata[0])), .acc(acc));

  // ------------------------------------------------------------------
  // Gates
  // ------------------------------------------------------------------
  logic [LANES-1:0] d;
  logic             has_cond;          // a conditional path exists (G > 1)
  logic [15:0]      ch_count;
  logic             ch_keep;

  assign has_cond = (c.log2_g != '0);

  cg_act_gate #(.LANES(LANES)) u_gate (
    .psum(acc), .valid(lane_v), .mode(c.gate_mode),
    .thr_lo(thr_lo), .thr_hi(thr_hi), .d(d));

  cg_channel_gate #(.LANES(LANES), .CNT_W(16)) u_chgate (
    .clk(clk), .rst_n(rst_n), .clear(st == S_CH_START), .add(st == S_B_GATE),
    .d(d), .tau_count(c.tau_count), .count(ch_count), .keep(ch_keep));

  // ------------------------------------------------------------------
  // Compaction queue of gated-on positions, carrying their partial sums
  // ------------------------------------------------------------------
  entry_t           q_push_data [LANES];
  entry_t           q_pop_data  [LANES];
  logic [LANES-1:0] q_pop_valid;
  logic [PIX_W:0]   q_count;
  logic             q_empty;
  logic             q_push, q_pop;

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      q_push_data[l].psum = acc[l];
      q_push_data[l].pix  = lane_pix[l];
      q_push_data[l].oy   = lane_oy[l];
      q_push_data[l].ox   = lane_ox[l];
    end
  end
  assign q_push = (st == S_B_GATE) && has_cond;
  assign q_pop  = (st == S_C_POP);

  cg_compactor #(.LANES(LANES), .DEPTH(PIX_DEPTH), .EW(EW)) u_cmp (
    .clk(clk), .rst_n(rst_n), .clear(st == S_CH_START),
    .push(q_push), .push_mask(d), .push_data(q_push_data),
    .pop(q_pop), .pop_data(q_pop_data), .pop_valid(q_pop_valid),
    .count(q_count));
  assign q_empty = (q_count == '0);

  // ------------------------------------------------------------------
  // Output stage: f, requantisation, shuffle, write-back
  // ------------------------------------------------------------------
  logic [CH_W-1:0] ch_store;

  cg_shuffle u_shuf (
    .en(c.shuffle_en), .log2_g(c.log2_g), .g(grp), .m(m), .n(cpg_out), .ch(ch_store));

  for (genvar l = 0; l < LANES; l++) begin : g_out
    cg_act_fn u_f (.x(acc[l]), .mode(c.gate_mode), .shift(c.out_shift), .y(y_out[l]));
    assign out_wdata[l] = y_out[l];
    assign act_in[l]    = data_t'(fm_rdata[l]);
    assign out_waddr[l] = OUT_AW'(32'(ch_store) * 32'(n_pix) + 32'(lane_pix[l]));
  end
  // A base tile writes LANES consecutive words, one per bank, in one cycle; a
  // conditional batch keeps its unwritten lanes pending until all are granted.
  assign out_req = (st == S_B_GATE) ? lane_v : (st == S_C_WRITE) ? wr_pend : '0;

  // MAC load: zero at a base tile, stored partial sums at a conditional one.
  always_comb begin
    mac_load = (st == S_B_SETUP) || (st == S_C_POP);
    for (int l = 0; l < LANES; l++)
      mac_init[l] = (st == S_C_POP) ? q_pop_data[l].psum : '0;
  end

  // ------------------------------------------------------------------
  // Sequencer
  // ------------------------------------------------------------------
  function automatic logic [31:0] popcount(input logic [LANES-1:0] v);
    logic [31:0] n;
    n = '0;
    for (int i = 0; i < LANES; i++) n += 32'(v[i]);
    return n;
  endfunction

  // Output positions of the next base tile, one per lane.
  logic [31:0] tile_p [LANES];
  always_comb
    for (int l = 0; l < LANES; l++) tile_p[l] = 32'(p0) + 32'(l);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st    <= S_IDLE;
      c     <= '0;
      o     <= '0;
      grp   <= '0;
      m     <= '0;
      p0    <= '0;
      ci_t  <= '0;
      ky    <= '0;
      kx    <= '0;
      cond  <= 1'b0;
      lane_v <= '0;
      wr_pend <= '0;
      for (int l = 0; l < LANES; l++) begin
        lane_pix[l] <= '0;
        lane_oy[l]  <= '0;
        lane_ox[l]  <= '0;
      end
      stats <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (st != S_IDLE) stats.cycles <= stats.cycles + 1;

      unique case (st)
        S_IDLE: if (start) begin
          c     <= cfg;
          o     <= '0;
          grp   <= '0;
          m     <= '0;
          stats <= '0;
          st    <= S_CH_START;
        end

        S_CH_START: begin
          p0   <= '0;
          cond <= 1'b0;
          stats.weight_words <= stats.weight_words + 32'(cpg_in) * kk;
          st   <= S_B_SETUP;
        end

        // Assign LANES consecutive output positions to the lanes.
        S_B_SETUP: begin
          for (int l = 0; l < LANES; l++) begin
            lane_v[l]   <= (tile_p[l] < 32'(n_pix));
            lane_pix[l] <= PIX_W'(tile_p[l]);
            lane_oy[l]  <= DIM_W'(tile_p[l] / 32'(c.w_out));
            lane_ox[l]  <= DIM_W'(tile_p[l] % 32'(c.w_out));
          end
          ci_t <= '0; ky <= '0; kx <= '0;
          st   <= S_B_RUN;
        end

        S_B_RUN, S_C_RUN: begin
          if (st == S_B_RUN) stats.base_cycles <= stats.base_cycles + 1;
          else               stats.cond_cycles <= stats.cond_cycles + 1;
          if (kx != c.k - 1'b1) kx <= kx + 1'b1;
          else begin
            kx <= '0;
            if (ky != c.k - 1'b1) ky <= ky + 1'b1;
            else begin
              ky   <= '0;
              ci_t <= ci_t + 1'b1;
            end
          end
          if (last_term) st <= (st == S_B_RUN) ? S_B_DRAIN : S_C_DRAIN;
        end

        S_B_DRAIN: st <= S_B_GATE;

        // Gate, write f(partial sum), queue the effective positions.
        S_B_GATE: begin
          p0 <= p0 + (PIX_W+1)'(LANES);
          if (32'(p0) + LANES < 32'(n_pix)) st <= S_B_SETUP;
          else                              st <= S_C_DECIDE;
        end

        S_C_DECIDE: begin
          stats.n_effective <= stats.n_effective + 32'(ch_count);
          if (has_cond && !ch_keep) stats.ch_skipped <= stats.ch_skipped + 1'b1;
          if (has_cond && ch_keep && !q_empty) begin
            cond <= 1'b1;
            stats.weight_words <= stats.weight_words + 32'(c.c_in - cpg_in) * kk;
            st   <= S_C_POP;
          end else begin
            st <= S_CH_DONE;
          end
        end

        // Fill the lanes from the queue; the MAC array loads the partial sums.
        S_C_POP: begin
          for (int l = 0; l < LANES; l++) begin
            lane_v[l]   <= q_pop_valid[l];
            lane_pix[l] <= q_pop_data[l].pix;
            lane_oy[l]  <= q_pop_data[l].oy;
            lane_ox[l]  <= q_pop_data[l].ox;
          end
          ci_t <= '0; ky <= '0; kx <= '0;
          st   <= S_C_RUN;
        end

        S_C_DRAIN: begin
          wr_pend <= lane_v;
          st      <= S_C_WRITE;
        end

        // Stay until every lane of the batch has been written to its bank.
        S_C_WRITE: begin
          wr_pend <= wr_pend & ~out_grant;
          if ((wr_pend & ~out_grant) == '0) begin
            stats.n_cond_done <= stats.n_cond_done + popcount(lane_v);
            st <= q_empty ? S_CH_DONE : S_C_POP;
          end
        end

        S_CH_DONE: begin
          lane_v <= '0;
          if (o == c.c_out - 1'b1) st <= S_DONE;
          else begin
            o <= o + 1'b1;
            if (m == cpg_out - 1'b1) begin
              m   <= '0;
              grp <= grp + 1'b1;
            end else begin
              m <= m + 1'b1;
            end
            st <= S_CH_START;
          end
        end

        S_DONE: begin
          done <= 1'b1;
          st   <= S_IDLE;
        end

        default: st <= S_IDLE;
      endcase
    end
  end

  assign busy = (st != S_IDLE);

  // ------------------------------------------------------------------
  // Configuration rules
  // ------------------------------------------------------------------
  always_ff @(posedge clk) begin
    if (st == S_B_GATE)
      a_base_one_cycle: assert (out_grant == lane_v)
        else $error("cg_accel: base tile write hit one bank twice");
    if (start && st == S_IDLE) begin
      a_cin_groups: assert ((cfg.c_in & ((CH_W'(1) << cfg.log2_g) - 1'b1)) == '0)
        else $error("cg_accel: c_in not divisible by G");
      a_cout_groups: assert ((cfg.c_out & ((CH_W'(1) << cfg.log2_g) - 1'b1)) == '0)
        else $error("cg_accel: c_out not divisible by G");
      a_pix: assert (32'(cfg.h_out) * 32'(cfg.w_out) <= PIX_DEPTH)
        else $error("cg_accel: output plane larger than PIX_DEPTH");
    end
  end

endmodule
