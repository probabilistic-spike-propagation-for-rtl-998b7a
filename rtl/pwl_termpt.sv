// pwl_termpt: termination point from a piecewise-linear weight model.
//
// When neuron i spikes, a threshold r is drawn uniformly from [0, |w_hat|)
// and the spike reaches exactly the synapses whose sorted weight magnitude is
// at least r; their count is the termination point termpt. Instead of
// searching the sorted weights, the curve "magnitude versus list position" is
// modelled by NSEG = 5 linear segments (the paper's PWL technique). Segment k
// starts at position x_k with magnitude w_k and falls with slope 1/slope_k,
// so a threshold r inside segment k gives
//     termpt = x_k + 1 + floor((w_k - r) * slope_k)     (slope_k in Q16.16)
// i.e. the positions 0..x_k plus those of the segment whose interpolated
// magnitude is still >= r; at a breakpoint the count is exact. The segment
// used is the last one whose start magnitude w_k is >= r. The result is
// clamped to n_max; n_max = 0 gives 0.
//
// The 5 segments and the idea of storing the slope-change points follow the
// paper; the segment record, the stored reciprocal slope (so no divider is
// needed) and the arithmetic widths are this design's choices.
//
// Pipeline: 2 stages, no stall. Stage 1 scales the random number,
// r = (rnd * mag) >> 16; stage 2 selects the segment and interpolates.
// out_valid/termpt appear 2 cycles after in_valid.
module pwl_termpt
  import psp_pkg::*;
(
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  input  logic [15:0]    rnd,         // uniform random number
  input  logic [W_W-1:0] mag,         // |w_hat|, top of the sorted curve
  input  pos_t           n_max,
  input  pwl_seg_t       segs [NSEG],
  output logic           out_valid,
  output pos_t           termpt,
  output logic [W_W-1:0] r_out        // threshold used (for statistics)
);

  // stage 1
  logic           s1_valid;
  logic [W_W-1:0] s1_r;
  pos_t           s1_n_max;
  pwl_seg_t       s1_segs [NSEG];

  always_ff @(posedge clk) begin
    if (!rst_n) s1_valid <= 1'b0;
    else        s1_valid <= in_valid;
    if (in_valid) begin
      s1_r     <= W_W'((32'(rnd) * 32'(mag)) >> 16);
      s1_n_max <= n_max;
      s1_segs  <= segs;
    end
  end

  // stage 2
  logic [2:0]     k;
  logic [W_W-1:0] diff;
  logic [47:0]    prod;
  logic [32:0]    t_raw;
  pos_t           t_clamped;

  always_comb begin
    k = 3'd0;
    for (int s = 1; s < NSEG; s++)
      if (s1_segs[s].w_k >= s1_r) k = 3'(s);
    diff  = (s1_segs[k].w_k >= s1_r) ? s1_segs[k].w_k - s1_r : '0;
    prod  = 48'(diff) * 48'(s1_segs[k].slope_k);
    t_raw = 33'(s1_segs[k].x_k) + 33'd1 + 33'(prod >> 16);
    if (s1_n_max == '0)                  t_clamped = '0;
    else if (t_raw >= 33'(s1_n_max))     t_clamped = s1_n_max;
    else                                 t_clamped = pos_t'(t_raw);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= s1_valid;
    if (s1_valid) begin
      termpt <= t_clamped;
      r_out  <= s1_r;
    end
  end

endmodule
