// exp_func: pixel-state decay and update (Exp_Func).
//
// Computes fr_new = fr_gain + fr_init * exp(-delta_t / tau), the per-event
// state update of the saliency model, with the exponential replaced by a
// piecewise-linear curve to save hardware. tau is supplied as its reciprocal,
// inv_tau = 2^24 / tau (tau in timestamp ticks), so u = delta_t / tau comes
// from one multiplication instead of a division. exp(-u) is interpolated
// linearly between the breakpoints u = k/2, k = 0..16, whose values
// round(2^16 * exp(-k/2)) are the EXP_Y table of fovea_pkg; for u >= 8 the
// decay is 0. The linear pieces overestimate exp(-u) by at most 3% of full
// scale (at u near 0.25). States are Q12.8 signed; the result saturates to the
// 21-bit range.
//
// The gain is the top-down modulated gain for an event (1.0 without
// modulation), 0 to refresh the state of the most salient pixel, and +S_plus or
// -S_minus for inhibition-of-return updates. A tag travels with each operation.
//
// Timing: three pipeline stages, one operation per cycle; out_valid is in_valid
// delayed by 3 cycles (the latency the saliency block is built for).
module exp_func
  import fovea_pkg::*;
#(
  parameter int unsigned TAG_W = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  fr_t              fr_init,
  input  ts_t              delta_t,
  input  fr_t              fr_gain,
  input  logic [23:0]      inv_tau,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output fr_t              fr_new,
  output logic [TAG_W-1:0] out_tag
);

  // ---- stage 1: u = delta_t / tau in Q32.24
  logic [55:0] u;
  assign u = 56'(delta_t) * 56'(inv_tau);

  logic             s1_valid, s1_zero;
  logic [3:0]       s1_seg;
  logic [15:0]      s1_frac;
  fr_t              s1_fr, s1_gain;
  logic [TAG_W-1:0] s1_tag;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_zero  <= 1'b0;
      s1_seg   <= '0;
      s1_frac  <= '0;
      s1_fr    <= '0;
      s1_gain  <= '0;
      s1_tag   <= '0;
    end else begin
      s1_valid <= in_valid;
      s1_zero  <= (u[55:23] >= 33'(EXP_SEGS));
      s1_seg   <= u[26:23];
      s1_frac  <= u[22:7];
      s1_fr    <= fr_init;
      s1_gain  <= fr_gain;
      s1_tag   <= in_tag;
    end
  end

  // ---- stage 2: decay = y[k] - (y[k] - y[k+1]) * frac
  exp_y_t      y0, y1;
  logic [32:0] drop;
  assign y0   = EXP_Y[5'(s1_seg)];
  assign y1   = EXP_Y[5'(s1_seg) + 5'd1];
  assign drop = 33'(y0 - y1) * 33'(s1_frac);

  logic             s2_valid;
  exp_y_t           s2_decay;
  fr_t              s2_fr, s2_gain;
  logic [TAG_W-1:0] s2_tag;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s2_valid <= 1'b0;
      s2_decay <= '0;
      s2_fr    <= '0;
      s2_gain  <= '0;
      s2_tag   <= '0;
    end else begin
      s2_valid <= s1_valid;
      s2_decay <= s1_zero ? '0 : exp_y_t'(y0 - exp_y_t'(drop >> 16));
      s2_fr    <= s1_fr;
      s2_gain  <= s1_gain;
      s2_tag   <= s1_tag;
    end
  end

  // ---- stage 3: fr_new = gain + fr_init * decay, saturated
  logic signed [47:0] prod, sum;
  assign prod = 48'(s2_fr) * signed'({31'd0, s2_decay});
  assign sum  = (prod >>> 16) + 48'(s2_gain);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      fr_new    <= '0;
      out_tag   <= '0;
    end else begin
      out_valid <= s2_valid;
      fr_new    <= sat_fr(sum);
      out_tag   <= s2_tag;
    end
  end

endmodule
