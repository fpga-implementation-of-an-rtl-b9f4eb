// tdm: top-down modulation.
//
// Receives the same pixel events as the gating block and produces the
// Modulated_gain that the saliency block adds to a pixel's state for that
// event (the "1" of s = 1 + s_old * exp(-dt/tau) becomes this gain). With
// enable set, events inside the region of interest get params.gain_in (the
// highest modulation) and the others get params.gain_out; with enable clear
// every event gets 1.0. Gains are in the pixel-state format (Q12.8).
//
// Timing: the gain is registered on the cycle the event is taken (in_fire),
// the same cycle the gating block registers it, so the two outputs stay paired.
module tdm
  import fovea_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        enable,
  input  tdb_params_t params,
  input  logic        in_fire,
  input  pixel_ev_t   in_ev,
  output fr_t         gain
);

  fr_t gain_d;

  always_comb begin
    if (!enable)                            gain_d = FR_ONE;
    else if (in_roi(params.roi, in_ev.x, in_ev.y)) gain_d = params.gain_in;
    else                                    gain_d = params.gain_out;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       gain <= FR_ONE;
    else if (in_fire) gain <= gain_d;
  end

endmodule
