// fovea_top: event-driven saliency-based selective attention pipeline.
//
// Address events from a DAVIS240C arrive on a 4-phase AER bus, pass the
// flip-flop synchronizer (FMS) and the handshake receiver (HSR), and are then
// fanned out to two data processing elements:
//   exploring path: DPE (Exp) -> top-down gating (TDG) and top-down
//     modulation (TDM) -> saliency block (SAL), which tracks the most salient
//     pixel P* and applies inhibition of return;
//   fovea path: DPE (Fov), which passes only the events inside the 16x16
//     focus of attention (FOA) around P*.
// Fovea events leave on a monitoring stream (a USB host link on the original
// board, outside this design) and, when hss_enable is set, also through the
// handshake sender (HSS) on a 4-phase AER output bus.
//
// Fan-outs are lock-step forks: a word moves only when every receiver can take
// it. While the saliency block is busy (an update, or an FOA sweep after P*
// moves) the exploring path fills, the fork stalls and the sensor is held off
// by a late ack; no events are lost.
//
// Configuration inputs (static during operation): enable_tdg, enable_tdm,
// tdb_params (region of interest and TDM gains), inv_tau = 2^24 / tau with tau
// in timestamp ticks, s_plus and s_minus (Q12.8). AER_out data is
// {y[7:0], x[7:0], polarity}.
module fovea_top
  import fovea_pkg::*;
#(
  parameter int unsigned FOA_W        = 16,
  parameter int unsigned FOA_H        = 16,
  parameter int unsigned SENSOR_X     = SENSOR_W,
  parameter int unsigned SENSOR_Y     = SENSOR_H,
  parameter int unsigned CLK_PER_TICK = 100
) (
  input  logic             clk,
  input  logic             rst_n,
  // AER_in from the sensor
  input  logic             aer_in_req,
  input  logic [AER_W-1:0] aer_in_data,
  output logic             aer_in_ack,
  // configuration
  input  logic             enable_tdg,
  input  logic             enable_tdm,
  input  tdb_params_t      tdb_params,
  input  logic [23:0]      inv_tau,
  input  fr_t              s_plus,
  input  fr_t              s_minus,
  input  logic             hss_enable,
  // Sal_pixel_ID
  output logic             sal_valid,
  output coord_t           sal_x,
  output coord_t           sal_y,
  output logic             sal_update,
  output ts_t              timestamp,
  // Output_event monitoring stream
  output logic             mon_valid,
  input  logic             mon_ready,
  output fov_ev_t          mon_ev,
  // AER_out
  output logic             aer_out_req,
  output logic [2*COORD_W:0] aer_out_data,
  input  logic             aer_out_ack
);

  // ---- FMS + HSR
  logic             dl_req, dl_ack;
  logic [AER_W-1:0] dl_data;

  fms #(.DATA_W(AER_W)) u_fms (
    .clk, .rst_n,
    .aer_req(aer_in_req), .aer_data(aer_in_data), .aer_ack(aer_in_ack),
    .sync_req(dl_req), .sync_data(dl_data), .sync_ack(dl_ack)
  );

  logic             ie_valid, ie_ready;
  logic [AER_W-1:0] ie_data;

  hsr #(.DATA_W(AER_W)) u_hsr (
    .clk, .rst_n,
    .req(dl_req), .data(dl_data), .ack(dl_ack),
    .out_valid(ie_valid), .out_ready(ie_ready), .out_data(ie_data)
  );

  // ---- lock-step fork of Input_event to DPE (Exp) and DPE (Fov)
  logic exp_in_ready, fov_in_ready;
  assign ie_ready = exp_in_ready && fov_in_ready;

  // ---- exploring path
  logic      px_valid, px_ready;
  pixel_ev_t px_ev;

  dpe_exp u_dpe_exp (
    .clk, .rst_n,
    .in_valid(ie_valid && fov_in_ready), .in_ready(exp_in_ready), .in_data(ie_data),
    .out_valid(px_valid), .out_ready(px_ready), .out_ev(px_ev)
  );

  logic      g_valid, g_ready;
  pixel_ev_t g_ev;
  fr_t       mod_gain;

  tdg u_tdg (
    .clk, .rst_n,
    .enable(enable_tdg), .params(tdb_params),
    .in_valid(px_valid), .in_ready(px_ready), .in_ev(px_ev),
    .out_valid(g_valid), .out_ready(g_ready), .out_ev(g_ev)
  );

  tdm u_tdm (
    .clk, .rst_n,
    .enable(enable_tdm), .params(tdb_params),
    .in_fire(px_valid && px_ready), .in_ev(px_ev),
    .gain(mod_gain)
  );

  sal #(
    .FOA_W(FOA_W), .FOA_H(FOA_H), .SENSOR_X(SENSOR_X), .SENSOR_Y(SENSOR_Y),
    .CLK_PER_TICK(CLK_PER_TICK)
  ) u_sal (
    .clk, .rst_n,
    .in_valid(g_valid), .in_ready(g_ready), .in_ev(g_ev), .in_gain(mod_gain),
    .inv_tau, .s_plus, .s_minus,
    .sal_valid, .sal_x, .sal_y, .sal_update,
    .ts(timestamp)
  );

  // ---- fovea path
  logic    fo_valid, fo_ready;
  fov_ev_t fo_ev;

  dpe_fov #(.FOA_W(FOA_W), .FOA_H(FOA_H)) u_dpe_fov (
    .clk, .rst_n,
    .in_valid(ie_valid && exp_in_ready), .in_ready(fov_in_ready), .in_data(ie_data),
    .sal_valid, .sal_x, .sal_y,
    .out_valid(fo_valid), .out_ready(fo_ready), .out_ev(fo_ev)
  );

  // ---- lock-step fork of Output_event to monitoring and HSS
  logic hss_ready, hss_ok;
  assign hss_ok    = !hss_enable || hss_ready;
  assign fo_ready  = mon_ready && hss_ok;
  assign mon_valid = fo_valid && hss_ok;
  assign mon_ev    = fo_ev;

  hss #(.DATA_W(2*COORD_W+1)) u_hss (
    .clk, .rst_n,
    .in_valid(fo_valid && hss_enable && mon_ready), .in_ready(hss_ready),
    .in_data({fo_ev.y, fo_ev.x, fo_ev.pol}),
    .aer_req(aer_out_req), .aer_data(aer_out_data), .aer_ack(aer_out_ack)
  );

endmodule
