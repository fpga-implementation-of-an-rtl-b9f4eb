// tdg: top-down gating.
//
// Sits between DPE (Exp) and the saliency block. When enable is set, an event
// crosses only if its pixel lies inside the region of interest given by the
// top-down biasing parameters; other events are dropped. When enable is clear
// every event crosses. The region is an inclusive rectangle (x_min..x_max,
// y_min..y_max); the form of the biasing condition is this design's choice,
// picked to express the upper-half and left-half regions used in the
// experiments.
//
// Timing: one registered stage, one event per cycle; dropped events are
// consumed without stalling.
module tdg
  import fovea_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        enable,
  input  tdb_params_t params,
  input  logic        in_valid,
  output logic        in_ready,
  input  pixel_ev_t   in_ev,
  output logic        out_valid,
  input  logic        out_ready,
  output pixel_ev_t   out_ev
);

  logic pass;
  assign pass     = !enable || in_roi(params.roi, in_ev.x, in_ev.y);
  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_ev    <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready && pass) begin
        out_ev    <= in_ev;
        out_valid <= 1'b1;
      end
    end
  end

endmodule
