// dpe_fov: data processing element, fovea mode (DPE (Fov)).
//
// Extracts pixel events from the AER word stream exactly as DPE (Exp) does and
// passes on only those that fall inside the focus of attention (FOA): a
// FOA_W x FOA_H window around the most salient pixel reported by the saliency
// block. The window spans [cx - FOA_W/2, cx + FOA_W/2 - 1] in x and likewise in
// y (the placement of an even-sized window on its centre is this design's
// choice). Each passed event carries its absolute coordinates and its position
// inside the window (0..FOA_W-1, 0..FOA_H-1), so a 16x16 window maps onto a
// 256-neuron core. Before any salient pixel exists nothing is passed.
//
// Timing: one registered stage after the merge stage (two cycles from an x word
// to the output event). Events outside the window are dropped without stalling.
module dpe_fov
  import fovea_pkg::*;
#(
  parameter int unsigned FOA_W = 16,
  parameter int unsigned FOA_H = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [AER_W-1:0] in_data,
  // most salient pixel (Sal_pixel_ID)
  input  logic             sal_valid,
  input  coord_t           sal_x,
  input  coord_t           sal_y,
  output logic             out_valid,
  input  logic             out_ready,
  output fov_ev_t          out_ev
);

  logic      m_valid, m_ready;
  pixel_ev_t m_ev;

  dpe_exp u_merge (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data,
    .out_valid(m_valid), .out_ready(m_ready), .out_ev(m_ev)
  );

  // Window test in signed arithmetic so windows at the array edge work
  logic signed [COORD_W+1:0] dx, dy;
  logic in_foa;
  assign dx = signed'({2'b00, m_ev.x}) - signed'({2'b00, sal_x}) + (COORD_W+2)'(FOA_W / 2);
  assign dy = signed'({2'b00, m_ev.y}) - signed'({2'b00, sal_y}) + (COORD_W+2)'(FOA_H / 2);
  assign in_foa = sal_valid && dx >= 0 && dx < (COORD_W+2)'(FOA_W)
                            && dy >= 0 && dy < (COORD_W+2)'(FOA_H);

  assign m_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_ev    <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (m_valid && m_ready && in_foa) begin
        out_ev    <= '{y: m_ev.y, x: m_ev.x, pol: m_ev.pol,
                       local_y: coord_t'(dy), local_x: coord_t'(dx)};
        out_valid <= 1'b1;
      end
    end
  end

endmodule
