// dpe_exp: data processing element, exploring mode (DPE (Exp)).
//
// The DAVIS240C sends the two coordinates of an event as separate words: a
// row (y) word followed by one or more column (x) words. This block keeps the
// last y word and, for every x word, emits one full-resolution pixel_ID
// {y, x, polarity}. It works on the whole sensor array; the fovea-mode DPE
// reuses it and adds the window filter. The word format is defined in
// fovea_pkg.
//
// Interface: AER words in and pixel events out, both valid/ready streams.
// Timing: one registered output stage; an x word becomes an event on the next
// cycle, and one word is accepted per cycle when the output is free.
module dpe_exp
  import fovea_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [AER_W-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output pixel_ev_t        out_ev
);

  coord_t y_q;
  logic   is_x;

  assign is_x     = in_data[AER_W-1];
  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y_q       <= '0;
      out_valid <= 1'b0;
      out_ev    <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        if (is_x) begin
          out_ev    <= '{y: y_q, x: in_data[COORD_W-1:0], pol: in_data[COORD_W]};
          out_valid <= 1'b1;
        end else begin
          y_q <= in_data[COORD_W-1:0];
        end
      end
    end
  end

endmodule
