// sal_func: most-salient-pixel decision and inhibition of return (Sal_Func).
//
// Holds P*, the current most salient pixel. For each event the saliency block
// presents the event pixel's fresh state (in_eve_fr) and the state of P*
// decayed to the same moment (current_sal_fr) with a one-cycle cmp_valid
// strobe. If there is no P* yet, or in_eve_fr > current_sal_fr, the event
// pixel becomes the new P* (sal_update pulses) and two sweeps follow:
//   1. excitation: every pixel of the FOA around the new P* receives +S_plus;
//   2. inhibition: every pixel of the FOA around the previous P* receives
//      -S_minus (skipped when there was no previous P*).
// Each sweep emits one IOR request (valid/addr/gain) per cycle, row by row
// over the FOA_W x FOA_H window [c - FOA/2, c + FOA/2 - 1]; positions outside
// the SENSOR_W x SENSOR_H array are skipped (no request that cycle). The
// saliency block turns each request into a read-modify-write of that pixel.
// Between the two sweeps, and after the second, the block waits for pipe_idle
// so that a pixel in both windows is read only after its first update has been
// written. busy is high from the cycle after cmp_valid until all is done.
//
// Timing: a change of P* costs FOA_W*FOA_H cycles per sweep plus the pipeline
// drains (about 2 x 256 + 2 x 5 cycles for a 16x16 FOA).
module sal_func
  import fovea_pkg::*;
#(
  parameter int unsigned FOA_W    = 16,
  parameter int unsigned FOA_H    = 16,
  parameter int unsigned SENSOR_X = SENSOR_W,
  parameter int unsigned SENSOR_Y = SENSOR_H
) (
  input  logic   clk,
  input  logic   rst_n,
  // comparison request
  input  logic   cmp_valid,
  input  fr_t    in_eve_fr,
  input  coord_t in_eve_x,
  input  coord_t in_eve_y,
  input  fr_t    current_sal_fr,
  // inhibition-of-return step sizes
  input  fr_t    s_plus,
  input  fr_t    s_minus,
  // read-modify-write pipeline of the saliency block has drained
  input  logic   pipe_idle,
  output logic   busy,
  // Sal_pixel_ID
  output logic   sal_valid,
  output coord_t sal_x,
  output coord_t sal_y,
  output logic   sal_update,
  // IOR requests
  output logic   ior_valid,
  output coord_t ior_x,
  output coord_t ior_y,
  output fr_t    ior_gain
);

  localparam int unsigned N_FOA = FOA_W * FOA_H;
  localparam int unsigned CNT_W = $clog2(N_FOA + 1);

  typedef enum logic [2:0] {S_IDLE, S_EXC, S_DRAIN_EXC, S_INH, S_DRAIN_INH} state_t;
  state_t state;

  logic [CNT_W-1:0] cnt;
  logic   old_valid;
  coord_t old_x, old_y;
  logic   win_new;

  assign win_new = !sal_valid || (in_eve_fr > current_sal_fr);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      cnt        <= '0;
      sal_valid  <= 1'b0;
      sal_x      <= '0;
      sal_y      <= '0;
      old_valid  <= 1'b0;
      old_x      <= '0;
      old_y      <= '0;
      sal_update <= 1'b0;
    end else begin
      sal_update <= 1'b0;
      unique case (state)
        S_IDLE: if (cmp_valid && win_new) begin
          old_valid  <= sal_valid;
          old_x      <= sal_x;
          old_y      <= sal_y;
          sal_valid  <= 1'b1;
          sal_x      <= in_eve_x;
          sal_y      <= in_eve_y;
          sal_update <= 1'b1;
          cnt        <= '0;
          state      <= S_EXC;
        end
        S_EXC: begin
          cnt <= cnt + 1'b1;
          if (cnt == CNT_W'(N_FOA - 1)) state <= S_DRAIN_EXC;
        end
        S_DRAIN_EXC: if (pipe_idle) begin
          cnt   <= '0;
          state <= old_valid ? S_INH : S_IDLE;
        end
        S_INH: begin
          cnt <= cnt + 1'b1;
          if (cnt == CNT_W'(N_FOA - 1)) state <= S_DRAIN_INH;
        end
        S_DRAIN_INH: if (pipe_idle) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  // Window position of the current sweep step
  localparam int unsigned SW = COORD_W + 2;
  logic signed [SW-1:0] px, py;
  coord_t cx, cy;
  always_comb begin
    cx = (state == S_INH) ? old_x : sal_x;
    cy = (state == S_INH) ? old_y : sal_y;
    px = signed'(SW'(cx)) - signed'(SW'(FOA_W / 2)) + signed'(SW'(cnt % CNT_W'(FOA_W)));
    py = signed'(SW'(cy)) - signed'(SW'(FOA_H / 2)) + signed'(SW'(cnt / CNT_W'(FOA_W)));
  end

  assign ior_x     = coord_t'(px);
  assign ior_y     = coord_t'(py);
  assign ior_gain  = (state == S_INH) ? -s_minus : s_plus;
  assign ior_valid = (state == S_EXC || state == S_INH)
                     && px >= 0 && px < signed'(SW'(SENSOR_X))
                     && py >= 0 && py < signed'(SW'(SENSOR_Y));

endmodule
