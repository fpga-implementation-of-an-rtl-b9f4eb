// hsr: handshake receiver, 4-phase AER to valid/ready stream.
//
// Follows the standard 4-phase (return-to-zero) AER protocol on the
// synchronized side of the FMS: when req is seen high the word is latched and
// offered downstream as Input_event (valid/ready/data). Once downstream has
// taken it, ack is raised; the receiver then waits for req to fall, drops ack
// and is ready for the next word. One word is in flight at a time, so the
// sender is stalled (by a late ack) whenever downstream is not ready.
//
// Timing: out_valid rises one cycle after req is seen; ack rises the cycle after
// the transfer; the next word can be taken the cycle after req falls.
module hsr #(
  parameter int unsigned DATA_W = fovea_pkg::AER_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              req,
  input  logic [DATA_W-1:0] data,
  output logic              ack,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [DATA_W-1:0] out_data
);

  typedef enum logic [1:0] {S_WAIT_REQ, S_OFFER, S_ACK} state_t;
  state_t state;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_WAIT_REQ;
      out_data <= '0;
      ack      <= 1'b0;
    end else begin
      unique case (state)
        S_WAIT_REQ: if (req) begin
          out_data <= data;
          state    <= S_OFFER;
        end
        S_OFFER: if (out_ready) begin
          ack   <= 1'b1;
          state <= S_ACK;
        end
        S_ACK: if (!req) begin
          ack   <= 1'b0;
          state <= S_WAIT_REQ;
        end
        default: state <= S_WAIT_REQ;
      endcase
    end
  end

  assign out_valid = (state == S_OFFER);

  // A word on offer stays unchanged until it is taken
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule
