// hss: handshake sender, valid/ready stream to 4-phase AER.
//
// Optional output stage that forwards Output_event words to another
// event-based device over a 4-phase AER link. A word taken from the stream is
// put on the data bus; req is raised one cycle later so the data has settled,
// the sender waits for ack high, drops req, waits for ack low and is then
// ready for the next word. ack comes from another clock domain and is
// synchronized with two flip-flops.
//
// Timing: a word costs at least 6 cycles plus the receiver's response times.
module hss #(
  parameter int unsigned DATA_W = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [DATA_W-1:0] in_data,
  output logic              aer_req,
  output logic [DATA_W-1:0] aer_data,
  input  logic              aer_ack
);

  typedef enum logic [1:0] {S_IDLE, S_SETUP, S_REQ, S_WAIT_ACK_LOW} state_t;
  state_t state;
  logic [1:0] ack_sr;
  logic       ack_s;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ack_sr <= '0;
    else        ack_sr <= {ack_sr[0], aer_ack};
  end
  assign ack_s = ack_sr[1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      aer_req  <= 1'b0;
      aer_data <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (in_valid) begin
          aer_data <= in_data;
          state    <= S_SETUP;
        end
        S_SETUP: begin
          aer_req <= 1'b1;
          state   <= S_REQ;
        end
        S_REQ: if (ack_s) begin
          aer_req <= 1'b0;
          state   <= S_WAIT_ACK_LOW;
        end
        S_WAIT_ACK_LOW: if (!ack_s) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign in_ready = (state == S_IDLE);

  // Data is held stable while a request is outstanding
  a_data_stable: assert property (@(posedge clk) disable iff (!rst_n)
    aer_req |=> $stable(aer_data));

endmodule
