// fms: flip-flop metastability synchronizer for the asynchronous AER input.
//
// The sensor drives req and data without reference to the FPGA clock. The
// request is passed through STAGES flip-flops (two by default, the "double
// flip-flop synchronizer" of the architecture) before the handshake receiver
// looks at it. The data bus is registered alongside the request through the
// same number of stages; because the 4-phase protocol holds data stable from
// before req rises until after ack is seen, the data is settled by the time the
// synchronized request arrives. ack is produced in the FPGA clock domain and is
// passed straight back to the sender.
//
// Timing: sync_req follows aer_req after STAGES clock edges.
module fms #(
  parameter int unsigned DATA_W = fovea_pkg::AER_W,
  parameter int unsigned STAGES = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  // asynchronous side (sensor)
  input  logic              aer_req,
  input  logic [DATA_W-1:0] aer_data,
  output logic              aer_ack,
  // synchronous side (DL_AER_in, towards HSR)
  output logic              sync_req,
  output logic [DATA_W-1:0] sync_data,
  input  logic              sync_ack
);

  logic [STAGES-1:0]              req_sr;
  logic [STAGES-1:0][DATA_W-1:0] data_sr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_sr  <= '0;
      data_sr <= '0;
    end else begin
      req_sr  <= {req_sr[STAGES-2:0], aer_req};
      data_sr <= {data_sr[STAGES-2:0], aer_data};
    end
  end

  assign sync_req  = req_sr[STAGES-1];
  assign sync_data = data_sr[STAGES-1];
  assign aer_ack   = sync_ack;

endmodule
