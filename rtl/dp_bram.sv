// dp_bram: simple dual-port block RAM, used for RAM_FR (pixel states) and
// RAM_TIME (last-event timestamps).
//
// Port A writes (ena & wea), port B reads with one cycle of latency, both on
// the same clock, as in a Xilinx block RAM in simple dual-port mode. The
// contents start at zero (block RAM initial value), so a pixel that has never
// fired has state 0 and timestamp 0.
//
// Timing: dob holds mem[addrb] from the cycle after enb is high. A read and a
// write of the same address in one cycle return the old word.
module dp_bram #(
  parameter int unsigned ADDR_W = fovea_pkg::ADDR_W,
  parameter int unsigned DATA_W = fovea_pkg::FR_W
) (
  input  logic              clk,
  input  logic              ena,
  input  logic              wea,
  input  logic [ADDR_W-1:0] addra,
  input  logic [DATA_W-1:0] dia,
  input  logic              enb,
  input  logic [ADDR_W-1:0] addrb,
  output logic [DATA_W-1:0] dob
);

  logic [DATA_W-1:0] mem [2**ADDR_W];

  initial begin
    for (int i = 0; i < 2**ADDR_W; i++) mem[i] = '0;
  end

  always_ff @(posedge clk) begin
    if (ena && wea) mem[addra] <= dia;
  end

  always_ff @(posedge clk) begin
    if (enb) dob <= mem[addrb];
  end

endmodule
