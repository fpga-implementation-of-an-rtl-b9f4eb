// timestamper: free-running event timestamp counter.
//
// Counts one tick every CLK_PER_TICK clock cycles (100 cycles = 1 us at the
// assumed 100 MHz clock). The value is written into RAM_TIME with every pixel
// update and is subtracted from the stored value to get the time since a
// pixel's last event. The counter wraps after 2^32 ticks (about 71 minutes at
// 1 us); a pixel silent for that long sees a wrong elapsed time.
module timestamper
  import fovea_pkg::*;
#(
  parameter int unsigned CLK_PER_TICK = 100
) (
  input  logic clk,
  input  logic rst_n,
  output ts_t  ts
);

  localparam int unsigned PW = (CLK_PER_TICK > 1) ? $clog2(CLK_PER_TICK) : 1;
  logic [PW-1:0] pre;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pre <= '0;
      ts  <= '0;
    end else if (pre == PW'(CLK_PER_TICK - 1)) begin
      pre <= '0;
      ts  <= ts + 1'b1;
    end else begin
      pre <= pre + 1'b1;
    end
  end

endmodule
