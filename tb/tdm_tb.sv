// tdm_tb: random pixel events against a region of interest with distinct
// inside/outside gains. The registered gain must be gain_in for events inside
// the region, gain_out outside it, 1.0 (256 in Q12.8) when modulation is off,
// and must hold its value on cycles without an event.
module tdm_tb;
  import fovea_pkg::*;
  logic clk = 0, rst_n = 0;
  logic enable, in_fire;
  tdb_params_t params;
  pixel_ev_t in_ev;
  fr_t gain, expected;
  int checks = 0, failures = 0, n_in = 0, n_out = 0;

  tdm dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    enable = 0; in_fire = 0; in_ev = '0;
    params = '{roi: '{x_min: 0, x_max: 119, y_min: 0, y_max: 179},
               gain_in: fr_t'(512), gain_out: fr_t'(64)};
    expected = fr_t'(256);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      if (i % 500 == 0) begin
        enable = (i != 1500);
        params.gain_in  = fr_t'($urandom_range(256, 2048));
        params.gain_out = fr_t'($urandom_range(0, 255));
        params.roi.y_min = (i == 500) ? 8'd90 : 8'd0;
      end
      in_fire = 1'($urandom);
      in_ev   = '{y: coord_t'($urandom_range(0, 179)), x: coord_t'($urandom_range(0, 239)),
                  pol: 1'($urandom)};
      if (in_fire) begin
        if (!enable) expected = fr_t'(256);
        else if (in_ev.x <= params.roi.x_max && in_ev.y >= params.roi.y_min &&
                 in_ev.x >= params.roi.x_min && in_ev.y <= params.roi.y_max) begin
          expected = params.gain_in;  n_in++;
        end else begin
          expected = params.gain_out; n_out++;
        end
      end
      @(posedge clk); #1;
      checks++;
      if (gain !== expected) begin
        failures++;
        $display("cycle %0d: gain %0d want %0d", i, gain, expected);
      end
    end
    checks++;
    if (n_in < 100 || n_out < 100) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
