// tdg_tb: random pixel events against random regions of interest, with the
// gate enabled and disabled and random back-pressure. With the gate enabled
// only events inside the inclusive rectangle may pass; with it disabled all
// pass. Order and content are checked against a model.
module tdg_tb;
  import fovea_pkg::*;
  logic clk = 0, rst_n = 0;
  logic enable, in_valid, in_ready, out_valid, out_ready;
  tdb_params_t params;
  pixel_ev_t in_ev, out_ev;
  int checks = 0, failures = 0, n_pass = 0, n_drop = 0;
  pixel_ev_t exp_q [$];
  logic quiet;

  tdg dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    in_valid  <= rst_n && !quiet && ($urandom_range(0, 3) != 0);
    in_ev     <= '{y: coord_t'($urandom_range(0, 179)), x: coord_t'($urandom_range(0, 239)),
                   pol: 1'($urandom)};
    out_ready <= ($urandom_range(0, 3) != 0);
  end

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin
      if (!enable || (in_ev.x >= params.roi.x_min && in_ev.x <= params.roi.x_max &&
                      in_ev.y >= params.roi.y_min && in_ev.y <= params.roi.y_max))
        exp_q.push_back(in_ev);
      else n_drop++;
    end
    if (out_valid && out_ready) begin
      checks++;
      if (exp_q.size() == 0 || out_ev !== exp_q[0]) failures++;
      if (exp_q.size() != 0) void'(exp_q.pop_front());
      n_pass++;
    end
  end

  initial begin
    quiet = 1; enable = 0; params = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 20; k++) begin
      quiet = 1;
      repeat (5) @(posedge clk);
      @(negedge clk);
      enable = (k % 4 != 3);
      // k = 0: upper half (y >= 90), k = 1: left half (x < 120), then random
      params.roi = (k == 0) ? '{x_min: 0, x_max: 239, y_min: 90, y_max: 179} :
                   (k == 1) ? '{x_min: 0, x_max: 119, y_min: 0, y_max: 179} :
                   '{x_min: coord_t'($urandom_range(0, 100)), x_max: coord_t'($urandom_range(120, 239)),
                     y_min: coord_t'($urandom_range(0, 80)), y_max: coord_t'($urandom_range(100, 179))};
      quiet = 0;
      repeat (200) @(posedge clk);
    end
    quiet = 1;
    repeat (10) @(posedge clk);
    checks++;
    if (n_pass < 500 || n_drop < 300 || exp_q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
