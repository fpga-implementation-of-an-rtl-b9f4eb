// dpe_fov_tb: random row/column words while the salient pixel jumps between
// random positions, including the array corners. Events inside the 16x16
// window [c-8, c+7] must come out with their local position; all others must
// be dropped. The window position is held constant while words are in flight.
module dpe_fov_tb;
  import fovea_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [AER_W-1:0] in_data;
  logic sal_valid;
  coord_t sal_x, sal_y;
  fov_ev_t out_ev;
  int checks = 0, failures = 0, n_out = 0, n_drop = 0;
  fov_ev_t exp_q [$];
  coord_t y_model = '0;
  int phase_cycles = 0;

  dpe_fov dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // coordinates near the salient pixel so that both cases occur often
  function automatic coord_t near(coord_t c);
    int v;
    v = int'(c) + $urandom_range(0, 23) - 12;
    if (v < 0) v = 0;
    if (v > 255) v = 255;
    return coord_t'(v);
  endfunction

  logic quiet;
  always @(negedge clk) begin
    in_valid  <= rst_n && !quiet && ($urandom_range(0, 3) != 0);
    in_data   <= $urandom_range(0, 1) ? {1'b1, 1'($urandom), near(sal_x)} : {2'b00, near(sal_y)};
    out_ready <= ($urandom_range(0, 3) != 0);
  end

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin
      if (in_data[AER_W-1]) begin
        int dx, dy;
        dx = int'(in_data[7:0]) - int'(sal_x) + 8;
        dy = int'(y_model) - int'(sal_y) + 8;
        if (sal_valid && dx >= 0 && dx < 16 && dy >= 0 && dy < 16)
          exp_q.push_back('{y: y_model, x: in_data[7:0], pol: in_data[8],
                            local_y: coord_t'(dy), local_x: coord_t'(dx)});
        else n_drop++;
      end else y_model = in_data[7:0];
    end
    if (out_valid && out_ready) begin
      checks++;
      if (exp_q.size() == 0 || out_ev !== exp_q[0]) begin
        failures++;
        $display("event %0d: got %h want %h", n_out, out_ev, exp_q.size() ? exp_q[0] : fov_ev_t'(0));
      end
      if (exp_q.size() != 0) void'(exp_q.pop_front());
      n_out++;
    end
  end

  initial begin
    coord_t corners_x [4] = '{8'd0, 8'd239, 8'd3, 8'd120};
    coord_t corners_y [4] = '{8'd0, 8'd179, 8'd175, 8'd60};
    in_valid = 0; out_ready = 0; in_data = 0; quiet = 1;
    sal_valid = 0; sal_x = 100; sal_y = 100;
    repeat (3) @(posedge clk);
    rst_n = 1;
    quiet = 0;
    repeat (200) @(posedge clk);      // no salient pixel yet: all dropped
    for (int k = 0; k < 24; k++) begin
      quiet = 1;
      repeat (10) @(posedge clk);     // drain before moving the window
      @(negedge clk);
      sal_valid = 1;
      sal_x = (k < 4) ? corners_x[k] : coord_t'($urandom_range(0, 239));
      sal_y = (k < 4) ? corners_y[k] : coord_t'($urandom_range(0, 179));
      quiet = 0;
      repeat (300) @(posedge clk);
    end
    quiet = 1;
    repeat (20) @(posedge clk);
    checks++;
    if (n_out < 300 || n_drop < 300 || exp_q.size() != 0) failures++;
    $display("passed %0d dropped %0d", n_out, n_drop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
