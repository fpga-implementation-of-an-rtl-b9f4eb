// sal_func_tb: presents random comparisons (event state against the state of
// the current most salient pixel) and checks
//   - P* moves exactly when there is no P* yet or the event state is larger,
//   - after a move, the IOR requests are the 16x16 window around the new P*
//     with +S_plus (clipped to the 240x180 array), in row order, followed by
//     the window around the old P* with -S_minus,
//   - the inhibition sweep starts only after pipe_idle was seen, and busy
//     stays high until the last drain,
//   - no requests appear when P* does not move.
module sal_func_tb;
  import fovea_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cmp_valid, pipe_idle, busy, sal_valid, sal_update, ior_valid;
  fr_t in_eve_fr, current_sal_fr, s_plus, s_minus, ior_gain;
  coord_t in_eve_x, in_eve_y, sal_x, sal_y, ior_x, ior_y;
  int checks = 0, failures = 0, n_moves = 0, n_stay = 0;
  typedef struct { int x; int y; int g; } req_t;
  req_t exp_q [$];
  int cyc = 0, n_upd = 0;

  sal_func dut (.*);

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic push_window(int cx, int cy, int g);
    for (int j = 0; j < 16; j++)
      for (int i = 0; i < 16; i++) begin
        int x, y;
        x = cx - 8 + i;
        y = cy - 8 + j;
        if (x >= 0 && x < 240 && y >= 0 && y < 180) exp_q.push_back('{x, y, g});
      end
  endtask

  // compare every IOR request with the expected sequence
  logic saw_idle;
  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (ior_valid) begin
      checks++;
      if (exp_q.size() == 0 || int'(ior_x) != exp_q[0].x || int'(ior_y) != exp_q[0].y
          || int'(ior_gain) != exp_q[0].g) begin
        failures++;
        if (failures < 10) $display("IOR req (%0d,%0d,%0d) unexpected", ior_x, ior_y, ior_gain);
      end
      // inhibition requests only after the pipeline drained following excitation
      if (exp_q.size() != 0 && exp_q[0].g < 0 && !saw_idle) failures++;
      if (exp_q.size() != 0) void'(exp_q.pop_front());
    end
  end

  // random pipeline-idle indication; remembers whether idle was seen after the
  // last excitation request
  always @(negedge clk) pipe_idle <= ($urandom_range(0, 2) == 0);
  always @(posedge clk) begin
    if (ior_valid && ior_gain > 0) saw_idle <= 1'b0;
    else if (busy && pipe_idle) saw_idle <= 1'b1;
  end

  initial begin
    int px, py, ox, oy;
    logic pv;
    fr_t cur;
    cmp_valid = 0; in_eve_fr = 0; current_sal_fr = 0; in_eve_x = 0; in_eve_y = 0;
    s_plus = fr_t'(640); s_minus = fr_t'(384);
    saw_idle = 0;
    pv = 0; px = 0; py = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 60; k++) begin
      @(negedge clk);
      cmp_valid = 1;
      in_eve_x = (k == 1) ? 8'd0 : (k == 2) ? 8'd239 : coord_t'($urandom_range(0, 239));
      in_eve_y = (k == 1) ? 8'd0 : (k == 2) ? 8'd179 : coord_t'($urandom_range(0, 179));
      in_eve_fr = fr_t'($urandom_range(0, 4000)) - fr_t'(1000);
      current_sal_fr = fr_t'($urandom_range(0, 4000)) - fr_t'(1000);
      if (k < 3) current_sal_fr = in_eve_fr - 1;
      if (!pv || in_eve_fr > current_sal_fr) begin
        push_window(int'(in_eve_x), int'(in_eve_y), 640);
        if (pv) push_window(px, py, -384);
        pv = 1; px = int'(in_eve_x); py = int'(in_eve_y);
        n_moves++;
      end else n_stay++;
      @(negedge clk);
      cmp_valid = 0;
      while (busy) @(negedge clk);
      checks++;
      if (exp_q.size() != 0 || !sal_valid || int'(sal_x) != px || int'(sal_y) != py) begin
        failures++;
        $display("after compare %0d: P*=(%0d,%0d) want (%0d,%0d), %0d requests missing",
                 k, sal_x, sal_y, px, py, exp_q.size());
        exp_q.delete();
      end
    end
    checks++;
    if (n_moves < 10 || n_stay < 10 || n_upd != n_moves) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // sal_update pulses once per move
  always @(posedge clk) if (rst_n && sal_update) n_upd++;
endmodule
