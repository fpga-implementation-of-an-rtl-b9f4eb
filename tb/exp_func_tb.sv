// exp_func_tb: random states, elapsed times, gains and time constants,
// streamed one per cycle with random gaps. Every result must equal the
// reference update (breakpoints computed with $exp), appear exactly 3 cycles
// after its input with its tag, and stay within 3% of full scale of the true
// exponential. Directed cases: dt = 0 (no decay), u beyond 8 (decays to 0),
// and saturation at both ends of the 21-bit range.
module exp_func_tb;
  import fovea_pkg::*;
  import fovea_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid, out_valid;
  fr_t fr_init, fr_gain, fr_new;
  ts_t delta_t;
  logic [23:0] inv_tau;
  logic [15:0] in_tag, out_tag;
  int checks = 0, failures = 0;
  longint exp_q [$];
  int tag_q [$];
  int cyc = 0;
  int cyc_q [$];

  exp_func #(.TAG_W(16)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && out_valid) begin
      checks++;
      if (exp_q.size() == 0 || longint'(fr_new) != exp_q[0] || int'(out_tag) != tag_q[0]
          || cyc - cyc_q[0] != 3) begin
        failures++;
        $display("result %h: got %0d want %0d, latency %0d", out_tag, fr_new,
                 exp_q.size() ? exp_q[0] : 0, cyc - (cyc_q.size() ? cyc_q[0] : 0));
      end
      if (exp_q.size() != 0) begin
        void'(exp_q.pop_front()); void'(tag_q.pop_front()); void'(cyc_q.pop_front());
      end
    end
  end

  task automatic drive(longint s, longint unsigned dt, longint unsigned it, longint g, int tag);
    @(negedge clk);
    in_valid = 1;
    fr_init  = fr_t'(s);
    delta_t  = ts_t'(dt);
    inv_tau  = 24'(it);
    fr_gain  = fr_t'(g);
    in_tag   = 16'(tag);
    exp_q.push_back(update(longint'(fr_init), dt, it, longint'(fr_gain)));
    tag_q.push_back(tag);
    cyc_q.push_back(cyc);
  endtask

  initial begin
    in_valid = 0; fr_init = 0; delta_t = 0; inv_tau = 0; fr_gain = 0; in_tag = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // directed
    drive(12345, 0, 1678, 0, 1);          // no decay
    drive(-5000, 0, 1678, 256, 2);
    drive(300000, 100000, 1678, 256, 3);  // u ~ 10: fully decayed
    drive(1048575, 0, 1678, 1048575, 4);  // saturate high
    drive(-1048576, 0, 1678, -1048576, 5);// saturate low
    drive(256000, 10000, 1678, 256, 6);   // u = 1.0001
    // random
    for (int i = 0; i < 3000; i++) begin
      longint unsigned it, dt;
      it = $urandom_range(100, 200000);
      dt = $urandom_range(0, 9) == 0 ? longint'($urandom) : longint'($urandom_range(0, 20 * (16777216 / it)));
      drive(longint'($urandom_range(0, 2097151)) - 1048576, dt, it,
            longint'($urandom_range(0, 4095)) - 2048, i + 16);
      if ($urandom_range(0, 3) == 0) begin
        @(negedge clk); in_valid = 0;
      end
      // accuracy of the piecewise-linear decay against the real exponential
      begin
        real u, err;
        u   = real'(dt) * real'(it) / 16777216.0;
        err = real'(decay_q16(dt, it)) / 65536.0 - $exp(-u);
        checks++;
        if (err > 0.03 || err < -0.001) begin
          failures++;
          $display("decay error %f at u=%f", err, u);
        end
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
