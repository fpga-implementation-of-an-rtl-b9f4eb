// three_points_tb: the controlled three-pixel experiment.
//
// Three pixels fire irregularly at different mean rates (A fastest, C slowest)
// into the complete pipeline at its default size, with tau = 200 us, no
// excitation and a strong inhibition of return. The slowest pixel starts
// first so that the start-up order does not favour A. Checks:
//   - every P* chosen is one of the three pixels;
//   - attention visits all three;
//   - measured from 1 ms on, attention dwells longest on A, then B, then C
//     (the focus follows the firing rate);
//   - the fovea output only carries events of the attended pixel.
module three_points_tb;
  import fovea_pkg::*;

  logic clk = 0, rst_n = 0;
  logic aer_in_req, aer_in_ack;
  logic [AER_W-1:0] aer_in_data;
  logic enable_tdg, enable_tdm, hss_enable;
  tdb_params_t tdb_params;
  logic [23:0] inv_tau;
  fr_t s_plus, s_minus;
  logic sal_valid, sal_update;
  coord_t sal_x, sal_y;
  ts_t timestamp;
  logic mon_valid, mon_ready;
  fov_ev_t mon_ev;
  logic aer_out_req, aer_out_ack;
  logic [2*COORD_W:0] aer_out_data;

  fovea_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin
    #60ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // pixel positions and periods (ns)
  int px [3] = '{140, 30, 100};
  int py [3] = '{100, 30, 68};
  longint period [3] = '{40000, 50000, 60000};

  // one AER sender shared by the three pixels
  semaphore bus = new(1);
  task automatic aer_word(logic [AER_W-1:0] w);
    aer_in_data = w;
    #3;
    aer_in_req = 1;
    wait (aer_in_ack);
    #4;
    aer_in_req = 0;
    wait (!aer_in_ack);
    #2;
  endtask

  task automatic pixel_proc(int i, longint t_end);
    #(period[i] / 3 * (2 - i));
    while ($time < t_end) begin
      bus.get(1);
      aer_word({2'b00, 8'(py[i])});
      aer_word({2'b10, 8'(px[i])});
      bus.put(1);
      // irregular firing: interval uniform in [0.25, 1.75] x the mean period
      #(period[i] / 4 + longint'($urandom_range(0, 1000)) * period[i] * 3 / 2000);
    end
  endtask

  // attention history
  int visits [$];
  int first_order [$];
  int n_moves = 0;
  int cur = -1;
  longint t_last = 0;
  longint dwell [3] = '{0, 0, 0};
  always @(posedge clk) if (rst_n && sal_update) begin
    int w;
    if (cur >= 0 && $time > 1_000_000)
      dwell[cur] += $time - (t_last > 1_000_000 ? t_last : 1_000_000);
    w = -1;
    for (int i = 0; i < 3; i++) if (int'(sal_x) == px[i] && int'(sal_y) == py[i]) w = i;
    n_moves++;
    checks++;
    if (w < 0) begin
      failures++;
      $display("P* (%0d,%0d) is not an active pixel", sal_x, sal_y);
    end else begin
      visits.push_back(w);
      cur = w;
      t_last = $time;
      if (!(w inside {first_order})) first_order.push_back(w);
      if (n_moves <= 12) $display("%0d us: attention on pixel %s", $time / 1000, w == 0 ? "A" : w == 1 ? "B" : "C");
    end
  end

  // fovea output carries only the attended pixel (the three are far apart)
  int n_out = 0;
  always @(posedge clk) if (rst_n && mon_valid && mon_ready) begin
    n_out++;
    checks++;
    if (int'(mon_ev.x) != int'(sal_x) || int'(mon_ev.y) != int'(sal_y)) begin
      failures++;
      $display("fovea output (%0d,%0d) while attending (%0d,%0d)", mon_ev.x, mon_ev.y, sal_x, sal_y);
    end
  end

  initial begin
    aer_in_req = 0; aer_in_data = 0;
    enable_tdg = 0; enable_tdm = 0; hss_enable = 0; mon_ready = 1;
    tdb_params = '{roi: '{x_min: 0, x_max: 239, y_min: 0, y_max: 179},
                   gain_in: FR_ONE, gain_out: FR_ONE};
    inv_tau = 24'(16777216 / 200);           // tau = 200 us
    s_plus  = fr_t'(0);                      // 0.0
    s_minus = fr_t'(2560);                   // 10.0
    repeat (5) @(posedge clk);
    rst_n = 1;
    fork
      pixel_proc(0, 40_000_000);
      pixel_proc(1, 40_000_000);
      pixel_proc(2, 40_000_000);
    join
    #10us;
    if (cur >= 0) dwell[cur] += $time - t_last;
    checks++;
    if (first_order.size() != 3) begin
      failures++;
      $display("not all pixels attended: %p", first_order);
    end
    checks++;
    if (!(dwell[0] > dwell[1] && dwell[1] > dwell[2] && dwell[2] > 0)) begin
      failures++;
      $display("dwell times not ordered by rate");
    end
    $display("dwell A %0d us, B %0d us, C %0d us", dwell[0] / 1000, dwell[1] / 1000, dwell[2] / 1000);
    checks++;
    if (n_out == 0) failures++;
    $display("moves %0d, fovea events %0d", n_moves, n_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
