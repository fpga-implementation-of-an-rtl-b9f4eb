// gesture_tb: attention following a moving hand, in the style of a DVS128
// gesture recording.
//
// A sensor model drives the complete pipeline at its default size. A blob of
// radius 3 pixels travels once around a circle of radius 30 centred on
// (64, 64) in 43.1 ms, all inside a 128x128 field, the size of a DVS128
// recording. The blob's pixels fire irregularly, about one event every 2 us in
// total. About one event in ten is background noise, spread uniformly over the
// 128x128 field. The events go over the asynchronous AER bus as a row word
// followed by a column word. The settings are tau = 200 us, s_plus = 3.0 and
// s_minus = 2.0, with no top-down biasing. Checks:
//   - every P* lies inside the 128x128 field;
//   - every fovea output event lies inside the 16x16 window of the P* held at
//     that moment, or of the one before it if P* changed in the last 40
//     cycles, and carries the right local coordinates;
//   - sampled every 100 us from 1 ms on, P* stays within 12 pixels (in both
//     axes) of the blob's centre in at least 90% of the samples;
//   - P* visits all four quadrants of the circle;
//   - the fovea output is a strict, non-empty subset of the input.
module gesture_tb;
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

  localparam real    PI       = 3.14159265358979;
  localparam longint T_END    = 43_100_000;  // ns, one revolution
  localparam real    RADIUS   = 30.0;
  localparam int     CENTRE   = 64;
  localparam int     FIELD    = 128;

  int checks = 0, failures = 0;

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("%0d us: %s", $time / 1000, msg);
  endtask

  initial begin
    #60ms;
    fail("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // blob centre at time t (ns)
  function automatic void blob_at(longint t, output int bx, output int by);
    real a;
    a = 2.0 * PI * real'(t) / real'(T_END);
    bx = CENTRE + int'($rtoi(RADIUS * $sin(a) + 1000.5)) - 1000;
    by = CENTRE - int'($rtoi(RADIUS * $cos(a) + 1000.5)) + 1000;
  endfunction

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

  int n_in = 0, n_noise = 0;
  task automatic sensor(longint t_end);
    int bx, by, dx, dy, x, y;
    while ($time < t_end) begin
      if ($urandom_range(0, 9) == 0) begin
        x = int'($urandom_range(0, FIELD - 1));
        y = int'($urandom_range(0, FIELD - 1));
        n_noise++;
      end else begin
        blob_at($time, bx, by);
        do begin
          dx = int'($urandom_range(0, 6)) - 3;
          dy = int'($urandom_range(0, 6)) - 3;
        end while (dx * dx + dy * dy > 9);
        x = bx + dx;
        y = by + dy;
      end
      aer_word({2'b00, 8'(y)});
      aer_word({1'b1, 1'($urandom_range(0, 1)), 8'(x)});
      n_in++;
      #(1000 + $urandom_range(0, 2000));
    end
  endtask

  // P* history: current and previous centre, time of the last change
  int     n_moves = 0;
  int     prev_x = -100, prev_y = -100;
  longint t_move = 0;
  bit     quadrant [4] = '{0, 0, 0, 0};
  always @(posedge clk) if (rst_n && sal_update) begin
    n_moves++;
    checks++;
    if (int'(sal_x) >= FIELD || int'(sal_y) >= FIELD)
      fail($sformatf("P* (%0d,%0d) outside the field", sal_x, sal_y));
    quadrant[{int'(sal_x) >= CENTRE, int'(sal_y) >= CENTRE}] = 1;
  end

  // previous P* as seen before the update takes effect
  coord_t last_x, last_y;
  logic   last_valid = 0;
  always @(posedge clk) begin
    if (sal_valid && (!last_valid || sal_x != last_x || sal_y != last_y)) begin
      if (last_valid) begin
        prev_x = int'(last_x);
        prev_y = int'(last_y);
      end
      t_move = $time;
    end
    last_x <= sal_x;
    last_y <= sal_y;
    last_valid <= sal_valid;
  end

  function automatic bit in_win(int x, int y, int cx, int cy);
    return x >= cx - 8 && x <= cx + 7 && y >= cy - 8 && y <= cy + 7;
  endfunction

  int n_out = 0;
  always @(posedge clk) if (rst_n && mon_valid && mon_ready) begin
    int x, y, cx, cy;
    x = int'(mon_ev.x);
    y = int'(mon_ev.y);
    cx = int'(sal_x);
    cy = int'(sal_y);
    n_out++;
    checks++;
    if (in_win(x, y, cx, cy)) begin
      checks++;
      if (int'(mon_ev.local_x) != x - cx + 8 || int'(mon_ev.local_y) != y - cy + 8)
        fail($sformatf("local coordinates (%0d,%0d) wrong for (%0d,%0d) around (%0d,%0d)",
                       mon_ev.local_x, mon_ev.local_y, x, y, cx, cy));
    end else if (!(in_win(x, y, prev_x, prev_y) && $time - t_move <= 400)) begin
      fail($sformatf("fovea event (%0d,%0d) outside the window of P* (%0d,%0d)", x, y, cx, cy));
    end
  end

  // tracking samples
  int n_samples = 0, n_on = 0;
  initial begin
    int bx, by;
    #1ms;
    while ($time < T_END) begin
      blob_at($time, bx, by);
      n_samples++;
      if (sal_valid && (int'(sal_x) - bx) <= 12 && (bx - int'(sal_x)) <= 12 &&
          (int'(sal_y) - by) <= 12 && (by - int'(sal_y)) <= 12)
        n_on++;
      #100us;
    end
  end

  initial begin
    aer_in_req = 0; aer_in_data = 0;
    enable_tdg = 0; enable_tdm = 0; hss_enable = 0; mon_ready = 1;
    tdb_params = '{roi: '{x_min: 0, x_max: 239, y_min: 0, y_max: 179},
                   gain_in: FR_ONE, gain_out: FR_ONE};
    inv_tau = 24'(16777216 / 200);           // tau = 200 us
    s_plus  = fr_t'(768);                    // 3.0
    s_minus = fr_t'(512);                    // 2.0
    repeat (5) @(posedge clk);
    rst_n = 1;
    sensor(T_END);
    #10us;
    checks++;
    if (n_on * 10 < n_samples * 9)
      fail($sformatf("P* near the blob in only %0d of %0d samples", n_on, n_samples));
    checks++;
    if (!(quadrant[0] && quadrant[1] && quadrant[2] && quadrant[3]))
      fail($sformatf("P* missed a quadrant: %p", quadrant));
    checks++;
    if (n_out == 0 || n_out >= n_in)
      fail($sformatf("output %0d events for %0d input events", n_out, n_in));
    $display("input %0d events (%0d noise), fovea output %0d, P* moves %0d, on target %0d of %0d samples",
             n_in, n_noise, n_out, n_moves, n_on, n_samples);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
