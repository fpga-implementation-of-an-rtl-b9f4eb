// fovea_top_tb: end-to-end run of the attention pipeline at its default size
// (240x180 sensor, 16x16 FOA, 1 us timestamp tick at 100 MHz).
//
// A sensor model sends DAVIS-style AER traffic (a row word followed by one to
// three column words) over the asynchronous 4-phase bus: a few hot spots with
// different rates plus background noise. Four phases exercise the modes:
//   0  bottom-up only;
//   1  top-down gating to the upper half (y >= 90), then to the left half
//      (x < 120);
//   2  top-down modulation, left half (x < 120) gain 1.0, elsewhere 0.25;
//   3  bottom-up with the AER output sender enabled.
// Checks:
//   - every fovea output event was sent by the sensor, in order, lies inside
//     the 16x16 window of a P* held in the last 40 cycles, and carries the
//     right local coordinates;
//   - every P* chosen while gating is on lies in the region of interest;
//   - the AER output carries exactly the monitored events while enabled;
//   - an event reaches the output within 10 us of its request (the pipeline
//     latency is "a few microseconds");
//   - each mechanism happened at least once: gated events, modulated gains
//     (both inside and outside values), P* moves, inhibition sweeps, events
//     dropped outside the FOA, sensor stalls (back-pressure), HSS words, mode
//     switches.
module fovea_top_tb;
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
  int phase = 0;

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("%0t: %s", $time, msg);
  endtask

  initial begin
    #100ms;
    fail("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ sensor model
  typedef struct { int x; int y; int pol; longint t_req; } sev_t;
  sev_t sent_q [$];
  int n_sent = 0;

  task automatic aer_word(logic [AER_W-1:0] w, output longint t_req);
    #($urandom_range(1, 7));
    aer_in_data = w;
    #($urandom_range(1, 5));
    aer_in_req = 1;
    t_req = $time;
    wait (aer_in_ack);
    #($urandom_range(1, 9));
    aer_in_req = 0;
    wait (!aer_in_ack);
  endtask

  task automatic send_row(int y, int xs [$]);
    longint t;
    aer_word({2'b00, 8'(y)}, t);
    foreach (xs[i]) begin
      int p;
      p = $urandom_range(0, 1);
      // recorded before the handshake: the event can leave before ack falls
      sent_q.push_back('{xs[i], y, p, $time});
      aer_word({1'b1, 1'(p), 8'(xs[i])}, t);
      n_sent++;
    end
  endtask

  // ------------------------------------------------------------ P* history
  typedef struct { int x; int y; longint t_end; } pstar_t;
  pstar_t hist [$];
  int cur_x = -1, cur_y = -1;
  int n_moves = 0, n_gate_moves = 0;

  always @(posedge clk) if (rst_n) begin
    if (sal_update) begin
      if (cur_x >= 0) hist.push_back('{cur_x, cur_y, $time});
      if (hist.size() > 8) void'(hist.pop_front());
      cur_x = int'(sal_x); cur_y = int'(sal_y);
      n_moves++;
      if (enable_tdg) begin
        n_gate_moves++;
        checks++;
        if (!(sal_x >= tdb_params.roi.x_min && sal_x <= tdb_params.roi.x_max &&
              sal_y >= tdb_params.roi.y_min && sal_y <= tdb_params.roi.y_max))
          fail($sformatf("P* (%0d,%0d) outside the gating region", sal_x, sal_y));
      end
    end
  end

  function automatic logic in_win(int cx, int cy, int x, int y, int lx, int ly);
    return cx >= 0 && x - cx + 8 == lx && y - cy + 8 == ly && lx >= 0 && lx < 16 && ly >= 0 && ly < 16;
  endfunction

  // ------------------------------------------------------------ output checks
  int n_out = 0, n_fov_drop = 0;
  longint max_lat = 0;
  logic [2*COORD_W:0] hss_q [$];
  int n_hss = 0;

  always @(negedge clk) mon_ready <= ($urandom_range(0, 3) != 0);

  always @(posedge clk) if (rst_n && mon_valid && mon_ready) begin
    logic ok, found;
    int x, y;
    x = int'(mon_ev.x); y = int'(mon_ev.y);
    n_out++;
    checks++;
    // in order among the sent events; skipped ones were dropped by the FOA
    found = 0;
    while (sent_q.size() != 0 && !found) begin
      if (sent_q[0].x == x && sent_q[0].y == y && sent_q[0].pol == int'(mon_ev.pol)) begin
        found = 1;
        // latency only where the match is unambiguous (no identical event queued)
        if (sent_q.find_first_index(e) with (e.x == x && e.y == y && e.pol == int'(mon_ev.pol)
                                              && e.t_req != sent_q[0].t_req).size() == 0
            && $time - sent_q[0].t_req > max_lat)
          max_lat = $time - sent_q[0].t_req;
      end else n_fov_drop++;
      void'(sent_q.pop_front());
    end
    if (!found) fail($sformatf("output event (%0d,%0d) was never sent", x, y));
    ok = in_win(cur_x, cur_y, x, y, int'(mon_ev.local_x), int'(mon_ev.local_y));
    foreach (hist[i])
      if ($time - hist[i].t_end < 400)
        ok |= in_win(hist[i].x, hist[i].y, x, y, int'(mon_ev.local_x), int'(mon_ev.local_y));
    checks++;
    if (!ok) fail($sformatf("output event (%0d,%0d) local (%0d,%0d) outside FOA of (%0d,%0d)",
                            x, y, mon_ev.local_x, mon_ev.local_y, cur_x, cur_y));
    if (hss_enable) hss_q.push_back({mon_ev.y, mon_ev.x, mon_ev.pol});
  end

  // AER output receiver
  initial begin
    aer_out_ack = 0;
    forever begin
      @(posedge clk);
      if (rst_n && aer_out_req && !aer_out_ack) begin
        checks++;
        if (hss_q.size() == 0 || aer_out_data !== hss_q[0]) fail("AER output word mismatch");
        if (hss_q.size() != 0) void'(hss_q.pop_front());
        n_hss++;
        repeat ($urandom_range(0, 6)) @(posedge clk);
        aer_out_ack = 1;
        while (aer_out_req) @(posedge clk);
        repeat ($urandom_range(0, 6)) @(posedge clk);
        aer_out_ack = 0;
      end
    end
  end

  // ------------------------------------------------------------ mechanism counters
  int n_gated = 0, n_gain_in = 0, n_gain_out = 0, n_inhibit = 0, n_stall = 0, n_switch = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_tdg.in_valid && dut.u_tdg.in_ready && !dut.u_tdg.pass) n_gated++;
    if (dut.u_sal.in_valid && dut.u_sal.in_ready && enable_tdm) begin
      if (dut.u_sal.in_gain == tdb_params.gain_in)  n_gain_in++;
      if (dut.u_sal.in_gain == tdb_params.gain_out) n_gain_out++;
    end
    if (dut.u_sal.u_sal_func.ior_gain == -s_minus && dut.u_sal.u_sal_func.cnt == '0) n_inhibit++;
    if (dut.u_hsr.out_valid && !dut.u_hsr.out_ready) n_stall++;
  end

  // ------------------------------------------------------------ stimulus
  task automatic run_phase(int n_rows);
    int hx [3], hy [3];
    for (int h = 0; h < 3; h++) begin
      hx[h] = $urandom_range(10, 229);
      hy[h] = $urandom_range(10, 169);
    end
    for (int r = 0; r < n_rows; r++) begin
      int sel, y, n;
      int xs [$];
      sel = $urandom_range(0, 9);
      n = $urandom_range(1, 3);
      if (sel < 7) begin
        int h;
        h = (sel < 4) ? 0 : (sel < 6) ? 1 : 2;
        y = hy[h] + $urandom_range(0, 4) - 2;
        for (int i = 0; i < n; i++) xs.push_back(hx[h] + $urandom_range(0, 4) - 2);
      end else begin
        y = $urandom_range(0, 179);
        for (int i = 0; i < n; i++) xs.push_back($urandom_range(0, 239));
      end
      send_row(y, xs);
      #($urandom_range(0, 3000));
    end
  endtask

  initial begin
    aer_in_req = 0; aer_in_data = 0;
    enable_tdg = 0; enable_tdm = 0; hss_enable = 0;
    tdb_params = '{roi: '{x_min: 0, x_max: 239, y_min: 90, y_max: 179},
                   gain_in: fr_t'(256), gain_out: fr_t'(64)};
    inv_tau = 24'(16777216 / 200);           // tau = 200 us
    s_plus = fr_t'(768);                     // 3.0
    s_minus = fr_t'(512);                    // 2.0
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);

    phase = 0;  run_phase(300);
    // gating to the upper half
    phase = 1;  enable_tdg = 1; n_switch++;
    run_phase(200);
    // gating to the left half (x < 120)
    tdb_params.roi = '{x_min: 0, x_max: 119, y_min: 0, y_max: 179};
    n_switch++;
    run_phase(200);
    // modulation, left half favoured
    phase = 2;  enable_tdg = 0; enable_tdm = 1; n_switch++;
    run_phase(300);
    // AER output on
    phase = 3;  enable_tdm = 0; n_switch++;
    repeat (20) @(posedge clk);
    hss_enable = 1;
    run_phase(200);
    #20us;

    checks++;
    if (max_lat > 10000) fail($sformatf("latency %0d ns above 10 us", max_lat));
    checks++;
    if (hss_q.size() > 1) fail("AER output words missing");
    $display("sent %0d out %0d fov-dropped %0d gated %0d gain_in %0d gain_out %0d moves %0d (%0d gated) inhibit %0d stall-cycles %0d hss %0d max latency %0d ns",
             n_sent, n_out, n_fov_drop, n_gated, n_gain_in, n_gain_out, n_moves, n_gate_moves,
             n_inhibit, n_stall, n_hss, max_lat);
    // every mechanism must have happened
    begin
      int m [10];
      m = '{n_out, n_fov_drop, n_gated, n_gain_in, n_gain_out, n_moves, n_inhibit, n_stall, n_hss, n_switch};
      foreach (m[i]) begin
        checks++;
        if (m[i] == 0) fail($sformatf("mechanism %0d never happened", i));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
