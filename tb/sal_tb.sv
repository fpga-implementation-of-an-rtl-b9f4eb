// sal_tb: saliency block against a software model of the algorithm.
//
// The timestamp ticks every clock (CLK_PER_TICK = 1) so event times are
// known exactly; tau = 3000 ticks. A few "hot" pixels fire at different rates
// among random background pixels, with random top-down gains. After each event
// the testbench
//   - recomputes the event pixel's state s = g + s_old * exp(-dt/tau) and the
//     decayed state of P*, decides whether P* moves, and compares P* with the
//     block's Sal_pixel_ID;
//   - on a move, recomputes every pixel of the new FOA (+S_plus at the time of
//     its sweep step) and of the old FOA (-S_minus), and compares the contents
//     of RAM_FR and RAM_TIME for all of them (the inhibition step times are
//     taken from RAM_TIME after checking they fall inside the sweep);
//   - checks the busy time: 12 cycles from acceptance to the next in_ready
//     when P* stays.
module sal_tb;
  import fovea_pkg::*;
  import fovea_ref_pkg::*;

  localparam longint INV_TAU = 16777216 / 3000;
  localparam longint SP = 640;   // S_plus  = 2.5
  localparam longint SM = 384;   // S_minus = 1.5

  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, sal_valid, sal_update;
  pixel_ev_t in_ev;
  fr_t in_gain, s_plus, s_minus;
  logic [23:0] inv_tau;
  coord_t sal_x, sal_y;
  ts_t ts;
  int checks = 0, failures = 0, n_moves = 0, n_stay = 0;

  sal #(.CLK_PER_TICK(1)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // model state
  longint ms [int];
  longint mt [int];
  function automatic longint s_of(int a); return ms.exists(a) ? ms[a] : 0; endfunction
  function automatic longint t_of(int a); return mt.exists(a) ? mt[a] : 0; endfunction

  function automatic longint peek_fr(int a);
    return longint'(fr_t'(dut.u_ram_fr.mem[a]));
  endfunction
  function automatic longint peek_t(int a);
    return longint'(dut.u_ram_time.mem[a]);
  endfunction

  int n_cmp = 0;
  task automatic cmp_pixel(int a, string what);
    checks++;
    n_cmp++;
    if (peek_fr(a) != s_of(a) || peek_t(a) != t_of(a)) begin
      failures++;
      if (failures < 20)
        $display("%s pixel (%0d,%0d): state %0d t %0d, want %0d t %0d", what, a % 256, a / 256,
                 peek_fr(a), peek_t(a), s_of(a), t_of(a));
    end
  endtask

  int hot_x [3] = '{138, 30, 102};
  int hot_y [3] = '{101, 30, 67};

  initial begin
    int px, py, pv;
    in_valid = 0; in_ev = '0; in_gain = FR_ONE;
    inv_tau = 24'(INV_TAU); s_plus = fr_t'(SP); s_minus = fr_t'(SM);
    pv = 0; px = 0; py = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 1000; k++) begin
      int x, y, a, r, c0, sx, sy;
      longint g, tev, eve_fr, cur, t0;
      logic move;
      // pick a pixel: hot pixels with rates 6:3:1, background otherwise
      r = $urandom_range(0, 19);
      if (r < 6)       begin x = hot_x[0]; y = hot_y[0]; end
      else if (r < 9)  begin x = hot_x[1]; y = hot_y[1]; end
      else if (r < 10) begin x = hot_x[2]; y = hot_y[2]; end
      else begin x = $urandom_range(0, 239); y = $urandom_range(0, 179); end
      if (k == 5) begin x = 0; y = 0; end          // FOA clipped at a corner
      if (k == 6) begin x = 239; y = 179; end
      g = (k % 5 == 4) ? 64 : (k % 7 == 3) ? 1024 : 256;
      a = y * 256 + x;
      repeat ($urandom_range(0, 400)) @(negedge clk);
      @(negedge clk);
      in_valid = 1; in_ev = '{y: coord_t'(y), x: coord_t'(x), pol: 1'($urandom)};
      in_gain = fr_t'(g);
      while (!in_ready) @(negedge clk);
      tev = longint'(ts);
      c0 = 0;
      @(negedge clk);
      in_valid = 0;
      // model of steps 1-4
      eve_fr = update(s_of(a), tev - t_of(a), INV_TAU, g);
      ms[a] = eve_fr; mt[a] = tev;
      // step 5: P* decayed to the time of the event
      cur = pv ? update(s_of(py * 256 + px), tev - t_of(py * 256 + px), INV_TAU, 0) : 0;
      move = !pv || (eve_fr > cur);
      // wait for the block; note the first sweep step when P* moves
      t0 = -1;
      c0 = 1;
      while (!in_ready) begin
        if (sal_update) t0 = longint'(ts);
        @(negedge clk);
        c0++;
      end
      checks++;
      if (move !== (t0 >= 0)) begin
        failures++;
        $display("event %0d at (%0d,%0d): move %0d expected %0d (eve %0d cur %0d)", k, x, y,
                 t0 >= 0, move, eve_fr, cur);
      end
      if (!move) begin
        n_stay++;
        checks++;
        if (c0 != 12) begin
          failures++;
          $display("event %0d: busy %0d cycles", k, c0);
        end
        cmp_pixel(a, "event");
      end else begin
        int opx, opy, opv;
        n_moves++;
        opx = px; opy = py; opv = pv;
        pv = 1; px = x; py = y;
        // excitation sweep: step i at time t0 + i
        for (int j = 0; j < 16; j++)
          for (int i = 0; i < 16; i++) begin
            sx = x - 8 + i; sy = y - 8 + j;
            if (sx >= 0 && sx < 240 && sy >= 0 && sy < 180) begin
              int b;
              b = sy * 256 + sx;
              ms[b] = update(s_of(b), t0 + j * 16 + i - t_of(b), INV_TAU, SP);
              mt[b] = t0 + j * 16 + i;
            end
          end
        // inhibition sweep: times from RAM_TIME, checked to lie after the excitation
        if (opv)
          for (int j = 0; j < 16; j++)
            for (int i = 0; i < 16; i++) begin
              sx = opx - 8 + i; sy = opy - 8 + j;
              if (sx >= 0 && sx < 240 && sy >= 0 && sy < 180) begin
                int b;
                longint tw;
                b = sy * 256 + sx;
                tw = peek_t(b);
                checks++;
                if (tw < t0 + 256 || tw > longint'(ts)) begin
                  failures++;
                  $display("inhibit time %0d outside sweep", tw);
                end
                ms[b] = update(s_of(b), tw - t_of(b), INV_TAU, -SM);
                mt[b] = tw;
              end
            end
        for (int j = 0; j < 16; j++)
          for (int i = 0; i < 16; i++) begin
            sx = x - 8 + i; sy = y - 8 + j;
            if (sx >= 0 && sx < 240 && sy >= 0 && sy < 180) cmp_pixel(sy * 256 + sx, "excite");
            sx = opx - 8 + i; sy = opy - 8 + j;
            if (opv && sx >= 0 && sx < 240 && sy >= 0 && sy < 180) cmp_pixel(sy * 256 + sx, "inhibit");
          end
        cmp_pixel(a, "event");
      end
      checks++;
      if (!sal_valid || int'(sal_x) != px || int'(sal_y) != py) begin
        failures++;
        $display("event %0d: P* (%0d,%0d) want (%0d,%0d)", k, sal_x, sal_y, px, py);
      end
    end
    checks++;
    if (n_moves < 5 || n_stay < 50) failures++;
    $display("moves %0d stays %0d pixel compares %0d", n_moves, n_stay, n_cmp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
