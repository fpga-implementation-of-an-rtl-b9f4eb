// dpe_exp_tb: random row/column AER words with random back-pressure. A model
// keeps the last row word and expects one pixel event per column word; the
// events must come out complete, once and in order.
module dpe_exp_tb;
  import fovea_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [AER_W-1:0] in_data;
  pixel_ev_t out_ev;
  int checks = 0, failures = 0, n_out = 0, n_x = 0;
  pixel_ev_t exp_q [$];
  coord_t y_model = '0;

  dpe_exp dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    in_valid  <= rst_n && ($urandom_range(0, 3) != 0);
    in_data   <= AER_W'($urandom);
    out_ready <= ($urandom_range(0, 3) != 0);
  end

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin
      if (in_data[AER_W-1]) begin
        exp_q.push_back('{y: y_model, x: in_data[7:0], pol: in_data[8]});
        n_x++;
      end else y_model = in_data[7:0];
    end
    if (out_valid && out_ready) begin
      checks++;
      if (exp_q.size() == 0 || out_ev !== exp_q[0]) begin
        failures++;
        $display("event %0d: got %p", n_out, out_ev);
      end
      if (exp_q.size() != 0) void'(exp_q.pop_front());
      n_out++;
    end
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3000) @(posedge clk);
    checks++;
    if (n_out < 500 || exp_q.size() > 1) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
