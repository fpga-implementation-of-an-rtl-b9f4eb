// hss_tb: random words are offered to the sender; a 4-phase receiver model
// with random response delays captures AER_out. Checks order and content of
// the words, that data is stable while req is high, and that req never rises
// before the previous ack has fallen.
module hss_tb;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, aer_req, aer_ack;
  logic [15:0] in_data, aer_data;
  int checks = 0, failures = 0;
  logic [15:0] sent [$];
  int n_recv = 0;

  hss #(.DATA_W(16)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #3000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // producer
  initial begin
    in_valid = 0; in_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 150; i++) begin
      @(negedge clk);
      in_valid = 1;
      in_data  = 16'($urandom);
      while (!in_ready) @(negedge clk);
      sent.push_back(in_data);
      @(posedge clk);
      @(negedge clk);
      in_valid = 0;
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
    wait (n_recv == 150);
    repeat (20) @(posedge clk);
    checks++;
    if (sent.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // receiver: latch on req high, ack after a delay, release after req low
  initial begin
    aer_ack = 0;
    forever begin
      @(posedge clk);
      if (rst_n && aer_req && !aer_ack) begin
        checks++;
        if (sent.size() == 0 || aer_data !== sent[0]) begin
          failures++;
          $display("word %0d: got %h want %h (%0d queued)", n_recv, aer_data, sent.size() ? sent[0] : 16'd0, sent.size());
        end
        if (sent.size() != 0) void'(sent.pop_front());
        n_recv++;
        repeat ($urandom_range(0, 4)) @(posedge clk);
        aer_ack = 1;
        while (aer_req) @(posedge clk);
        repeat ($urandom_range(0, 4)) @(posedge clk);
        aer_ack = 0;
      end
    end
  end

  // data stable while req is high; req rises only with ack low
  logic [15:0] data_d;
  logic req_d = 0;
  always @(negedge clk) begin
    if (rst_n && req_d && aer_req) begin
      checks++;
      if (aer_data !== data_d) failures++;
    end
    if (rst_n && aer_req && !req_d) begin
      checks++;
      if (aer_ack) failures++;
    end
    req_d  <= aer_req;
    data_d <= aer_data;
  end
endmodule
