// hsr_tb: a 4-phase sender model pushes random words into the receiver while
// the downstream side applies random back-pressure. Checks every word arrives
// once and in order, that ack rises only after the word was taken, and that
// ack falls only after req has fallen.
module hsr_tb;
  logic clk = 0, rst_n = 0;
  logic req, ack, out_valid, out_ready;
  logic [9:0] data, out_data;
  int checks = 0, failures = 0;
  logic [9:0] sent [$];
  int n_recv = 0;
  logic taken_since_req;

  hsr dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // sender
  initial begin
    req = 0; data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      data = 10'($urandom);
      sent.push_back(data);
      repeat ($urandom_range(0, 2)) @(negedge clk);
      req = 1;
      while (!ack) @(negedge clk);
      repeat ($urandom_range(0, 3)) @(negedge clk);
      req = 0;
      data = 10'($urandom);   // bus may change once req is low
      while (ack) @(negedge clk);
    end
    repeat (5) @(posedge clk);
    checks++;
    if (n_recv != 200) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // receiver
  always @(negedge clk) out_ready <= 1'($urandom);

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      checks++;
      if (sent.size() == 0 || out_data !== sent[0]) begin
        failures++;
        $display("word %0d: got %h", n_recv, out_data);
      end
      if (sent.size() != 0) void'(sent.pop_front());
      n_recv++;
      taken_since_req <= 1'b1;
    end
    if (!req) taken_since_req <= 1'b0;
  end

  // protocol: ack rises only after the word was taken; falls only after req low
  logic ack_d = 0, req_d = 0;
  always @(posedge clk) begin
    if (rst_n && ack && !ack_d) begin
      checks++;
      if (!taken_since_req && !(out_valid && out_ready)) failures++;
    end
    if (rst_n && !ack && ack_d) begin
      checks++;
      if (req_d) failures++;
    end
    ack_d <= ack;
    req_d <= req;
  end
endmodule
