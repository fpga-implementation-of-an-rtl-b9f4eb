// fms_tb: checks that the synchronizer delays req and data by exactly two
// clock edges and returns ack unchanged.
module fms_tb;
  logic clk = 0, rst_n = 0;
  logic aer_req, aer_ack, sync_req, sync_ack;
  logic [9:0] aer_data, sync_data;
  int checks = 0, failures = 0;
  logic       req_h [$];
  logic [9:0] dat_h [$];

  fms dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    aer_req = 0; aer_data = 0; sync_ack = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      aer_req  = 1'($urandom);
      aer_data = 10'($urandom);
      sync_ack = 1'($urandom);
      #1;
      checks++;
      if (aer_ack !== sync_ack) failures++;
      req_h.push_back(aer_req);
      dat_h.push_back(aer_data);
      @(posedge clk); #1;
      if (req_h.size() > 2) begin
        void'(req_h.pop_front());
        void'(dat_h.pop_front());
      end
      if (req_h.size() == 2) begin
        checks++;
        if (sync_req !== req_h[0] || sync_data !== dat_h[0]) begin
          failures++;
          $display("mismatch at %0d: got %b/%h want %b/%h", i, sync_req, sync_data, req_h[0], dat_h[0]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
