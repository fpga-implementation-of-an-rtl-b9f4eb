// dp_bram_tb: random writes on port A and reads on port B against an
// associative-array model of the memory. Checks one-cycle read latency, that
// dob holds when enb is low, read-old-data on a same-address collision, the
// zero initial contents, and that a write with ena low does nothing.
module dp_bram_tb;
  logic clk = 0;
  logic ena, wea, enb;
  logic [15:0] addra, addrb;
  logic [20:0] dia, dob, model [int];
  logic [20:0] expected;
  int checks = 0, failures = 0;

  dp_bram #(.ADDR_W(16), .DATA_W(21)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [20:0] peek(logic [15:0] a);
    return model.exists(int'(a)) ? model[int'(a)] : 21'd0;
  endfunction

  initial begin
    ena = 0; wea = 0; enb = 0; addra = 0; addrb = 0; dia = 0;
    expected = 0;
    @(negedge clk);
    for (int i = 0; i < 4000; i++) begin
      ena   = 1'($urandom);
      wea   = ($urandom_range(0, 3) != 0);
      addra = 16'($urandom_range(0, 63)) | (i > 3000 ? 16'($urandom) : 16'd0);
      dia   = 21'($urandom);
      enb   = ($urandom_range(0, 3) != 0);
      addrb = (i % 7 == 0) ? addra : 16'($urandom_range(0, 63));
      if (enb) expected = peek(addrb);    // read returns the word before this write
      @(posedge clk);
      if (ena && wea) model[int'(addra)] = dia;
      @(negedge clk);
      checks++;
      if (dob !== expected) begin
        failures++;
        $display("cycle %0d: dob %h want %h", i, dob, expected);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
