// Testbench of sipo_register: random bytes are shifted in MSB first; after Q
// clocks the parallel output must equal the byte. Also checks clear and that
// the register holds while shift is low.
module tb_sipo_register;
  localparam int Q = 8;
  logic clk = 0, rst_n = 0, clr, shift, sin;
  logic [Q-1:0] pout, word;
  int checks = 0, failures = 0;

  sipo_register #(.Q(Q)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clr = 0; shift = 0; sin = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 100; t++) begin
      word = Q'($urandom);
      for (int c = Q - 1; c >= 0; c--) begin
        @(negedge clk);
        shift = 1; sin = word[c];
      end
      @(negedge clk);
      shift = 0;
      checks++;
      if (pout !== word) begin failures++; $display("got %h exp %h", pout, word); end
      @(negedge clk);
      checks++;
      if (pout !== word) begin failures++; $display("not held: %h", pout); end
      if (t % 10 == 0) begin
        clr = 1;
        @(negedge clk);
        clr = 0;
        checks++;
        if (pout !== '0) begin failures++; $display("clear failed"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
