// Testbench of priority_encoder (N = 128): random sparse and dense request
// vectors, the empty vector and single bits; the address must be the lowest
// set index, valid must tell whether any bit is set.
module tb_priority_encoder;
  localparam int N = 128;
  logic [N-1:0] req;
  logic valid;
  logic [$clog2(N)-1:0] addr;
  int checks = 0, failures = 0;

  priority_encoder #(.N(N)) dut (.*);

  task automatic check();
    int exp_a;
    exp_a = -1;
    #1;
    for (int i = N - 1; i >= 0; i--) if (req[i]) exp_a = i;
    checks++;
    if (valid !== (exp_a >= 0) || (exp_a >= 0 && int'(addr) != exp_a)) begin
      failures++;
      $display("req=%h valid=%b addr=%0d exp %0d", req, valid, addr, exp_a);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req = '0; check();
    for (int i = 0; i < N; i++) begin req = '0; req[i] = 1'b1; check(); end
    for (int t = 0; t < 300; t++) begin
      for (int i = 0; i < N; i++) req[i] = ($urandom_range(0, 99) < ((t % 2) ? 3 : 50));
      check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
