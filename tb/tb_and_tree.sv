// Testbench of and_tree at its default size (128 vectors of 128 bits) and at
// an odd size (5 vectors): random inputs, mostly ones so that matches occur,
// compared with a bitwise AND computed in a loop.
module tb_and_tree;
  localparam int N = 128, W = 128;
  logic [N-1:0][W-1:0] in_vec;
  logic [W-1:0] out_vec, ref_v;
  logic [4:0][W-1:0] in5;
  logic [W-1:0] out5, ref5;
  int checks = 0, failures = 0;

  and_tree #(.N_IN(N), .W(W)) dut (.in_vec, .out_vec);
  and_tree #(.N_IN(5), .W(W)) dut5 (.in_vec(in5), .out_vec(out5));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 200; t++) begin
      for (int i = 0; i < N; i++)
        for (int b = 0; b < W; b++)
          in_vec[i][b] = ($urandom_range(0, 999) < 997);
      for (int i = 0; i < 5; i++)
        for (int b = 0; b < W; b++)
          in5[i][b] = ($urandom_range(0, 9) < 8);
      #1;
      ref_v = '1;
      for (int i = 0; i < N; i++) ref_v &= in_vec[i];
      ref5 = '1;
      for (int i = 0; i < 5; i++) ref5 &= in5[i];
      checks += 2;
      if (out_vec !== ref_v) begin failures++; $display("N=128 mismatch %h vs %h", out_vec, ref_v); end
      if (out5 !== ref5) begin failures++; $display("N=5 mismatch %h vs %h", out5, ref5); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
