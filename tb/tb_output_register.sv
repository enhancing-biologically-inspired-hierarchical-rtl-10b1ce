// Testbench of output_register: random sense decisions and phase enables,
// flip-flop contents tracked by a reference model; checks Q'_A, Q_B and
// M = Q'_A | Q_B after every clock.
module tb_output_register;
  localparam int R = 16;
  logic clk = 0, rst_n = 0, a_en, b_en;
  logic [R-1:0] sa, qa_n, qb, m, ra, rb;
  int checks = 0, failures = 0;

  output_register #(.ROWS(R)) dut (.clk, .rst_n, .clk_a_en(a_en), .clk_b_en(b_en),
                                   .sa_out(sa), .qa_n, .qb, .m);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a_en = 0; b_en = 0; sa = '0; ra = '0; rb = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      a_en = $urandom_range(0, 1);
      b_en = $urandom_range(0, 1);
      sa   = R'($urandom);
      @(posedge clk);
      if (a_en) ra = sa;
      if (b_en) rb = ~sa;
      #1;
      checks++;
      if (qa_n !== ~ra || qb !== rb || m !== (~ra | rb)) begin
        failures++;
        $display("mismatch at %0d: qa_n=%h exp %h qb=%h exp %h m=%h", i, qa_n, ~ra, qb, rb, m);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
