// Testbench of afecam_subarray (P x Q = 128 x 8): random rows are written,
// then the two-phase search is run for stored and random words and every
// row's match (M = 0) is compared with an exact-match reference. Single
// column pre-searches with '0' must return the stored bit on Q'_A, and rows
// with precharge disabled must read as misses.
module tb_afecam_subarray;
  localparam int P = 128, Q = 8;
  logic clk = 0, rst_n = 0;
  logic wr_en, pre, ph;
  logic [P-1:0] wr_row, pre_en, qa_n, qb, m;
  logic [Q-1:0] wr_data, sl_care, sl_val;
  logic [Q-1:0] ref_mem [P];
  int checks = 0, failures = 0;

  afecam_subarray #(.P(P), .Q(Q)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic do_search(input logic [Q-1:0] key, input logic [P-1:0] en);
    @(negedge clk);
    pre_en = en; pre = 1; ph = 0; sl_care = ~key; sl_val = key;
    @(negedge clk);
    ph = 1; sl_care = key;
    @(negedge clk);
    pre = 0; sl_care = '0;
    for (int r = 0; r < P; r++) begin
      checks++;
      if ((m[r] == 1'b0) !== (en[r] && ref_mem[r] == key)) begin
        failures++;
        $display("search %h row %0d: m=%b stored %h", key, r, m[r], ref_mem[r]);
      end
    end
  endtask

  initial begin
    wr_en = 0; pre = 0; ph = 0; wr_row = '0; wr_data = '0; sl_care = '0; sl_val = '0;
    pre_en = '1;
    for (int r = 0; r < P; r++) ref_mem[r] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < P; r++) begin
      @(negedge clk);
      wr_en = 1; wr_row = '0; wr_row[r] = 1'b1; wr_data = Q'($urandom);
      ref_mem[r] = wr_data;
    end
    @(negedge clk) wr_en = 0;
    for (int i = 0; i < 40; i++) do_search(ref_mem[$urandom_range(0, P-1)], '1);
    for (int i = 0; i < 20; i++) do_search(Q'($urandom), '1);
    for (int i = 0; i < 20; i++) do_search(ref_mem[$urandom_range(0, P-1)], {4{32'($urandom)}});
    // bit-serial read: pre-search one column with '0'
    for (int c = 0; c < Q; c++) begin
      @(negedge clk);
      pre_en = '1; pre = 1; ph = 0; sl_care = '0; sl_care[c] = 1'b1; sl_val = '0;
      @(negedge clk);
      pre = 0;
      for (int r = 0; r < P; r++) begin
        checks++;
        if (qa_n[r] !== ref_mem[r][c]) begin
          failures++;
          $display("read col %0d row %0d: %b exp %b", c, r, qa_n[r], ref_mem[r][c]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
