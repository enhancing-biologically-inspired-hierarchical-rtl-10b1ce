// Testbench of afecam_array with 4 subarrays of 16 x 8 (32-bit words):
// random words are written row by row, then stored and random words are
// searched (two phases); the AND-tree match vector must equal an exact-match
// reference over whole words. A bit-serial read of every column of a random
// row must return the word's bits, one per subarray, on rd_bits.
module tb_afecam_array;
  localparam int NS = 4, P = 16, Q = 8, W = NS * Q;
  logic clk = 0, rst_n = 0, wr_en, pre, ph;
  logic [P-1:0] row_sel, pre_en, match;
  logic [W-1:0] wr_data, sl_care, sl_val;
  logic [3:0] rd_row;
  logic [NS-1:0] rd_bits;
  logic [W-1:0] ref_m [P];
  int checks = 0, failures = 0;

  afecam_array #(.NSUB(NS), .P(P), .Q(Q)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic search(input logic [W-1:0] key);
    @(negedge clk);
    pre = 1; ph = 0; sl_care = ~key; sl_val = key;
    @(negedge clk);
    ph = 1; sl_care = key;
    @(negedge clk);
    pre = 0; sl_care = '0;
    for (int r = 0; r < P; r++) begin
      checks++;
      if (match[r] !== (ref_m[r] == key)) begin
        failures++;
        $display("key %h row %0d match %b stored %h", key, r, match[r], ref_m[r]);
      end
    end
  endtask

  initial begin
    wr_en = 0; pre = 0; ph = 0; row_sel = '0; pre_en = '1; wr_data = '0;
    sl_care = '0; sl_val = '0; rd_row = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < P; r++) begin
      @(negedge clk);
      wr_en = 1; row_sel = P'(1) << r; wr_data = $urandom;
      if (r == 5) wr_data = ref_m[2] ^ 32'h0000_0100;  // differs in one subarray only
      ref_m[r] = wr_data;
    end
    @(negedge clk) wr_en = 0;
    for (int t = 0; t < 30; t++) search(ref_m[$urandom_range(0, P-1)]);
    search(ref_m[2]);
    search($urandom);
    for (int t = 0; t < 6; t++) begin
      int r;
      r = $urandom_range(0, P-1);
      for (int c = 0; c < Q; c++) begin
        @(negedge clk);
        rd_row = 4'(r); pre = 1; ph = 0; sl_val = '0;
        for (int i = 0; i < W; i++) sl_care[i] = (i % Q == c);
        @(negedge clk);
        pre = 0; sl_care = '0;
        for (int k = 0; k < NS; k++) begin
          checks++;
          if (rd_bits[k] !== ref_m[r][k*Q + c]) begin
            failures++;
            $display("read row %0d col %0d sub %0d: %b", r, c, k, rd_bits[k]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
