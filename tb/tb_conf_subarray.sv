// Testbench of conf_subarray (16 counts of 8 bits): random counts are
// written, a random candidate set is loaded and the iterative bit-serial
// max (and min) search is run MSB first, one step plus one apply per bit.
// The remaining candidate set must be exactly the candidates holding the
// maximum (minimum) count and the priority-encoded address the first of them.
// Includes the classic worked example of the max search (counts 001, 010,
// 000, 011 -> row 3: the MSB is 0 everywhere, bit 1 keeps rows 1 and 3,
// bit 0 leaves row 3).
module tb_conf_subarray;
  localparam int P = 16, Q = 8;
  logic clk = 0, rst_n = 0;
  logic wr_en, pre, ph, cand_load, mm_active, mm_max, mm_apply, glob_hit;
  logic [P-1:0] wr_row, cand_in, cand;
  logic [Q-1:0] wr_data, sl_care, sl_val;
  logic [3:0] rd_row, addr;
  logic rd_bit, any_hit, addr_valid;
  logic [Q-1:0] cnt [P];
  int checks = 0, failures = 0;

  conf_subarray #(.P(P), .Q(Q)) dut (.*);
  assign glob_hit = any_hit;
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_counts();
    for (int r = 0; r < P; r++) begin
      @(negedge clk);
      wr_en = 1; wr_row = P'(1) << r; wr_data = cnt[r];
    end
    @(negedge clk) wr_en = 0;
  endtask

  task automatic minmax(input logic [P-1:0] c0, input logic do_max);
    logic [P-1:0] exp_c;
    int best, first;
    @(negedge clk);
    cand_load = 1; cand_in = c0; mm_max = do_max;
    @(negedge clk);
    cand_load = 0;
    for (int b = Q - 1; b >= 0; b--) begin
      mm_active = 1; pre = 1; ph = do_max;
      sl_care = Q'(1) << b; sl_val = do_max ? '1 : '0;
      @(negedge clk);
      mm_active = 0; pre = 0; sl_care = '0; mm_apply = 1;
      @(negedge clk);
      mm_apply = 0;
    end
    best = do_max ? -1 : 1 << Q;
    for (int r = 0; r < P; r++)
      if (c0[r] && (do_max ? int'(cnt[r]) > best : int'(cnt[r]) < best)) best = cnt[r];
    exp_c = '0; first = -1;
    for (int r = P - 1; r >= 0; r--)
      if (c0[r] && int'(cnt[r]) == best) begin exp_c[r] = 1'b1; first = r; end
    checks++;
    if (cand !== exp_c || (first >= 0 && int'(addr) != first) || addr_valid !== (first >= 0)) begin
      failures++;
      $display("%s: cand %h exp %h addr %0d exp %0d", do_max ? "max" : "min", cand, exp_c, addr, first);
    end
  endtask

  initial begin
    wr_en = 0; pre = 0; ph = 0; cand_load = 0; mm_active = 0; mm_max = 1; mm_apply = 0;
    wr_row = '0; cand_in = '0; wr_data = '0; sl_care = '0; sl_val = '0; rd_row = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // worked example in rows 0..3 (3-bit counts in the low bits)
    for (int r = 0; r < P; r++) cnt[r] = '0;
    cnt[0] = 8'd1; cnt[1] = 8'd2; cnt[2] = 8'd0; cnt[3] = 8'd3;
    write_counts();
    minmax(16'h000f, 1'b1);
    checks++;
    if (addr !== 4'd3) begin failures++; $display("worked example: addr %0d", addr); end
    for (int t = 0; t < 40; t++) begin
      for (int r = 0; r < P; r++) cnt[r] = (t % 2) ? Q'($urandom_range(0, 7)) : Q'($urandom);
      write_counts();
      minmax(P'($urandom) | P'(1) << (t % P), 1'b1);
      minmax(P'($urandom) | P'(1) << (t % P), 1'b0);
    end
    // counts read bit-serially through Q'_A
    for (int r = 0; r < P; r++) begin
      for (int c = 0; c < Q; c++) begin
        @(negedge clk);
        rd_row = 4'(r); pre = 1; ph = 0; sl_care = Q'(1) << c; sl_val = '0;
        @(negedge clk);
        pre = 0; sl_care = '0;
        checks++;
        if (rd_bit !== cnt[r][c]) begin failures++; $display("read r%0d c%0d", r, c); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
