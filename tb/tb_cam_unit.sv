// Testbench of cam_unit at 2 arrays x 4 subarrays x (8 x 8) per stage:
// 16 entries of 32-bit SDRs with 8-bit counts. Entries are written stage by
// stage and as pairs; searches of the present stage, the next stage and of
// pairs are compared with a reference; max and min searches over a candidate
// set are compared with the reference extreme; bit-serial reads of the next
// state and of the count must deliver the stored value after exactly Q
// read clocks plus one.
module tb_cam_unit;
  import htm_pkg::*;
  localparam int M = 2, NS = 4, P = 8, Q = 8, W = NS * Q, E = M * P;
  logic clk = 0, rst_n = 0;
  cam_op_e op;
  stage_e stage;
  logic [3:0] addr;
  logic [W-1:0] data_a, data_b, pred;
  logic [2:0] col;
  logic mm_max, mm_glob_hit;
  logic [E-1:0] mm_init, pres_match, next_match, mm_cand;
  logic [Q-1:0] conf_rd;
  logic [W-1:0] r_pres [E], r_next [E];
  logic [Q-1:0] r_cnt [E];
  int checks = 0, failures = 0;

  cam_unit #(.M(M), .NSUB(NS), .P(P), .Q(Q)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cmd(input cam_op_e o, input stage_e s = STG_PRESENT, input int a = 0,
                     input logic [W-1:0] da = '0, input logic [W-1:0] db = '0, input int c = 0);
    @(negedge clk);
    op = o; stage = s; addr = 4'(a); data_a = da; data_b = db; col = 3'(c);
  endtask

  task automatic search(input stage_e s, input logic [W-1:0] ka, input logic [W-1:0] kb);
    logic [E-1:0] ep, en;
    cmd(CAM_PRESRCH, s, 0, ka, kb);
    cmd(CAM_SEARCH, s, 0, ka, kb);
    cmd(CAM_NOP);
    for (int e = 0; e < E; e++) begin
      ep[e] = (r_pres[e] == ka);
      en[e] = (r_next[e] == ((s == STG_PAIR) ? kb : ka));
    end
    checks++;
    if ((s != STG_NEXT && pres_match !== ep) || (s != STG_PRESENT && next_match !== en)) begin
      failures++;
      $display("search stage %0d: pres %h exp %h next %h exp %h", s, pres_match, ep, next_match, en);
    end
  endtask

  task automatic read(input stage_e s, input int e);
    int cyc;
    cmd(CAM_RD_CLR, s, e);
    cyc = 0;
    for (int c = Q - 1; c >= 0; c--) begin cmd(CAM_RD_BIT, s, e, '0, '0, c); cyc++; end
    cmd(CAM_NOP); cyc++;
    @(negedge clk);
    checks++;
    if ((s == STG_NEXT && pred !== r_next[e]) || (s == STG_CONF && conf_rd !== r_cnt[e]) || cyc != Q + 1) begin
      failures++;
      $display("read stage %0d entry %0d: pred %h exp %h conf %h exp %h", s, e, pred, r_next[e], conf_rd, r_cnt[e]);
    end
  endtask

  task automatic minmax(input logic [E-1:0] c0, input logic mx);
    logic [E-1:0] ex;
    int best;
    mm_init = c0; mm_max = mx;
    cmd(CAM_MM_LOAD);
    for (int b = Q - 1; b >= 0; b--) begin
      cmd(CAM_MM_STEP, STG_CONF, 0, '0, '0, b);
      cmd(CAM_MM_APPLY);
    end
    cmd(CAM_NOP);
    best = mx ? -1 : 1000;
    for (int e = 0; e < E; e++)
      if (c0[e] && (mx ? int'(r_cnt[e]) > best : int'(r_cnt[e]) < best)) best = r_cnt[e];
    for (int e = 0; e < E; e++) ex[e] = c0[e] && (int'(r_cnt[e]) == best);
    checks++;
    if (mm_cand !== ex) begin
      failures++;
      $display("%s over %h: %h exp %h", mx ? "max" : "min", c0, mm_cand, ex);
    end
  endtask

  initial begin
    op = CAM_NOP; stage = STG_PRESENT; addr = '0; data_a = '0; data_b = '0; col = '0;
    mm_max = 1; mm_init = '0;
    for (int e = 0; e < E; e++) begin r_pres[e] = '0; r_next[e] = '0; r_cnt[e] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int e = 0; e < E; e++) begin
      r_pres[e] = (e % 4 == 3) ? r_pres[e-1] : $urandom;   // repeated present states
      r_next[e] = $urandom;
      r_cnt[e]  = Q'($urandom);
      if (e % 2) cmd(CAM_WRITE, STG_PAIR, e, r_pres[e], r_next[e]);
      else begin
        cmd(CAM_WRITE, STG_PRESENT, e, r_pres[e]);
        cmd(CAM_WRITE, STG_NEXT, e, r_next[e]);
      end
      cmd(CAM_WRITE, STG_CONF, e, W'(r_cnt[e]));
    end
    for (int t = 0; t < 20; t++) begin
      int e;
      e = $urandom_range(0, E-1);
      search(STG_PRESENT, r_pres[e], '0);
      search(STG_NEXT, r_next[e], '0);
      search(STG_PAIR, r_pres[e], (t % 3 == 0) ? r_next[(e + 1) % E] : r_next[e]);
      read(STG_NEXT, e);
      read(STG_CONF, e);
      minmax(E'($urandom) | E'(1) << e, t % 2 == 0);
    end
    search(STG_PRESENT, $urandom, '0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
