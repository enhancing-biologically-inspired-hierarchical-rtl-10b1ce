// Testbench of control_unit (1024-bit SDRs, window of 4): a sequence of steps
// in which the RM and SM predictions are exact, partly overlapping, disjoint
// or missing. The testbench scores them itself, keeps its own window of the
// last four scores of each memory and checks the selection (SM only when the
// RM sum is higher), the RM count decrement and the SM training code of each
// of the four rules. Each rule and both selections must occur.
module tb_control_unit;
  import htm_pkg::*;
  localparam int W = 1024, F = 8, WIN = 4;
  logic clk = 0, rst_n = 0, step;
  logic [W-1:0] actual, rm_pred, sm_pred;
  logic rm_valid, sm_valid, done, use_sm, rm_dec, rm_correct, sm_correct;
  sm_train_e sm_train;
  logic [10:0] rm_sum, sm_sum;
  int rm_w [WIN], sm_w [WIN];
  int checks = 0, failures = 0;
  int seen_rule [4], seen_sel [2];

  control_unit #(.W(W), .WIN(WIN), .FRAC(F)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Prediction of the given kind: 0 exact, 1 60 % overlap, 2 disjoint, 3 none.
  function automatic logic [W-1:0] make_pred(input logic [W-1:0] a, input int kind);
    logic [W-1:0] p;
    int n;
    p = '0; n = 0;
    for (int i = 0; i < W; i++)
      if (a[i]) begin
        if (kind == 0 || (kind == 1 && n % 5 < 3)) p[i] = 1'b1;
        n++;
      end
    if (kind == 2) p = ~a & {W/32{32'h0100_0001}};
    return p;
  endfunction

  function automatic int score(input logic [W-1:0] p, input logic v, input logic [W-1:0] a,
                               output logic ok);
    int na, ov;
    na = 0; ov = 0;
    for (int i = 0; i < W; i++) begin na += a[i]; ov += a[i] & p[i]; end
    if (!v) begin ok = 0; return 256; end
    ok = (2 * ov >= na);
    return (na == 0) ? 0 : ((na - ov) * 256) / na;
  endfunction

  initial begin
    step = 0; actual = '0; rm_pred = '0; sm_pred = '0; rm_valid = 0; sm_valid = 0;
    for (int i = 0; i < WIN; i++) begin rm_w[i] = 0; sm_w[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      int kr, ks, sr, ss, rsum, ssum;
      logic okr, oks;
      sm_train_e exp_tr;
      @(negedge clk);
      for (int i = 0; i < W; i++) actual[i] = ($urandom_range(0, 99) < 3);
      // phases with RM mostly good, then mostly bad, then mixed
      kr = (t < 50) ? (($urandom_range(0, 9) < 8) ? 0 : 2) :
           (t < 100) ? (($urandom_range(0, 9) < 7) ? 2 + $urandom_range(0, 1) : 1) :
           $urandom_range(0, 3);
      ks = $urandom_range(0, 3);
      rm_pred = make_pred(actual, kr); rm_valid = (kr != 3);
      sm_pred = make_pred(actual, ks); sm_valid = (ks != 3);
      step = 1;
      sr = score(rm_pred, rm_valid, actual, okr);
      ss = score(sm_pred, sm_valid, actual, oks);
      for (int i = WIN - 1; i > 0; i--) begin rm_w[i] = rm_w[i-1]; sm_w[i] = sm_w[i-1]; end
      rm_w[0] = sr; sm_w[0] = ss;
      rsum = 0; ssum = 0;
      for (int i = 0; i < WIN; i++) begin rsum += rm_w[i]; ssum += sm_w[i]; end
      exp_tr = okr ? (oks ? SM_HIGH : SM_REGULAR) : (oks ? SM_NONE : SM_UPDATE);
      @(negedge clk);
      step = 0;
      checks++;
      if (!done || use_sm !== (rsum > ssum) || rm_dec !== (!okr && oks) || sm_train !== exp_tr
          || rm_correct !== okr || sm_correct !== oks || int'(rm_sum) != rsum || int'(sm_sum) != ssum) begin
        failures++;
        $display("t=%0d use_sm=%b exp %b (sums %0d/%0d exp %0d/%0d) dec=%b train=%0d exp %0d",
                 t, use_sm, rsum > ssum, rm_sum, sm_sum, rsum, ssum, rm_dec, sm_train, exp_tr);
      end
      seen_rule[exp_tr]++;
      seen_sel[rsum > ssum]++;
    end
    for (int i = 0; i < 4; i++) begin
      checks++;
      if (seen_rule[i] == 0) begin failures++; $display("rule %0d never occurred", i); end
    end
    for (int i = 0; i < 2; i++) begin
      checks++;
      if (seen_sel[i] == 0) begin failures++; $display("selection %0d never occurred", i); end
    end
    $display("rules %0d %0d %0d %0d, RM selected %0d, SM selected %0d",
             seen_rule[0], seen_rule[1], seen_rule[2], seen_rule[3], seen_sel[0], seen_sel[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
