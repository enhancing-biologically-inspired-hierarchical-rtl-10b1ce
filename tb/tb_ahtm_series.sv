// Workload run of ahtm_top at its default size on a price-like series of
// the length of the shortest financial benchmark the design targets (842
// monthly points). The recorded prices themselves are not part of this
// testbench: the series is generated here as a mean-reverting random walk
// with a yearly cycle, quantised into B buckets.
// Encoder stand-in: bucket b becomes an SDR of 21 contiguous active bits
// starting at bit b * (1024 - 21) / (B - 1), so neighbouring buckets share
// a few bits, like an HTM scalar encoder (the spatial pooler is skipped).
// SM stand-in: a persistence forecaster that predicts the present SDR
// again. Every step is checked against the reflex-memory and control-unit
// reference models; the run reports how often RM answered, was used and
// was correct, and counts hits, new entries, max searches and both sources.
module tb_ahtm_series;
  import htm_pkg::*;
  import ahtm_ref_pkg::*;
  localparam int M = 16, NS = 128, P = 128, Q = 8, W = NS * Q, E = M * P, WIN = 4;
  localparam int B = 64, ACT = 21, N_PTS = 842;

  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, in_restart, in_sm_valid;
  logic [W-1:0] in_sdr, in_sm_pred, out_pred, ev_ri, ev_ri1;
  logic out_valid, out_pred_valid, out_use_sm, out_rm_hit, out_rm_correct, out_sm_correct;
  logic out_rm_dec, out_rm_new, out_rm_minmax, out_rm_dropped;
  sm_train_e out_sm_train;
  logic ev_valid, ev_ready, ev_done, ev_found, full;
  logic [10:0] ts_raddr;
  logic [15:0] ts_rdata;

  ahtm_top dut (.*);
  always #5 clk = ~clk;

  rm_ref #(W, E, Q) rm;
  cu_ref #(W, WIN) cu;
  logic [W-1:0] sym [B];
  logic [W-1:0] rm_prev, sm_prev;
  logic rm_prev_v, sm_prev_v, have_prev;
  int checks = 0, failures = 0;
  int n_rm_ok, n_sm_ok, price, bucket;
  int n_hit, n_miss, n_mm, n_new, n_drop, n_ev, n_dec, n_rm_sel, n_sm_sel, n_restart;
  int n_train [4];

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [W-1:0] encode(int b);
    logic [W-1:0] v;
    int lo;
    v = '0;
    lo = b * (W - ACT) / (B - 1);
    for (int i = 0; i < ACT; i++) v[lo + i] = 1'b1;
    return v;
  endfunction

  task automatic do_step(input int s, input logic restart);
    logic [W-1:0] x, smp, e_pred;
    logic dec, e_use_sm, e_pv;
    sm_train_e e_tr;
    x = sym[s];
    smp = x;
    if (restart) begin rm.restart(); have_prev = 0; n_restart++; end
    dec = 0; e_use_sm = 0; e_tr = SM_UPDATE;
    if (have_prev) begin
      cu.step(x, rm_prev, rm_prev_v, sm_prev, sm_prev_v);
      dec = !cu.rm_ok && cu.sm_ok;
      e_use_sm = cu.use_sm;
      e_tr = cu.rm_ok ? (cu.sm_ok ? SM_HIGH : SM_REGULAR) : (cu.sm_ok ? SM_NONE : SM_UPDATE);
    end
    rm.step(x, dec);
    if (rm.hit && !e_use_sm) begin e_pred = rm.pred; e_pv = 1; end
    else begin e_pred = smp; e_pv = 1; end

    @(negedge clk);
    in_valid = 1; in_sdr = x; in_sm_pred = smp; in_sm_valid = 1; in_restart = restart;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    #1 in_valid = 0; in_restart = 0;
    while (!out_valid) @(posedge clk) #1;
    checks++;
    if (out_rm_hit !== rm.hit || out_use_sm !== e_use_sm || out_pred !== e_pred ||
        out_pred_valid !== e_pv || out_sm_train !== e_tr || out_rm_dec !== dec ||
        out_rm_new !== rm.is_new || out_rm_minmax !== rm.mm || out_rm_dropped !== rm.drop) begin
      failures++;
      $display("step %0d: hit %b/%b use_sm %b/%b pred %h/%h train %0d/%0d dec %b/%b new %b/%b mm %b/%b drop %b/%b",
               rm.now, out_rm_hit, rm.hit, out_use_sm, e_use_sm, out_pred, e_pred, out_sm_train, e_tr,
               out_rm_dec, dec, out_rm_new, rm.is_new, out_rm_minmax, rm.mm, out_rm_dropped, rm.drop);
    end
    rm_prev = rm.pred; rm_prev_v = rm.hit; sm_prev = smp; sm_prev_v = 1; have_prev = 1;
    n_hit += rm.hit; n_miss += !rm.hit; n_mm += rm.mm; n_new += rm.is_new; n_drop += rm.drop;
    n_rm_ok += have_prev && cu.rm_ok; n_sm_ok += have_prev && cu.sm_ok;
    n_dec += dec; n_rm_sel += have_prev && !e_use_sm; n_sm_sel += e_use_sm;
    if (have_prev) n_train[e_tr]++;
  endtask

  task automatic do_evict();
    int e;
    e = rm.victim();
    if (e < 0) return;
    @(negedge clk);
    ev_valid = 1; ev_ri = rm.pres[e]; ev_ri1 = rm.nxt[e];
    @(posedge clk);
    while (!ev_ready) @(posedge clk);
    #1 ev_valid = 0;
    while (!ev_done) @(posedge clk) #1;
    checks++;
    if (ev_found !== 1'b1) begin failures++; $display("eviction of entry %0d not found", e); end
    rm.evict(e);
    n_ev++;
  endtask

  initial begin
    rm = new();
    cu = new();
    in_valid = 0; in_restart = 0; in_sdr = '0; in_sm_pred = '0; in_sm_valid = 0;
    ev_valid = 0; ev_ri = '0; ev_ri1 = '0; ts_raddr = '0;
    rm_prev = '0; sm_prev = '0; rm_prev_v = 0; sm_prev_v = 0; have_prev = 0;
    {n_hit, n_miss, n_mm, n_new, n_drop, n_ev, n_dec, n_rm_sel, n_sm_sel, n_restart, n_rm_ok, n_sm_ok} = '0;
    for (int i = 0; i < 4; i++) n_train[i] = 0;
    for (int i = 0; i < B; i++) sym[i] = encode(i);
    repeat (2) @(posedge clk);
    rst_n = 1;
    // price in 1/16 bucket units; yearly cycle of +-4 buckets, noise of
    // about one bucket per step, pulled back towards the middle
    price = (B / 2) * 16;
    for (int t = 0; t < N_PTS; t++) begin
      int cyc;
      cyc = (t % 12 < 6) ? 16 * 4 / 6 : -16 * 4 / 6;
      price += cyc + $signed($urandom_range(0, 32)) - 16 - (price - (B / 2) * 16) / 16;
      if (price < 0) price = 0;
      if (price > (B - 1) * 16) price = (B - 1) * 16;
      bucket = price / 16;
      if (full && t % 3 == 0) do_evict();
      do_step(bucket, 1'b0);
    end
    $display("%0d points: RM hits %0d misses %0d max-searches %0d new %0d dropped %0d evictions %0d decrements %0d",
             N_PTS, n_hit, n_miss, n_mm, n_new, n_drop, n_ev, n_dec);
    $display("RM selected %0d SM selected %0d; RM correct %0d SM correct %0d; rules %0d %0d %0d %0d",
             n_rm_sel, n_sm_sel, n_rm_ok, n_sm_ok, n_train[0], n_train[1], n_train[2], n_train[3]);
    checks += 6;
    if (n_hit == 0)    begin failures++; $display("no RM hit"); end
    if (n_miss == 0)   begin failures++; $display("no RM miss"); end
    if (n_mm == 0)     begin failures++; $display("no max search"); end
    if (n_new == 0)    begin failures++; $display("no new entry"); end
    if (n_rm_sel == 0) begin failures++; $display("RM never selected"); end
    if (n_sm_sel == 0) begin failures++; $display("SM never selected"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
