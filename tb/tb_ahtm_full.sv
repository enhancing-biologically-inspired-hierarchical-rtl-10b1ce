// Full-size run of ahtm_top with every parameter at its default: 2048
// reflex-memory entries of 1024-bit SDRs (16 arrays of 128 subarrays of
// 128 x 8 per stage), a control-unit window of four scores.
//
// Same host, SM model and reference models as tb_ahtm_top, with SDRs of 20
// active bits out of 1024 and a shorter stream: a repeating first-order
// sequence (RM learns and is used), random symbols with a strong SM (the
// control unit switches to the SM and lowers RM counts), a few steps over
// 250 symbols at random until all 2048 entries are used (transitions are
// then dropped and the host evicts the least used entries), and a restart.
module tb_ahtm_full;
  import htm_pkg::*;
  import ahtm_ref_pkg::*;
  localparam int M = 16, NS = 128, P = 128, Q = 8, W = NS * Q, E = M * P, WIN = 4;
  localparam int K = 250, ACT = 20, STEPS_A = 30, STEPS_B = 25, STEPS_C = 2200, STEPS_D = 6;

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
  logic [W-1:0] sym [K];
  logic [W-1:0] rm_prev, sm_prev;
  logic rm_prev_v, sm_prev_v, have_prev;
  int checks = 0, failures = 0;
  int n_hit, n_miss, n_mm, n_new, n_drop, n_ev, n_dec, n_rm_sel, n_sm_sel, n_restart;
  int n_train [4];

  initial begin
    repeat (5000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [W-1:0] make_sym();
    logic [W-1:0] s;
    s = '0;
    while ($countones(s) < ACT) s[$urandom_range(0, W-1)] = 1'b1;
    return s;
  endfunction

  task automatic do_step(input int s, input int s_next, input int sm_pct, input logic restart);
    logic [W-1:0] x, smp, e_pred;
    logic dec, e_use_sm, e_pv;
    sm_train_e e_tr;
    x = sym[s];
    smp = ($urandom_range(0, 99) < sm_pct) ? sym[s_next] : sym[$urandom_range(0, K-1)];
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

  int s, sn;
  initial begin
    rm = new();
    cu = new();
    in_valid = 0; in_restart = 0; in_sdr = '0; in_sm_pred = '0; in_sm_valid = 0;
    ev_valid = 0; ev_ri = '0; ev_ri1 = '0; ts_raddr = '0;
    rm_prev = '0; sm_prev = '0; rm_prev_v = 0; sm_prev_v = 0; have_prev = 0;
    {n_hit, n_miss, n_mm, n_new, n_drop, n_ev, n_dec, n_rm_sel, n_sm_sel, n_restart} = '0;
    for (int i = 0; i < 4; i++) n_train[i] = 0;
    for (int i = 0; i < K; i++) sym[i] = make_sym();
    repeat (2) @(posedge clk);
    rst_n = 1;
    s = 0;
    for (int t = 0; t < STEPS_A; t++) begin          // A
      sn = ($urandom_range(0, 9) == 0) ? $urandom_range(0, 4) : (s + 1) % 5;
      do_step(s, sn, 40, 1'b0);
      s = sn;
    end
    for (int t = 0; t < STEPS_B; t++) begin          // B
      sn = $urandom_range(0, 5);
      do_step(s, sn, 95, 1'b0);
      s = sn;
    end
    for (int t = 0; t < STEPS_C; t++) begin          // C
      sn = $urandom_range(0, K-1);
      if (full && t % 3 == 0) do_evict();
      do_step(s, sn, 70, 1'b0);
      s = sn;
    end
    s = 0;
    for (int t = 0; t < STEPS_D; t++) begin          // D
      if (full && t % 3 == 0) do_evict();
      sn = (s + 1) % 5;
      do_step(s, sn, 50, t == 0);
      s = sn;
    end
    $display("RM hits %0d misses %0d max-searches %0d new %0d dropped %0d evictions %0d decrements %0d",
             n_hit, n_miss, n_mm, n_new, n_drop, n_ev, n_dec);
    $display("RM selected %0d SM selected %0d, rules %0d %0d %0d %0d, restarts %0d",
             n_rm_sel, n_sm_sel, n_train[0], n_train[1], n_train[2], n_train[3], n_restart);
    checks += 14;
    if (n_hit == 0)    begin failures++; $display("no RM hit"); end
    if (n_miss == 0)   begin failures++; $display("no RM miss"); end
    if (n_mm == 0)     begin failures++; $display("no max search"); end
    if (n_drop == 0)   begin failures++; $display("RM never full"); end
    if (n_ev == 0)     begin failures++; $display("no eviction"); end
    if (n_new == 0)    begin failures++; $display("no new entry"); end
    if (n_dec == 0)    begin failures++; $display("no decrement"); end
    if (n_rm_sel == 0) begin failures++; $display("RM never selected"); end
    if (n_sm_sel == 0) begin failures++; $display("SM never selected"); end
    for (int i = 0; i < 4; i++) if (n_train[i] == 0) begin failures++; $display("rule %0d never", i); end
    if (n_restart == 0) begin failures++; $display("no restart"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
