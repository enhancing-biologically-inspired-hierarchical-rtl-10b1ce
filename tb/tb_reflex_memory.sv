// Testbench of reflex_memory at 2 arrays x 4 subarrays x (8 x 8): 16 entries
// of 32-bit SDRs. A stream over a small alphabet with mostly fixed successors
// and some noise is fed step by step. A reference model of the reflex-memory
// algorithm (pair counts, most frequent successor, lowest address on ties,
// lowest free entry, present state written first and completed next step)
// predicts every response: hit, predicted SDR, new/reinforced/min-max/drop/
// decrement flags and the exact latency in clocks, including the Q-clock
// bit-serial prediction read. Time stamps are compared at the end. The
// memory is driven full, entries are evicted (lowest count, oldest time) as
// the host would, and counts are decremented as the control unit would.
// Each of these mechanisms must occur.
module tb_reflex_memory;
  import htm_pkg::*;
  localparam int M = 2, NS = 4, P = 8, Q = 8, W = NS * Q, E = M * P, TSW = 16;
  localparam int K = 10;   // alphabet size
  logic clk = 0, rst_n = 0;
  logic req_valid, req_ready, req_dec, rsp_valid, rsp_hit, full;
  rm_op_e req_op;
  logic [W-1:0] req_sdr, req_sdr2, rsp_pred;
  logic [3:0] rsp_row, ts_raddr;
  logic rsp_new, rsp_reinforced, rsp_minmax, rsp_dropped, rsp_decd;
  logic [TSW-1:0] ts_rdata;

  reflex_memory #(.M(M), .NSUB(NS), .P(P), .Q(Q), .TS_W(TSW)) dut (.*);
  always #5 clk = ~clk;

  // reference model state
  logic         v [E];
  logic [W-1:0] pres [E], nxt [E];
  int           cnt [E], ts [E];
  logic         pend_v, prev_v, lp_v;
  int           pend_row, lp_row, now;
  logic [W-1:0] prev;
  logic [W-1:0] sym [K];

  int checks = 0, failures = 0;
  int n_hit = 0, n_miss = 0, n_new = 0, n_reinf = 0, n_mm = 0, n_drop = 0, n_dec = 0, n_ev = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int free_row();
    for (int e = 0; e < E; e++) if (!v[e] && !(pend_v && pend_row == e)) return e;
    return -1;
  endfunction

  // Issue one request, wait for the response, return the latency in clocks.
  task automatic issue(input rm_op_e o, input logic [W-1:0] a, input logic [W-1:0] b,
                       input logic d, output int lat);
    @(negedge clk);
    req_valid = 1; req_op = o; req_sdr = a; req_sdr2 = b; req_dec = d;
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    #1 req_valid = 0;
    lat = 0;
    do begin @(posedge clk); #1 lat++; end while (!rsp_valid);
  endtask

  task automatic step(input logic [W-1:0] x, input logic dec);
    logic e_hit, e_new, e_reinf, e_mm, e_drop, e_dec;
    logic [W-1:0] e_pred;
    int e_lat, lat, row, f;
    e_hit = 0; e_new = 0; e_reinf = 0; e_mm = 0; e_drop = 0; e_dec = 0; e_pred = '0;
    e_lat = 1;                                   // DONE
    if (dec && lp_v) begin
      cnt[lp_row] = (cnt[lp_row] > 0) ? cnt[lp_row] - 1 : 0;
      e_dec = 1; e_lat += Q + 3;
    end
    if (prev_v) begin
      e_lat += 3;
      row = -1;
      for (int e = E - 1; e >= 0; e--) if (v[e] && pres[e] == prev && nxt[e] == x) row = e;
      if (row >= 0) begin
        cnt[row] = (cnt[row] < (1 << Q) - 1) ? cnt[row] + 1 : cnt[row];
        ts[row] = now; e_reinf = 1; e_lat += Q + 3;
      end else if (pend_v) begin
        nxt[pend_row] = x; cnt[pend_row] = 1; v[pend_row] = 1; ts[pend_row] = now;
        pend_v = 0; e_new = 1; e_lat += 2;
      end else begin
        f = free_row();
        if (f >= 0) begin
          pres[f] = prev; nxt[f] = x; cnt[f] = 1; v[f] = 1; ts[f] = now;
          e_new = 1; e_lat += 2;
        end else e_drop = 1;
      end
    end
    // predict
    e_lat += 3;
    begin
      logic [E-1:0] c;
      int nc;
      c = '0; nc = 0;
      for (int e = 0; e < E; e++) if (v[e] && pres[e] == x) begin c[e] = 1; nc++; end
      if (nc == 0) begin
        f = free_row();
        if (f >= 0) begin
          pres[f] = x; pend_v = 1; pend_row = f; ts[f] = now; e_lat += 1;
        end else e_drop = 1;
      end else begin
        if (nc > 1) begin
          e_mm = 1;
          e_lat += 2;                              // MM_LOAD, MM_END
          for (int b = Q - 1; b >= 0; b--) begin
            logic [E-1:0] h;
            int nh;
            h = '0;
            for (int e = 0; e < E; e++) h[e] = c[e] && cnt[e][b];
            if (h != '0) c = h;
            e_lat += 2;
            nh = 0;
            for (int e = 0; e < E; e++) nh += c[e];
            if (nh == 1 && b > 0) begin e_lat += 1; break; end
          end
        end
        row = -1;
        for (int e = E - 1; e >= 0; e--) if (c[e]) row = e;
        e_hit = 1; e_pred = nxt[row]; ts[row] = now;
        lp_v = 1; lp_row = row;
        e_lat += Q + 2;                            // bit-serial read of the next state
      end
    end
    if (!e_hit) lp_v = 0;
    prev = x; prev_v = 1; now++;

    issue(RM_STEP, x, '0, dec, lat);
    checks++;
    if (rsp_hit !== e_hit || (e_hit && rsp_pred !== e_pred) || rsp_new !== e_new ||
        rsp_reinforced !== e_reinf || rsp_minmax !== e_mm || rsp_dropped !== e_drop ||
        rsp_decd !== e_dec || lat != e_lat) begin
      failures++;
      $display("step %0d: hit %b/%b pred %h/%h new %b/%b reinf %b/%b mm %b/%b drop %b/%b dec %b/%b lat %0d/%0d",
               now, rsp_hit, e_hit, rsp_pred, e_pred, rsp_new, e_new, rsp_reinforced, e_reinf,
               rsp_minmax, e_mm, rsp_dropped, e_drop, rsp_decd, e_dec, lat, e_lat);
    end
    n_hit += e_hit; n_miss += !e_hit; n_new += e_new; n_reinf += e_reinf;
    n_mm += e_mm; n_drop += e_drop; n_dec += e_dec;
  endtask

  // Host replacement: evict the valid entry with the lowest count, oldest first.
  task automatic evict_one();
    int best, lat;
    best = -1;
    for (int e = 0; e < E; e++)
      if (v[e] && (best < 0 || cnt[e] < cnt[best] || (cnt[e] == cnt[best] && ts[e] < ts[best])))
        best = e;
    if (best < 0) return;
    issue(RM_EVICT, pres[best], nxt[best], 1'b0, lat);
    checks++;
    if (rsp_hit !== 1'b1 || lat != 6) begin
      failures++; $display("evict of entry %0d: hit %b lat %0d", best, rsp_hit, lat);
    end
    v[best] = 0; cnt[best] = 0; pres[best] = '0; nxt[best] = '0;
    if (lp_v && lp_row == best) lp_v = 0;
    n_ev++;
  endtask

  int s, nxt_s;
  initial begin
    req_valid = 0; req_op = RM_STEP; req_sdr = '0; req_sdr2 = '0; req_dec = 0; ts_raddr = '0;
    for (int e = 0; e < E; e++) begin v[e] = 0; pres[e] = '0; nxt[e] = '0; cnt[e] = 0; ts[e] = 0; end
    pend_v = 0; prev_v = 0; lp_v = 0; pend_row = 0; lp_row = 0; now = 0; prev = '0;
    for (int i = 0; i < K; i++) sym[i] = $urandom | 32'h1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // phase 1: first-order stream over 6 symbols, 1 in 5 steps a random successor
    s = 0;
    for (int t = 0; t < 150; t++) begin
      step(sym[s], (t % 9 == 4));
      nxt_s = ($urandom_range(0, 4) == 0) ? $urandom_range(0, 5) : (s + 1) % 6;
      s = nxt_s;
    end
    // phase 2: the whole alphabet at random fills the memory
    for (int t = 0; t < 120; t++) step(sym[$urandom_range(0, K-1)], 1'b0);
    checks++;
    if (!full) begin failures++; $display("memory never full"); end
    // phase 3: host evicts, stream continues
    for (int t = 0; t < 60; t++) begin
      if (t % 4 == 0) evict_one();
      step(sym[$urandom_range(0, K-1)], (t % 5 == 1));
    end
    // stream restart
    begin
      int lat;
      issue(RM_RESET, '0, '0, 1'b0, lat);
      prev_v = 0; pend_v = 0; lp_v = 0;
    end
    for (int t = 0; t < 20; t++) step(sym[t % 6], 1'b0);
    // time stamps
    for (int e = 0; e < E; e++) begin
      @(negedge clk) ts_raddr = 4'(e);
      @(negedge clk);
      if (v[e]) begin
        checks++;
        if (int'(ts_rdata) != ts[e]) begin failures++; $display("ts[%0d] %0d exp %0d", e, ts_rdata, ts[e]); end
      end
    end
    $display("hits %0d misses %0d new %0d reinforced %0d minmax %0d dropped %0d decrements %0d evictions %0d",
             n_hit, n_miss, n_new, n_reinf, n_mm, n_drop, n_dec, n_ev);
    checks += 8;
    if (n_hit == 0 || n_miss == 0 || n_new == 0 || n_reinf == 0 || n_mm == 0 ||
        n_drop == 0 || n_dec == 0 || n_ev == 0) begin
      failures++; $display("a mechanism never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
