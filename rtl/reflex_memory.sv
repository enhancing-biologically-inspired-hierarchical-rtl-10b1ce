// Hardware reflex memory (RM): CAM unit plus its control block.
//
// The reflex memory learns first-order transitions between consecutive SDRs
// and predicts, for the present SDR, the successor seen most often after it.
// Every entry is a triple stored across the three CAM stages at one address:
// present state R_i, next state R_i+1 and a Q-bit recurrence count. The
// control block turns each request into a sequence of CAM primitives:
//
// RM_STEP (SDR x, dec)      one time step
//   1. dec: if the control unit found the last RM prediction wrong while the
//      SM was right, the count of the entry that made it is lowered by one.
//   2. learn (previous SDR p -> x): search (p, x) in the present and next
//      stages at once. Found: count + 1. Not found: if p was new in the last
//      step its entry already holds p as present state and now receives x as
//      next state; otherwise a free entry receives (p, x). New entries start
//      at count 1. With no free entry the transition is dropped and full is set.
//   3. predict from x: search x in the present stage. No match: x is written
//      as present state of a free entry, to be completed next step; no
//      prediction. One match: that entry. Several: a max search over their
//      counts, MSB first, leaves the most frequent (lowest address on a tie).
//      The next state of the chosen entry is read bit-serially (Q clocks)
//      through the SIPO block and returned.
// RM_EVICT (R_i, R_i+1)     update operation: the entry holding the pair is
//      found by a pair search, its present and next rows are written with 0
//      and its count is reset to 0; the entry becomes free.
// RM_RESET                  forget the previous SDR (a new stream starts).
//
// Counts are read with the same bit-serial pre-search as predictions and
// written back saturated at 0 and 2^Q-1. Each entry has a valid bit so that
// cleared (all-zero) rows never match, and a time stamp of its last use that
// the host reads through ts_raddr/ts_rdata to choose entries to evict.
// Choosing victims is left to the host; the hardware never evicts by itself.
//
// Handshake: a request is taken when req_valid and req_ready are both high;
// rsp_valid is a one-clock pulse with the result. Latency of a step: about
// 3 clocks per search, Q + 2 per count or SDR read, 1 per write, 2 per bit of
// a max search that is needed.
module reflex_memory
  import htm_pkg::*;
#(
  parameter int unsigned M    = 16,
  parameter int unsigned NSUB = 128,
  parameter int unsigned P    = 128,
  parameter int unsigned Q    = 8,
  parameter int unsigned TS_W = 16,
  localparam int unsigned W   = NSUB * Q,
  localparam int unsigned ENT = M * P,
  localparam int unsigned AW  = $clog2(ENT),
  localparam int unsigned CW  = $clog2(Q)
) (
  input  logic            clk,
  input  logic            rst_n,
  // requests
  input  logic            req_valid,
  output logic            req_ready,
  input  rm_op_e          req_op,
  input  logic [W-1:0]    req_sdr,
  input  logic [W-1:0]    req_sdr2,
  input  logic            req_dec,
  // response
  output logic            rsp_valid,
  output logic            rsp_hit,
  output logic [W-1:0]    rsp_pred,
  output logic [AW-1:0]   rsp_row,
  output logic            rsp_new,
  output logic            rsp_reinforced,
  output logic            rsp_minmax,
  output logic            rsp_dropped,
  output logic            rsp_decd,
  // status and host scan port
  output logic            full,
  input  logic [AW-1:0]   ts_raddr,
  output logic [TS_W-1:0] ts_rdata
);
  typedef enum logic [4:0] {
    S_IDLE, S_DEC_CLR, S_DEC_RD, S_DEC_WAIT, S_DEC_WR,
    S_L_PRE, S_L_SRCH, S_L_EVAL, S_L_CLR, S_L_RD, S_L_WAIT, S_L_INC,
    S_L_WNEXT, S_L_WPAIR, S_L_WCONF1,
    S_P_PRE, S_P_SRCH, S_P_EVAL, S_P_WPRES,
    S_MM_LOAD, S_MM_STEP, S_MM_APPLY, S_MM_END,
    S_R_CLR, S_R_RD, S_R_WAIT,
    S_E_PRE, S_E_SRCH, S_E_EVAL, S_E_WPAIR, S_E_WCONF,
    S_DONE
  } state_e;

  state_e state;

  logic [W-1:0]   cur_q, sdr2_q, prev_q;
  rm_op_e         op_q;
  logic           prev_valid;
  logic [ENT-1:0] valid_q;
  logic           pend_valid, lp_valid;
  logic [AW-1:0]  pend_row, lp_row, row_q;
  logic [CW-1:0]  col_q;
  logic           mm_first;
  logic [TS_W-1:0] now_q;
  logic           f_hit, f_new, f_reinf, f_mm, f_drop, f_dec;

  // ------------------------------------------------------------- CAM unit
  cam_op_e        cam_op;
  stage_e         cam_stage;
  logic [AW-1:0]  cam_addr;
  logic [W-1:0]   cam_a, cam_b;
  logic [ENT-1:0] pres_match, next_match, mm_cand;
  logic           mm_glob_hit_unused;
  logic [W-1:0]   pred;
  logic [Q-1:0]   conf_rd;

  cam_unit #(.M(M), .NSUB(NSUB), .P(P), .Q(Q)) u_cam (
    .clk         (clk),
    .rst_n       (rst_n),
    .op          (cam_op),
    .stage       (cam_stage),
    .addr        (cam_addr),
    .data_a      (cam_a),
    .data_b      (cam_b),
    .col         (col_q),
    .mm_max      (1'b1),
    .mm_init     (pres_match & valid_q),
    .pres_match  (pres_match),
    .next_match  (next_match),
    .mm_cand     (mm_cand),
    .mm_glob_hit (mm_glob_hit_unused),
    .pred        (pred),
    .conf_rd     (conf_rd)
  );

  // ------------------------------------------------------ match evaluation
  logic [ENT-1:0] pair_hit, pres_hit, free_vec, pend_mask;
  logic           pair_any, pres_any, free_any, mm_any;
  logic [AW-1:0]  pair_row, pres_row, free_row, mm_row;
  logic           pres_multi, mm_single;

  always_comb begin
    pend_mask = '0;
    if (pend_valid) pend_mask[pend_row] = 1'b1;
  end

  assign pair_hit = pres_match & next_match & valid_q;
  assign pres_hit = pres_match & valid_q;
  assign free_vec = ~valid_q & ~pend_mask;
  assign pres_multi = (pres_hit & (pres_hit - 1'b1)) != '0;
  assign mm_single  = (mm_cand & (mm_cand - 1'b1)) == '0;

  priority_encoder #(.N(ENT)) u_pe_pair (.req (pair_hit), .valid (pair_any), .addr (pair_row));
  priority_encoder #(.N(ENT)) u_pe_pres (.req (pres_hit), .valid (pres_any), .addr (pres_row));
  priority_encoder #(.N(ENT)) u_pe_free (.req (free_vec), .valid (free_any), .addr (free_row));
  priority_encoder #(.N(ENT)) u_pe_mm   (.req (mm_cand),  .valid (mm_any),   .addr (mm_row));

  assign full = !free_any;

  // Saturating count arithmetic.
  logic [Q-1:0] conf_inc, conf_dec;
  assign conf_inc = (conf_rd == '1) ? conf_rd : conf_rd + 1'b1;
  assign conf_dec = (conf_rd == '0) ? conf_rd : conf_rd - 1'b1;

  // ------------------------------------------------------ time stamps
  logic ts_we;
  assign ts_we = (state == S_L_INC) || (state == S_L_WCONF1) ||
                 (state == S_P_WPRES) || (state == S_R_CLR);

  timestamp_mem #(.ENTRIES(ENT), .TS_W(TS_W)) u_ts (
    .clk   (clk),
    .rst_n (rst_n),
    .we    (ts_we),
    .waddr (row_q),
    .wdata (now_q),
    .raddr (ts_raddr),
    .rdata (ts_rdata)
  );

  // ------------------------------------------------------ CAM command drive
  always_comb begin
    cam_op    = CAM_NOP;
    cam_stage = STG_PRESENT;
    cam_addr  = row_q;
    cam_a     = cur_q;
    cam_b     = cur_q;
    unique case (state)
      S_DEC_CLR, S_L_CLR, S_R_CLR: cam_op = CAM_RD_CLR;
      S_DEC_RD, S_L_RD: begin cam_op = CAM_RD_BIT; cam_stage = STG_CONF; end
      S_DEC_WR: begin
        cam_op = CAM_WRITE; cam_stage = STG_CONF;
        cam_a  = W'(conf_dec);
      end
      S_L_PRE, S_L_SRCH: begin
        cam_op    = (state == S_L_PRE) ? CAM_PRESRCH : CAM_SEARCH;
        cam_stage = STG_PAIR;
        cam_a     = prev_q;
        cam_b     = cur_q;
      end
      S_L_INC: begin
        cam_op = CAM_WRITE; cam_stage = STG_CONF;
        cam_a  = W'(conf_inc);
      end
      S_L_WNEXT: begin cam_op = CAM_WRITE; cam_stage = STG_NEXT; cam_a = cur_q; end
      S_L_WPAIR: begin
        cam_op = CAM_WRITE; cam_stage = STG_PAIR;
        cam_a  = prev_q; cam_b = cur_q;
      end
      S_L_WCONF1: begin cam_op = CAM_WRITE; cam_stage = STG_CONF; cam_a = W'(1); end
      S_P_PRE:   cam_op = CAM_PRESRCH;
      S_P_SRCH:  cam_op = CAM_SEARCH;
      S_P_WPRES: cam_op = CAM_WRITE;
      S_MM_LOAD: cam_op = CAM_MM_LOAD;
      S_MM_STEP: cam_op = (!mm_first && mm_single) ? CAM_NOP : CAM_MM_STEP;
      S_MM_APPLY: cam_op = CAM_MM_APPLY;
      S_R_RD: begin cam_op = CAM_RD_BIT; cam_stage = STG_NEXT; end
      S_E_PRE, S_E_SRCH: begin
        cam_op    = (state == S_E_PRE) ? CAM_PRESRCH : CAM_SEARCH;
        cam_stage = STG_PAIR;
        cam_a     = cur_q;
        cam_b     = sdr2_q;
      end
      S_E_WPAIR: begin cam_op = CAM_WRITE; cam_stage = STG_PAIR; cam_a = '0; cam_b = '0; end
      S_E_WCONF: begin cam_op = CAM_WRITE; cam_stage = STG_CONF; cam_a = '0; end
      default: ;
    endcase
  end

  assign req_ready = (state == S_IDLE);

  // ------------------------------------------------------------- sequencing
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      cur_q      <= '0;
      sdr2_q     <= '0;
      prev_q     <= '0;
      op_q       <= RM_STEP;
      prev_valid <= 1'b0;
      valid_q    <= '0;
      pend_valid <= 1'b0;
      pend_row   <= '0;
      lp_valid   <= 1'b0;
      lp_row     <= '0;
      row_q      <= '0;
      col_q      <= '0;
      mm_first   <= 1'b0;
      now_q      <= '0;
      {f_hit, f_new, f_reinf, f_mm, f_drop, f_dec} <= '0;
      rsp_valid  <= 1'b0;
      rsp_hit    <= 1'b0;
      rsp_row    <= '0;
      {rsp_new, rsp_reinforced, rsp_minmax, rsp_dropped, rsp_decd} <= '0;
    end else begin
      rsp_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (req_valid) begin
          cur_q  <= req_sdr;
          sdr2_q <= req_sdr2;
          op_q   <= req_op;
          {f_hit, f_new, f_reinf, f_mm, f_drop, f_dec} <= '0;
          unique case (req_op)
            RM_STEP: begin
              if (req_dec && lp_valid) begin
                row_q <= lp_row;
                state <= S_DEC_CLR;
              end else begin
                state <= prev_valid ? S_L_PRE : S_P_PRE;
              end
            end
            RM_EVICT: state <= S_E_PRE;
            default: begin
              prev_valid <= 1'b0;
              pend_valid <= 1'b0;
              lp_valid   <= 1'b0;
              state      <= S_DONE;
            end
          endcase
        end

        // -------- count decrement of the last (wrong) prediction
        S_DEC_CLR: begin col_q <= CW'(Q - 1); state <= S_DEC_RD; end
        S_DEC_RD: begin
          if (col_q == '0) state <= S_DEC_WAIT;
          else col_q <= col_q - 1'b1;
        end
        S_DEC_WAIT: state <= S_DEC_WR;
        S_DEC_WR: begin
          f_dec <= 1'b1;
          state <= prev_valid ? S_L_PRE : S_P_PRE;
        end

        // -------- learn the transition prev -> cur
        S_L_PRE:  state <= S_L_SRCH;
        S_L_SRCH: state <= S_L_EVAL;
        S_L_EVAL: begin
          if (pair_any) begin
            row_q <= pair_row;
            state <= S_L_CLR;
          end else if (pend_valid) begin
            row_q <= pend_row;
            state <= S_L_WNEXT;
          end else if (free_any) begin
            row_q <= free_row;
            state <= S_L_WPAIR;
          end else begin
            f_drop <= 1'b1;
            state  <= S_P_PRE;
          end
        end
        S_L_CLR: begin col_q <= CW'(Q - 1); state <= S_L_RD; end
        S_L_RD: begin
          if (col_q == '0) state <= S_L_WAIT;
          else col_q <= col_q - 1'b1;
        end
        S_L_WAIT: state <= S_L_INC;
        S_L_INC: begin
          f_reinf <= 1'b1;
          state   <= S_P_PRE;
        end
        S_L_WNEXT: begin
          pend_valid <= 1'b0;
          state      <= S_L_WCONF1;
        end
        S_L_WPAIR: state <= S_L_WCONF1;
        S_L_WCONF1: begin
          valid_q[row_q] <= 1'b1;
          f_new <= 1'b1;
          state <= S_P_PRE;
        end

        // -------- predict from cur
        S_P_PRE:  state <= S_P_SRCH;
        S_P_SRCH: state <= S_P_EVAL;
        S_P_EVAL: begin
          if (!pres_any) begin
            if (free_any) begin
              row_q <= free_row;
              state <= S_P_WPRES;
            end else begin
              f_drop <= 1'b1;
              state  <= S_DONE;
            end
          end else if (pres_multi) begin
            state <= S_MM_LOAD;
          end else begin
            row_q <= pres_row;
            state <= S_R_CLR;
          end
        end
        S_P_WPRES: begin
          pend_valid <= 1'b1;
          pend_row   <= row_q;
          state      <= S_DONE;
        end
        S_MM_LOAD: begin
          col_q    <= CW'(Q - 1);
          mm_first <= 1'b1;
          f_mm     <= 1'b1;
          state    <= S_MM_STEP;
        end
        S_MM_STEP: begin
          mm_first <= 1'b0;
          if (!mm_first && mm_single) state <= S_MM_END;
          else                        state <= S_MM_APPLY;
        end
        S_MM_APPLY: begin
          if (col_q == '0) state <= S_MM_END;
          else begin
            col_q <= col_q - 1'b1;
            state <= S_MM_STEP;
          end
        end
        S_MM_END: begin
          row_q <= mm_row;
          state <= S_R_CLR;
        end
        S_R_CLR: begin
          col_q    <= CW'(Q - 1);
          lp_valid <= 1'b1;
          lp_row   <= row_q;
          state    <= S_R_RD;
        end
        S_R_RD: begin
          if (col_q == '0) state <= S_R_WAIT;
          else col_q <= col_q - 1'b1;
        end
        S_R_WAIT: begin
          f_hit <= 1'b1;
          state <= S_DONE;
        end

        // -------- update (evict) operation
        S_E_PRE:  state <= S_E_SRCH;
        S_E_SRCH: state <= S_E_EVAL;
        S_E_EVAL: begin
          if (pair_any) begin
            row_q <= pair_row;
            state <= S_E_WPAIR;
          end else begin
            state <= S_DONE;
          end
        end
        S_E_WPAIR: state <= S_E_WCONF;
        S_E_WCONF: begin
          valid_q[row_q] <= 1'b0;
          if (lp_row == row_q) lp_valid <= 1'b0;
          f_hit <= 1'b1;
          state <= S_DONE;
        end

        S_DONE: begin
          if (op_q == RM_STEP) begin
            prev_q     <= cur_q;
            prev_valid <= 1'b1;
            now_q      <= now_q + 1'b1;
            if (!f_hit) lp_valid <= 1'b0;
          end
          rsp_valid      <= 1'b1;
          rsp_hit        <= f_hit;
          rsp_row        <= row_q;
          rsp_new        <= f_new;
          rsp_reinforced <= f_reinf;
          rsp_minmax     <= f_mm;
          rsp_dropped    <= f_drop;
          rsp_decd       <= f_dec;
          state          <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign rsp_pred = pred;

  // A request may only be presented with a defined operation.
  assert property (@(posedge clk) disable iff (!rst_n)
    req_valid && req_ready |-> req_op inside {RM_STEP, RM_EVICT, RM_RESET});
endmodule
