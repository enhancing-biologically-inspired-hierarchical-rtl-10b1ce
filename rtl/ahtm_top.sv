// Accelerated HTM top: control unit for selective attention plus the
// hardware reflex memory.
//
// The encoder, spatial pooler (SP) and sequence memory (SM) of the HTM stay
// outside: every time step the host presents the SDR that the SP produced
// (in_sdr) and the prediction that the SM made from it (in_sm_pred). The
// top then
//   1. scores the RM and SM predictions of the previous step against in_sdr
//      in the control unit, which updates its anomaly-score windows, picks
//      the source for the next prediction and the training rule;
//   2. runs one reflex-memory step: lower the count of the last RM
//      prediction if the rule says so, learn the transition from the previous
//      SDR, predict from in_sdr;
//   3. returns the prediction of the next SDR: RM's unless the control unit
//      selected the SM or RM had no prediction, then the SM's.
// out_sm_train tells the host how to train the SM in this step
// (sm_train_e). Both memories see the same SDR; the SM runs outside.
// The host's replacement policy uses ev_* (evict one (R_i, R_i+1) entry) and
// the time stamp port; full reports that RM has no free entry.
// Handshake: in_valid/in_ready and ev_valid/ev_ready take a request when both
// are high (eviction first); out_valid pulses once per step, ev_done once per
// eviction. The first step after reset or in_restart has no previous
// predictions and skips scoring.
module ahtm_top
  import htm_pkg::*;
#(
  parameter int unsigned M    = 16,
  parameter int unsigned NSUB = 128,
  parameter int unsigned P    = 128,
  parameter int unsigned Q    = 8,
  parameter int unsigned WIN  = 4,
  parameter int unsigned FRAC = 8,
  parameter int unsigned TSW  = 16,
  localparam int unsigned W   = NSUB * Q,
  localparam int unsigned AW  = $clog2(M * P)
) (
  input  logic            clk,
  input  logic            rst_n,
  // one time step
  input  logic            in_valid,
  output logic            in_ready,
  input  logic            in_restart,
  input  logic [W-1:0]    in_sdr,
  input  logic [W-1:0]    in_sm_pred,
  input  logic            in_sm_valid,
  output logic            out_valid,
  output logic [W-1:0]    out_pred,
  output logic            out_pred_valid,
  output logic            out_use_sm,
  output logic            out_rm_hit,
  output logic            out_rm_correct,
  output logic            out_sm_correct,
  output sm_train_e       out_sm_train,
  output logic            out_rm_dec,
  output logic            out_rm_new,
  output logic            out_rm_minmax,
  output logic            out_rm_dropped,
  // host replacement interface
  input  logic            ev_valid,
  output logic            ev_ready,
  input  logic [W-1:0]    ev_ri,
  input  logic [W-1:0]    ev_ri1,
  output logic            ev_done,
  output logic            ev_found,
  output logic            full,
  input  logic [AW-1:0]   ts_raddr,
  output logic [TSW-1:0]  ts_rdata
);
  typedef enum logic [2:0] {T_IDLE, T_RESTART, T_CU, T_RM_REQ, T_RM_WAIT, T_EV_WAIT} tstate_e;
  tstate_e state;

  logic [W-1:0] sdr_q, sm_new_q, sm_prev_q, rm_prev_q;
  logic         sm_new_v, sm_prev_v, rm_prev_v, have_prev;

  // ------------------------------------------------------- control unit
  logic      cu_step, cu_done, cu_use_sm, cu_rm_dec, cu_rm_ok, cu_sm_ok;
  sm_train_e cu_train;
  logic [FRAC+1+$clog2(WIN+1)-1:0] rm_sum_unused, sm_sum_unused;

  assign cu_step = (state == T_CU);

  control_unit #(.W(W), .WIN(WIN), .FRAC(FRAC)) u_cu (
    .clk        (clk),
    .rst_n      (rst_n),
    .step       (cu_step),
    .actual     (sdr_q),
    .rm_pred    (rm_prev_q),
    .rm_valid   (rm_prev_v),
    .sm_pred    (sm_prev_q),
    .sm_valid   (sm_prev_v),
    .done       (cu_done),
    .use_sm     (cu_use_sm),
    .rm_dec     (cu_rm_dec),
    .sm_train   (cu_train),
    .rm_correct (cu_rm_ok),
    .sm_correct (cu_sm_ok),
    .rm_sum     (rm_sum_unused),
    .sm_sum     (sm_sum_unused)
  );

  // ------------------------------------------------------- reflex memory
  logic         rm_req_valid, rm_req_ready, rm_rsp_valid, rm_rsp_hit;
  rm_op_e       rm_op;
  logic [W-1:0] rm_sdr, rm_sdr2, rm_pred;
  logic         rm_dec_req;
  logic [AW-1:0] rm_row_unused;
  logic         rm_new, rm_reinf_unused, rm_mm, rm_drop, rm_decd_unused;

  always_comb begin
    rm_req_valid = 1'b0;
    rm_op        = RM_STEP;
    rm_sdr       = sdr_q;
    rm_sdr2      = ev_ri1;
    rm_dec_req   = have_prev && cu_rm_dec;
    if (state == T_RM_REQ) begin
      rm_req_valid = 1'b1;
    end else if (state == T_RESTART) begin
      rm_req_valid = 1'b1;
      rm_op        = RM_RESET;
    end else if (state == T_IDLE && ev_valid) begin
      rm_req_valid = 1'b1;
      rm_op        = RM_EVICT;
      rm_sdr       = ev_ri;
    end
  end

  reflex_memory #(.M(M), .NSUB(NSUB), .P(P), .Q(Q), .TS_W(TSW)) u_rm (
    .clk            (clk),
    .rst_n          (rst_n),
    .req_valid      (rm_req_valid),
    .req_ready      (rm_req_ready),
    .req_op         (rm_op),
    .req_sdr        (rm_sdr),
    .req_sdr2       (rm_sdr2),
    .req_dec        (rm_dec_req),
    .rsp_valid      (rm_rsp_valid),
    .rsp_hit        (rm_rsp_hit),
    .rsp_pred       (rm_pred),
    .rsp_row        (rm_row_unused),
    .rsp_new        (rm_new),
    .rsp_reinforced (rm_reinf_unused),
    .rsp_minmax     (rm_mm),
    .rsp_dropped    (rm_drop),
    .rsp_decd       (rm_decd_unused),
    .full           (full),
    .ts_raddr       (ts_raddr),
    .ts_rdata       (ts_rdata)
  );

  assign ev_ready = (state == T_IDLE) && rm_req_ready;
  assign in_ready = (state == T_IDLE) && rm_req_ready && !ev_valid;

  // ------------------------------------------------------- sequencing
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= T_IDLE;
      sdr_q          <= '0;
      sm_new_q       <= '0;
      sm_new_v       <= 1'b0;
      sm_prev_q      <= '0;
      sm_prev_v      <= 1'b0;
      rm_prev_q      <= '0;
      rm_prev_v      <= 1'b0;
      have_prev      <= 1'b0;
      out_valid      <= 1'b0;
      out_pred       <= '0;
      out_pred_valid <= 1'b0;
      out_use_sm     <= 1'b0;
      out_rm_hit     <= 1'b0;
      out_rm_correct <= 1'b0;
      out_sm_correct <= 1'b0;
      out_sm_train   <= SM_UPDATE;
      out_rm_dec     <= 1'b0;
      out_rm_new     <= 1'b0;
      out_rm_minmax  <= 1'b0;
      out_rm_dropped <= 1'b0;
      ev_done        <= 1'b0;
      ev_found       <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      ev_done   <= 1'b0;
      unique case (state)
        T_IDLE: begin
          if (ev_valid && rm_req_ready) begin
            state <= T_EV_WAIT;
          end else if (in_valid && rm_req_ready) begin
            sdr_q    <= in_sdr;
            sm_new_q <= in_sm_pred;
            sm_new_v <= in_sm_valid;
            if (in_restart) begin
              have_prev <= 1'b0;
              state     <= T_RESTART;
            end else begin
              state <= have_prev ? T_CU : T_RM_REQ;
            end
          end
        end
        T_RESTART: state <= T_RM_REQ;
        T_CU:      state <= T_RM_REQ;    // scores registered in the CU
        T_RM_REQ:  if (rm_req_ready) state <= T_RM_WAIT;
        T_RM_WAIT: if (rm_rsp_valid) begin
          rm_prev_q <= rm_pred;
          rm_prev_v <= rm_rsp_hit;
          sm_prev_q <= sm_new_q;
          sm_prev_v <= sm_new_v;
          have_prev <= 1'b1;
          out_valid      <= 1'b1;
          out_rm_hit     <= rm_rsp_hit;
          out_use_sm     <= have_prev && cu_use_sm;
          out_rm_correct <= have_prev && cu_rm_ok;
          out_sm_correct <= have_prev && cu_sm_ok;
          out_sm_train   <= have_prev ? cu_train : SM_UPDATE;
          out_rm_dec     <= rm_dec_req;
          out_rm_new     <= rm_new;
          out_rm_minmax  <= rm_mm;
          out_rm_dropped <= rm_drop;
          if (rm_rsp_hit && !(have_prev && cu_use_sm)) begin
            out_pred       <= rm_pred;
            out_pred_valid <= 1'b1;
          end else begin
            out_pred       <= sm_new_q;
            out_pred_valid <= sm_new_v;
          end
          state <= T_IDLE;
        end
        T_EV_WAIT: if (rm_rsp_valid) begin
          ev_done  <= 1'b1;
          ev_found <= rm_rsp_hit;
          state    <= T_IDLE;
        end
        default: state <= T_IDLE;
      endcase
    end
  end

  logic cu_done_unused;
  assign cu_done_unused = cu_done;
endmodule
