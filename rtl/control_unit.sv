// Control unit for selective attention between reflex and sequence memory.
//
// When a new SDR arrives (step), the predictions that the reflex memory (RM)
// and the sequence memory (SM) made for it in the previous step are scored
// (anomaly_score). The last WIN scores of each are kept in shift windows.
// RM is the default source of the next prediction; the SM is chosen when the
// sum of RM's last WIN scores is higher than the SM's (a tie keeps RM).
// The correctness of the two predictions selects one of four training rules:
//   RM wrong, SM wrong  -> rm_dec 0, sm_train SM_UPDATE  (both update)
//   RM wrong, SM right  -> rm_dec 1, sm_train SM_NONE    (RM count lowered)
//   RM right, SM wrong  -> rm_dec 0, sm_train SM_REGULAR (regular SM update)
//   RM right, SM right  -> rm_dec 0, sm_train SM_HIGH    (higher-confidence update)
// Interface: step is a one-clock strobe with actual and both predictions
// valid; all outputs are registered and valid from the next clock (done).
// The windows reset to zero scores.
module control_unit
  import htm_pkg::*;
#(
  parameter int unsigned W    = 1024,
  parameter int unsigned WIN  = 4,
  parameter int unsigned FRAC = 8,
  localparam int unsigned SW  = FRAC + 1 + $clog2(WIN + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          step,
  input  logic [W-1:0]  actual,
  input  logic [W-1:0]  rm_pred,
  input  logic          rm_valid,
  input  logic [W-1:0]  sm_pred,
  input  logic          sm_valid,
  output logic          done,
  output logic          use_sm,
  output logic          rm_dec,
  output sm_train_e     sm_train,
  output logic          rm_correct,
  output logic          sm_correct,
  output logic [SW-1:0] rm_sum,
  output logic [SW-1:0] sm_sum
);
  localparam int unsigned CW = $clog2(W + 1);

  logic [FRAC:0] rm_ars, sm_ars;
  logic          rm_ok, sm_ok;
  logic [CW-1:0] rm_ov_unused, rm_act_unused, sm_ov_unused, sm_act_unused;

  anomaly_score #(.W(W), .FRAC(FRAC)) u_rm_score (
    .pred (rm_pred), .pred_valid (rm_valid), .actual (actual),
    .ars (rm_ars), .correct (rm_ok), .overlap (rm_ov_unused), .active (rm_act_unused)
  );
  anomaly_score #(.W(W), .FRAC(FRAC)) u_sm_score (
    .pred (sm_pred), .pred_valid (sm_valid), .actual (actual),
    .ars (sm_ars), .correct (sm_ok), .overlap (sm_ov_unused), .active (sm_act_unused)
  );

  logic [WIN-1:0][FRAC:0] rm_win, sm_win;
  logic [SW-1:0]          rm_sum_n, sm_sum_n;

  // Sums over the window including the score of this step.
  always_comb begin
    rm_sum_n = SW'(rm_ars);
    sm_sum_n = SW'(sm_ars);
    for (int i = 0; i < WIN - 1; i++) begin
      rm_sum_n = rm_sum_n + SW'(rm_win[i]);
      sm_sum_n = sm_sum_n + SW'(sm_win[i]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rm_win     <= '0;
      sm_win     <= '0;
      done       <= 1'b0;
      use_sm     <= 1'b0;
      rm_dec     <= 1'b0;
      sm_train   <= SM_UPDATE;
      rm_correct <= 1'b0;
      sm_correct <= 1'b0;
      rm_sum     <= '0;
      sm_sum     <= '0;
    end else begin
      done <= step;
      if (step) begin
        for (int i = WIN - 1; i > 0; i--) begin
          rm_win[i] <= rm_win[i-1];
          sm_win[i] <= sm_win[i-1];
        end
        rm_win[0]  <= rm_ars;
        sm_win[0]  <= sm_ars;
        rm_sum     <= rm_sum_n;
        sm_sum     <= sm_sum_n;
        use_sm     <= rm_sum_n > sm_sum_n;
        rm_correct <= rm_ok;
        sm_correct <= sm_ok;
        rm_dec     <= !rm_ok && sm_ok;
        unique case ({rm_ok, sm_ok})
          2'b00: sm_train <= SM_UPDATE;
          2'b01: sm_train <= SM_NONE;
          2'b10: sm_train <= SM_REGULAR;
          default: sm_train <= SM_HIGH;
        endcase
      end
    end
  end
endmodule
