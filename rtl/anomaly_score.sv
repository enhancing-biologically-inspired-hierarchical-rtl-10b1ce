// Anomaly raw score of one prediction.
//
//   ARS = 1 - nz(pred AND actual) / nz(actual)
//
// computed in fixed point with FRAC fractional bits (ars = ARS * 2^FRAC,
// truncated), together with the correctness used by the control unit: a
// prediction is correct when at least half of the actual active bits are
// also in the prediction (overlap * 2 >= nz(actual)). A missing prediction
// (pred_valid low) scores ARS = 1 and is incorrect; an empty actual SDR
// scores 0. Purely combinational.
module anomaly_score #(
  parameter int unsigned W    = 1024,
  parameter int unsigned FRAC = 8,
  localparam int unsigned CW  = $clog2(W + 1)
) (
  input  logic [W-1:0]  pred,
  input  logic          pred_valid,
  input  logic [W-1:0]  actual,
  output logic [FRAC:0] ars,
  output logic          correct,
  output logic [CW-1:0] overlap,
  output logic [CW-1:0] active
);
  logic [W-1:0] inter;
  assign inter = pred & actual;

  always_comb begin
    overlap = '0;
    active  = '0;
    for (int i = 0; i < W; i++) begin
      overlap = overlap + CW'(inter[i]);
      active  = active + CW'(actual[i]);
    end
  end

  logic [CW+FRAC-1:0] num, quo;
  assign num = {active - overlap, {FRAC{1'b0}}};
  assign quo = (active == '0) ? '0 : num / (CW+FRAC)'(active);

  always_comb begin
    if (!pred_valid) begin
      ars     = (FRAC+1)'(1) << FRAC;
      correct = 1'b0;
    end else begin
      ars     = quo[FRAC:0];
      correct = ({1'b0, overlap} << 1) >= {1'b0, active};
    end
  end
endmodule
