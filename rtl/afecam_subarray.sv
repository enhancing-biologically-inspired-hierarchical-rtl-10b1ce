// AFeCAM subarray: P words of Q bits, one FeFET cell per bit.
//
// Write: the sourceline of the selected row is grounded and every bit line
// carries +Vw ('1') or -Vw ('0'); here wr_en with a one-hot wr_row stores
// wr_data in that row in one clock.
// Search: matchlines are precharged and evaluated in two phases. In the
// pre-search phase (ph = 0) a cell mismatches when it stores '1' and '0' is
// searched; in the search phase (ph = 1) when it stores '0' and '1' is
// searched. Only columns with sl_care set are searched (the input buffer
// drives the '0' bits in the first phase and the '1' bits in the second).
// A row whose pre_en is low is not precharged and reads as a mismatch; the
// confidence stage uses this for row exclusion in min/max.
// Each pre pulse evaluates one phase; the per-row output register latches the
// result at the clock edge (FF A for ph = 0, FF B for ph = 1), so qa_n, qb and
// m are valid in the cycle after the phase.
//
// The FeFET cells, sense amplifiers and voltage drivers are analog in the
// silicon; only their logic function is modelled. The reference row is the
// sense threshold and stores nothing. A physical subarray spends one of its
// rows on it; here all P rows store words, so that 16 arrays of 128 rows give
// the 2048 entries of the reflex memory. Cells reset to '0'.
module afecam_subarray #(
  parameter int unsigned P = 128,
  parameter int unsigned Q = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         wr_en,
  input  logic [P-1:0] wr_row,
  input  logic [Q-1:0] wr_data,
  input  logic         pre,
  input  logic         ph,
  input  logic [Q-1:0] sl_care,
  input  logic [Q-1:0] sl_val,
  input  logic [P-1:0] pre_en,
  output logic [P-1:0] qa_n,
  output logic [P-1:0] qb,
  output logic [P-1:0] m
);
  logic [Q-1:0] cells [P];
  logic [P-1:0] sa_out;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < P; r++) cells[r] <= '0;
    end else if (wr_en) begin
      for (int r = 0; r < P; r++)
        if (wr_row[r]) cells[r] <= wr_data;
    end
  end

  // Matchline evaluation and sense decision for the current phase.
  always_comb begin
    for (int r = 0; r < P; r++) begin
      if (!pre_en[r])
        sa_out[r] = 1'b0;
      else if (!ph)
        sa_out[r] = ~|(sl_care & ~sl_val & cells[r]);
      else
        sa_out[r] = ~|(sl_care & sl_val & ~cells[r]);
    end
  end

  output_register #(.ROWS(P)) u_outreg (
    .clk      (clk),
    .rst_n    (rst_n),
    .clk_a_en (pre & ~ph),
    .clk_b_en (pre & ph),
    .sa_out   (sa_out),
    .qa_n     (qa_n),
    .qb       (qb),
    .m        (m)
  );
endmodule
