// Output register of an AFeCAM subarray, one per matchline.
//
// Each matchline ends in a sense amplifier whose decision is stored in two
// flip-flops: FF A captures it in the pre-search phase, FF B in the search
// phase. A two-input OR of Q'_A and Q_B forms the match node M. This module
// holds ROWS such registers side by side (one subarray).
//
// Polarity (this design's choice): sa_out = 1 when the matchline stayed
// precharged, i.e. no cell mismatched in that phase. FF A stores sa_out, so
// Q'_A = 1 flags a pre-search mismatch; FF B stores the inverted decision, so
// Q_B = 1 flags a search-phase mismatch. M = Q'_A | Q_B is therefore 1 on a
// miss and 0 on an exact match. During a bit-serial read the pre-search of
// one column searched with '0' makes Q'_A equal to the stored bit, which is
// what the SIPO register takes in.
//
// Timing: clk_a_en / clk_b_en stand for the separate clocks clk_A and clk_B;
// the value captured at a rising edge is visible from the next cycle on.
// Reset clears both flip-flops.
module output_register #(
  parameter int unsigned ROWS = 128
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            clk_a_en,
  input  logic            clk_b_en,
  input  logic [ROWS-1:0] sa_out,
  output logic [ROWS-1:0] qa_n,
  output logic [ROWS-1:0] qb,
  output logic [ROWS-1:0] m
);
  logic [ROWS-1:0] ff_a, ff_b;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ff_a <= '0;
      ff_b <= '0;
    end else begin
      if (clk_a_en) ff_a <= sa_out;
      if (clk_b_en) ff_b <= ~sa_out;
    end
  end

  assign qa_n = ~ff_a;
  assign qb   = ff_b;
  assign m    = qa_n | qb;
endmodule
