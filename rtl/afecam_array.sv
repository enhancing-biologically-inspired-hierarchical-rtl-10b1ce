// AFeCAM array: NSUB subarrays of P x Q side by side.
//
// Word p of the array is the concatenation of row p of every subarray;
// subarray k holds bits [k*Q +: Q]. All subarrays share the word lines and
// the phase controls; each gets its own Q-bit slice of the bit/search lines.
// The per-subarray match results (row matches where M = 0) are reduced by an
// AND tree to the array's match vector. For a bit-serial read, the Q'_A of
// the addressed row rd_row of every subarray is brought out (rd_bits), one
// bit per subarray, towards the SIPO register block.
// Timing: a write takes one clock; match is valid in the cycle after the
// search phase, rd_bits in the cycle after a pre-search.
module afecam_array #(
  parameter int unsigned NSUB = 128,
  parameter int unsigned P    = 128,
  parameter int unsigned Q    = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  wr_en,
  input  logic [P-1:0]          row_sel,
  input  logic [NSUB*Q-1:0]     wr_data,
  input  logic                  pre,
  input  logic                  ph,
  input  logic [NSUB*Q-1:0]     sl_care,
  input  logic [NSUB*Q-1:0]     sl_val,
  input  logic [P-1:0]          pre_en,
  input  logic [$clog2(P)-1:0]  rd_row,
  output logic [P-1:0]          match,
  output logic [NSUB-1:0]       rd_bits
);
  logic [NSUB-1:0][P-1:0] sub_match;

  for (genvar k = 0; k < NSUB; k++) begin : g_sub
    logic [P-1:0] qa_n, qb, m;
    afecam_subarray #(.P(P), .Q(Q)) u_sub (
      .clk     (clk),
      .rst_n   (rst_n),
      .wr_en   (wr_en),
      .wr_row  (row_sel),
      .wr_data (wr_data[k*Q +: Q]),
      .pre     (pre),
      .ph      (ph),
      .sl_care (sl_care[k*Q +: Q]),
      .sl_val  (sl_val[k*Q +: Q]),
      .pre_en  (pre_en),
      .qa_n    (qa_n),
      .qb      (qb),
      .m       (m)
    );
    assign sub_match[k] = ~m;
    assign rd_bits[k]   = qa_n[rd_row];
  end

  and_tree #(.N_IN(NSUB), .W(P)) u_and (
    .in_vec  (sub_match),
    .out_vec (match)
  );
endmodule
