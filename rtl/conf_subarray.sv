// Customized AFeCAM subarray of the confidence-level stage.
//
// Holds P recurrence counts of Q bits (row p of subarray m is the count of
// entry m*P + p) and adds what the iterative min/max search needs:
//  - a candidate register, the rows still precharged (row exclusion);
//  - the 'all 0/1 block', a wired NOR over the candidate matchlines, which
//    tells whether any candidate holds the searched bit (any_hit = its inverse);
//  - a priority encoder giving the address of the first remaining candidate.
// A max step searches '1' in one column in the search phase (rows storing
// '0' miss); a min step searches '0' in the pre-search phase. After the step,
// mm_apply keeps only the candidates that hit, unless no candidate of the
// whole stage hit (glob_hit low), in which case all stay and the next lower
// bit is tried. Iterating from the MSB to the LSB leaves the row(s) with the
// largest (smallest) count. glob_hit is the OR of the any_hit flags of every
// confidence subarray, so the search spans the whole stage.
// Counts are written and read like any subarray row (write, bit-serial read).
// Timing: load, step and apply each take one clock; any_hit is valid in the
// cycle after a step.
module conf_subarray #(
  parameter int unsigned P = 128,
  parameter int unsigned Q = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // write / read path shared with the other subarrays
  input  logic                  wr_en,
  input  logic [P-1:0]          wr_row,
  input  logic [Q-1:0]          wr_data,
  input  logic                  pre,
  input  logic                  ph,
  input  logic [Q-1:0]          sl_care,
  input  logic [Q-1:0]          sl_val,
  input  logic [$clog2(P)-1:0]  rd_row,
  output logic                  rd_bit,
  // min/max
  input  logic                  cand_load,
  input  logic [P-1:0]          cand_in,
  input  logic                  mm_active,
  input  logic                  mm_max,
  input  logic                  mm_apply,
  input  logic                  glob_hit,
  output logic                  any_hit,
  output logic [P-1:0]          cand,
  output logic                  addr_valid,
  output logic [$clog2(P)-1:0]  addr
);
  logic [P-1:0] qa_n, qb, m, hit;

  afecam_subarray #(.P(P), .Q(Q)) u_sub (
    .clk     (clk),
    .rst_n   (rst_n),
    .wr_en   (wr_en),
    .wr_row  (wr_row),
    .wr_data (wr_data),
    .pre     (pre),
    .ph      (ph),
    .sl_care (sl_care),
    .sl_val  (sl_val),
    .pre_en  (mm_active ? cand : '1),
    .qa_n    (qa_n),
    .qb      (qb),
    .m       (m)
  );

  // Rows that held the searched bit in the last min/max step.
  assign hit     = cand & (mm_max ? ~qb : ~qa_n);
  // All 0/1 block: low when no candidate matchline holds the searched value.
  assign any_hit = |hit;
  assign rd_bit  = qa_n[rd_row];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                    cand <= '0;
    else if (cand_load)            cand <= cand_in;
    else if (mm_apply && glob_hit) cand <= hit;
  end

  priority_encoder #(.N(P)) u_penc (
    .req   (cand),
    .valid (addr_valid),
    .addr  (addr)
  );
endmodule
