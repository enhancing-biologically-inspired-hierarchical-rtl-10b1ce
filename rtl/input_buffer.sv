// Input buffer and bit/search-line drive of one CAM stage.
//
// The word to be written or searched is turned into the per-column drive of
// the subarrays for the current operation:
//   IB_WRITE  - every bit line carries its bit (wr_data), nothing searched;
//   IB_PRESRC - pre-search phase: only the '0' bits of the word are searched;
//   IB_SEARCH - search phase: only the '1' bits are searched;
//   IB_IDLE   - no line driven.
// With col_en set, searching is further limited to column col of every Q-bit
// subarray slice. A pre-search of one column with word = 0 reads that column
// (Q'_A then equals the stored bit); a search of one column with word = all
// ones finds the rows holding '1' there, which is a max step of the min/max
// operation. Combinational: the control block holds the word stable.
module input_buffer
  import htm_pkg::*;
#(
  parameter int unsigned W = 1024,
  parameter int unsigned Q = 8
) (
  input  logic [W-1:0]          din,
  input  ib_mode_e              mode,
  input  logic                  col_en,
  input  logic [$clog2(Q)-1:0]  col,
  output logic [W-1:0]          sl_care,
  output logic [W-1:0]          sl_val,
  output logic [W-1:0]          wr_data
);
  logic [W-1:0] col_mask;

  always_comb begin
    for (int i = 0; i < W; i++)
      col_mask[i] = !col_en || ((i % Q) == int'(col));
  end

  always_comb begin
    wr_data = din;
    sl_val  = din;
    unique case (mode)
      IB_PRESRC: sl_care = ~din & col_mask;
      IB_SEARCH: sl_care =  din & col_mask;
      default:   sl_care = '0;
    endcase
  end
endmodule
