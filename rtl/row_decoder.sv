// Row decoder of the CAM unit.
//
// Takes the log2(M)-bit array part of an entry address and activates exactly
// one of the M AFeCAM arrays (rows of the CAM unit) for a write or a read.
// Combinational; nothing is selected while en is low.
module row_decoder #(
  parameter int unsigned M = 16
) (
  input  logic                  en,
  input  logic [$clog2(M)-1:0]  addr,
  output logic [M-1:0]          sel
);
  always_comb begin
    sel = '0;
    for (int i = 0; i < M; i++)
      if (en && addr == i[$clog2(M)-1:0]) sel[i] = 1'b1;
  end
endmodule
