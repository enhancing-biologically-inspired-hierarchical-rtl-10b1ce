// Priority encoder: the index of the lowest set bit of req.
//
// Used to turn a match or candidate vector into the single row address that
// the row decoder then activates, and to pick a free entry. Combinational;
// valid is low and addr is 0 when no bit is set.
module priority_encoder #(
  parameter int unsigned N = 128
) (
  input  logic [N-1:0]               req,
  output logic                       valid,
  output logic [$clog2(N > 1 ? N : 2)-1:0] addr
);
  always_comb begin
    valid = 1'b0;
    addr  = '0;
    for (int i = N - 1; i >= 0; i--) begin
      if (req[i]) begin
        valid = 1'b1;
        addr  = i[$bits(addr)-1:0];
      end
    end
  end
endmodule
