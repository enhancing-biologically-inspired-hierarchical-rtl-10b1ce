// Q-bit serial-in, parallel-out shift register.
//
// During a prediction the Q'_A output of the addressed row is presented one
// column per clock; the register shifts it in at the LSB on every clock with
// shift set. Columns are read from Q-1 down to 0, so after Q shifts pout holds
// the stored row in its original bit order. clr empties the register; both
// act at the rising edge.
module sipo_register #(
  parameter int unsigned Q = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clr,
  input  logic         shift,
  input  logic         sin,
  output logic [Q-1:0] pout
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     pout <= '0;
    else if (clr)   pout <= '0;
    else if (shift) pout <= {pout[Q-2:0], sin};
  end
endmodule
