// Column decoder of the CAM unit: selects the active stage(s).
//
// The three stages are the present state, the confidence level and the next
// state (sel bit 0, 1, 2). Codes STG_PRESENT, STG_CONF and STG_NEXT activate
// one stage. STG_PAIR activates the present and next state stages together,
// as needed to search or clear a (R_i, R_i+1) pair in one operation; this
// fourth code is this design's encoding. Combinational.
module column_decoder
  import htm_pkg::*;
(
  input  logic       en,
  input  stage_e     code,
  output logic [2:0] sel
);
  always_comb begin
    sel = 3'b000;
    if (en) begin
      unique case (code)
        STG_PRESENT: sel = 3'b001;
        STG_CONF:    sel = 3'b010;
        STG_NEXT:    sel = 3'b100;
        STG_PAIR:    sel = 3'b101;
        default:     sel = 3'b000;
      endcase
    end
  end
endmodule
