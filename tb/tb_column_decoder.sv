// Testbench of column_decoder: each stage code and the pair code, with the
// enable high and low, against the expected stage enables.
module tb_column_decoder;
  import htm_pkg::*;
  logic en;
  stage_e code;
  logic [2:0] sel;
  logic [2:0] expv [4] = '{3'b001, 3'b010, 3'b100, 3'b101};
  int checks = 0, failures = 0;

  column_decoder dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int e = 0; e < 2; e++)
      for (int c = 0; c < 4; c++) begin
        en = e[0]; code = stage_e'(c);
        #1;
        checks++;
        if (sel !== (e ? expv[c] : 3'b000)) begin
          failures++;
          $display("en=%0d code=%0d sel=%b", e, c, sel);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
