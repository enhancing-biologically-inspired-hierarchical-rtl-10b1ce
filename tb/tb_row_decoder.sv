// Testbench of row_decoder (M = 16): every address with enable high must give
// exactly that one-hot select; with enable low nothing is selected.
module tb_row_decoder;
  localparam int M = 16;
  logic en;
  logic [$clog2(M)-1:0] addr;
  logic [M-1:0] sel;
  int checks = 0, failures = 0;

  row_decoder #(.M(M)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int e = 0; e < 2; e++)
      for (int a = 0; a < M; a++) begin
        en = e[0]; addr = a[$clog2(M)-1:0];
        #1;
        checks++;
        if (sel !== (e ? (M'(1) << a) : '0)) begin
          failures++;
          $display("en=%0d addr=%0d sel=%h", e, a, sel);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
