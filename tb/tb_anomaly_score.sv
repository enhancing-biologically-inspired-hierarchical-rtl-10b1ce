// Testbench of anomaly_score (1024 bits): random sparse SDRs with controlled
// overlap. The expected ARS = floor((nz(actual) - overlap) * 256 / nz(actual))
// and the 50 % correctness rule are computed independently in the testbench.
module tb_anomaly_score;
  localparam int W = 1024, F = 8;
  logic [W-1:0] pred, actual;
  logic pred_valid, correct;
  logic [F:0] ars;
  logic [10:0] overlap, active;
  int checks = 0, failures = 0;

  anomaly_score #(.W(W), .FRAC(F)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      int na, ov, ea;
      logic ec;
      actual = '0; pred = '0;
      na = $urandom_range(0, 40);
      for (int i = 0; i < na; i++) actual[$urandom_range(0, W-1)] = 1'b1;
      for (int i = 0; i < W; i++)
        if (actual[i] && $urandom_range(0, 99) < (t % 100)) pred[i] = 1'b1;
      for (int i = 0; i < 20; i++) pred[$urandom_range(0, W-1)] = 1'b1;
      pred_valid = (t % 17 != 5);
      #1;
      na = 0; ov = 0;
      for (int i = 0; i < W; i++) begin
        na += actual[i];
        ov += actual[i] & pred[i];
      end
      if (!pred_valid) begin ea = 256; ec = 0; end
      else begin
        ea = (na == 0) ? 0 : ((na - ov) * 256) / na;
        ec = (2 * ov >= na);
      end
      checks++;
      if (int'(ars) != ea || correct !== ec) begin
        failures++;
        $display("na=%0d ov=%0d valid=%b: ars=%0d exp %0d correct=%b exp %b",
                 na, ov, pred_valid, ars, ea, correct, ec);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
