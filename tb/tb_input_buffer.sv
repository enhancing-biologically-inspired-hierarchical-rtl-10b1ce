// Testbench of input_buffer (1024 bits, Q = 8): random words in every drive
// mode, with and without the single-column restriction, against the expected
// search-line care/value and write data.
module tb_input_buffer;
  import htm_pkg::*;
  localparam int W = 1024, Q = 8;
  logic [W-1:0] din, sl_care, sl_val, wr_data, exp_care;
  ib_mode_e mode;
  logic col_en;
  logic [2:0] col;
  int checks = 0, failures = 0;

  input_buffer #(.W(W), .Q(Q)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 200; t++) begin
      for (int i = 0; i < W / 32; i++) din[i*32 +: 32] = $urandom;
      mode = ib_mode_e'(t % 4);
      col_en = $urandom_range(0, 1);
      col = 3'($urandom);
      #1;
      for (int i = 0; i < W; i++) begin
        logic in_col;
        in_col = !col_en || (i % Q == int'(col));
        case (mode)
          IB_PRESRC: exp_care[i] = !din[i] && in_col;
          IB_SEARCH: exp_care[i] = din[i] && in_col;
          default:   exp_care[i] = 1'b0;
        endcase
      end
      checks++;
      if (sl_care !== exp_care || (mode != IB_IDLE && mode != IB_WRITE && sl_val !== din)
          || (mode == IB_WRITE && wr_data !== din)) begin
        failures++;
        $display("mode %0d col_en %0d col %0d mismatch", mode, col_en, col);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
