// Testbench of timestamp_mem (2048 entries): random writes tracked in a
// reference array, reads checked one clock after the address is given.
module tb_timestamp_mem;
  localparam int E = 2048, T = 16;
  logic clk = 0, rst_n = 0, we;
  logic [10:0] waddr, raddr;
  logic [T-1:0] wdata, rdata;
  logic [T-1:0] ref_m [E];
  int checks = 0, failures = 0;

  timestamp_mem #(.ENTRIES(E), .TS_W(T)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; waddr = '0; raddr = '0; wdata = '0;
    for (int i = 0; i < E; i++) ref_m[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      we = $urandom_range(0, 1);
      waddr = 11'($urandom);
      wdata = T'($urandom);
      raddr = (t % 3 == 0) ? waddr : 11'($urandom);
      @(posedge clk);
      #1;
      checks++;
      if (rdata !== ref_m[raddr]) begin
        failures++;
        $display("read %0d got %h exp %h", raddr, rdata, ref_m[raddr]);
      end
      if (we) ref_m[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
