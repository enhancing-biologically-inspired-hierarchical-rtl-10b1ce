// Time stamp memory of the reflex memory: last access time of every entry.
//
// The controller writes the current step number into an entry whenever the
// entry is created, reinforced or used for a prediction. The host reads the
// memory through a separate port when it scans for stale, rarely used entries
// to replace. One write port, one read port with a registered output (the
// data of raddr appears one clock later). Width and wrap-around of the time
// value are this design's choice. Contents reset to 0.
module timestamp_mem #(
  parameter int unsigned ENTRIES = 2048,
  parameter int unsigned TS_W    = 16,
  localparam int unsigned AW     = $clog2(ENTRIES)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            we,
  input  logic [AW-1:0]   waddr,
  input  logic [TS_W-1:0] wdata,
  input  logic [AW-1:0]   raddr,
  output logic [TS_W-1:0] rdata
);
  logic [TS_W-1:0] mem [ENTRIES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) mem[i] <= '0;
      rdata <= '0;
    end else begin
      if (we) mem[waddr] <= wdata;
      rdata <= mem[raddr];
    end
  end
endmodule
