// sram_1wnr: synchronous memory with one write port and NR read ports.
//
// Holds the network state (features, u, m, h and output scores). The MAC array
// takes C input columns per clock, so the controller reads C state words per
// clock and this memory has NR = C read ports (a multi-ported register file or
// NR copies of a single-read SRAM). The paper names SRAM but gives no
// organisation; the port count follows from this design's column parallelism.
// Timing: a write lands at the clock edge; on a clock with re high, every read
// port returns its word on the next cycle, and rdata holds while re is low. A
// read of an address written in the same cycle returns the old word. Contents
// are not reset.
module sram_1wnr #(
  parameter int unsigned DW    = 8,
  parameter int unsigned DEPTH = 16,
  parameter int unsigned NR    = 2,
  parameter int unsigned AW    = (DEPTH <= 2) ? 1 : $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [DW-1:0] wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr [NR],
  output logic [DW-1:0] rdata [NR]
);

  logic [DW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && (32'(waddr) < DEPTH)) mem[waddr] <= wdata;
  end

  for (genvar r = 0; r < NR; r++) begin : g_rd
    always_ff @(posedge clk) begin
      if (re) rdata[r] <= (32'(raddr[r]) < DEPTH) ? mem[raddr[r]] : '0;
    end
  end

endmodule
