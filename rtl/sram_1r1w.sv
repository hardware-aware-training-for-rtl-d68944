// sram_1r1w: synchronous on-chip SRAM with one write port and one read port.
//
// Used for the four memories of the accelerator: trained weights, LMU memory
// coefficients, biases and the network state (features, u, m and h vectors).
// The paper names SRAM as one of the two dominant power consumers but gives no
// organisation, so a plain register-file style array is written here.
// Timing: a write (we) lands at the clock edge; a read (re) returns rdata on the
// cycle after the request and rdata holds its value while re is low. A read and a
// write of the same address in the same cycle return the old word. The contents
// are not reset, as in a real SRAM: software must load or clear what it reads.
module sram_1r1w #(
  parameter int unsigned DW    = 8,
  parameter int unsigned DEPTH = 16,
  parameter int unsigned AW    = (DEPTH <= 2) ? 1 : $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [DW-1:0] wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [DW-1:0] rdata
);

  logic [DW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && (32'(waddr) < DEPTH)) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= (32'(raddr) < DEPTH) ? mem[raddr] : '0;
  end

endmodule
