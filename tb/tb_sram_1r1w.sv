// tb_sram_1r1w: self-checking test of the synchronous 1R1W memory.
// Writes random words to random addresses, keeps a shadow copy, and checks
// that every read returns the shadow word one clock after the request, that
// rdata holds while re is low, and that a same-address read/write returns the
// old word.
module tb_sram_1r1w;
  localparam int DW = 12, DEPTH = 40, AW = 6;
  logic clk = 1'b0, we = 1'b0, re = 1'b0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [DW-1:0] wdata = '0, rdata;
  logic [DW-1:0] shadow [DEPTH];
  int checks = 0, failures = 0;

  sram_1r1w #(.DW(DW), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input logic [DW-1:0] exp, input string what);
    checks++;
    if (rdata !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, rdata, exp);
    end
  endtask

  initial begin
    // fill
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1'b1; waddr = AW'(a); wdata = DW'($urandom); shadow[a] = wdata;
    end
    @(negedge clk) we = 1'b0;
    // random traffic
    for (int n = 0; n < 400; n++) begin
      logic [DW-1:0] exp;
      logic [DW-1:0] held;
      int ra;
      ra = $urandom_range(DEPTH - 1);
      @(negedge clk);
      re = 1'b1; raddr = AW'(ra); exp = shadow[ra];
      we = ($urandom_range(1) == 1);
      waddr = ($urandom_range(3) == 0) ? AW'(ra) : AW'($urandom_range(DEPTH - 1));
      wdata = DW'($urandom);
      if (we) shadow[waddr] = wdata;
      @(negedge clk);
      re = 1'b0; we = 1'b0;
      check(exp, "read");
      held = rdata;
      @(negedge clk);
      check(held, "hold");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
