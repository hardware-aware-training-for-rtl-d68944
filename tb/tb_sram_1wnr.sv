// tb_sram_1wnr: self-checking test of the one-write, NR-read memory (NR = 3).
// Writes random words, keeps a shadow copy, and checks that every read port
// returns its own address's shadow word one clock after the request, that
// rdata holds while re is low, and that a same-address read/write returns the
// old word.
module tb_sram_1wnr;
  localparam int DW = 8, DEPTH = 37, AW = 6, NR = 3;
  logic clk = 1'b0, we = 1'b0, re = 1'b0;
  logic [AW-1:0] waddr = '0;
  logic [AW-1:0] raddr [NR];
  logic [DW-1:0] wdata = '0;
  logic [DW-1:0] rdata [NR];
  logic [DW-1:0] shadow [DEPTH];
  int checks = 0, failures = 0;

  sram_1wnr #(.DW(DW), .DEPTH(DEPTH), .NR(NR)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    for (int r = 0; r < NR; r++) raddr[r] = '0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1'b1; waddr = AW'(a); wdata = DW'($urandom); shadow[a] = wdata;
    end
    @(negedge clk) we = 1'b0;
    for (int n = 0; n < 300; n++) begin
      logic [DW-1:0] exp  [NR];
      logic [DW-1:0] held [NR];
      @(negedge clk);
      re = 1'b1;
      for (int r = 0; r < NR; r++) begin
        raddr[r] = AW'($urandom_range(DEPTH - 1));
        exp[r] = shadow[raddr[r]];
      end
      we = ($urandom_range(1) == 1);
      waddr = ($urandom_range(2) == 0) ? raddr[0] : AW'($urandom_range(DEPTH - 1));
      wdata = DW'($urandom);
      if (we) shadow[waddr] = wdata;
      @(negedge clk);
      re = 1'b0; we = 1'b0;
      for (int r = 0; r < NR; r++) begin
        checks++;
        if (rdata[r] !== exp[r]) begin
          failures++;
          $display("FAIL port %0d read: got %h expected %h", r, rdata[r], exp[r]);
        end
        held[r] = rdata[r];
      end
      for (int r = 0; r < NR; r++) raddr[r] = AW'($urandom_range(DEPTH - 1));
      @(negedge clk);
      for (int r = 0; r < NR; r++) begin
        checks++;
        if (rdata[r] !== held[r]) begin
          failures++;
          $display("FAIL port %0d hold", r);
        end
      end
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
