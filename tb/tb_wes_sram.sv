// tb_wes_sram: checks the buffer memory.
//
// Writes random words to every address of a small instance, reads them back
// in random order with the one-cycle latency, checks that a read while
// disabled keeps the last data and that a write and a read of other
// addresses in the same cycle do not interfere.
module tb_wes_sram;
  localparam int unsigned DEPTH = 512, DW = 8, AW = 9;

  logic clk = 0;
  always #5 clk = ~clk;

  logic          we_i = 0, re_i = 0;
  logic [AW-1:0] waddr_i, raddr_i;
  logic [DW-1:0] wdata_i, rdata_o;

  wes_sram #(.DEPTH(DEPTH), .DW(DW)) dut (.*);

  int checks = 0, failures = 0;
  logic [DW-1:0] model [DEPTH];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic [DW-1:0] exp, string what);
    checks++;
    if (rdata_o !== exp) begin
      failures++; $display("FAIL %s got %0h exp %0h", what, rdata_o, exp);
    end
  endtask

  initial begin
    waddr_i = 0; raddr_i = 0; wdata_i = 0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we_i = 1; waddr_i = AW'(a); wdata_i = DW'($urandom()); model[a] = wdata_i;
    end
    @(negedge clk); we_i = 0;
    for (int n = 0; n < 2000; n++) begin
      int a = $urandom_range(0, DEPTH - 1);
      int w = $urandom_range(0, DEPTH - 1);
      @(negedge clk);
      re_i = 1; raddr_i = AW'(a);
      // simultaneous write elsewhere
      we_i = (w != a); waddr_i = AW'(w); wdata_i = DW'($urandom());
      @(negedge clk);
      if (we_i) model[w] = wdata_i;
      we_i = 0; re_i = 0;
      chk(model[a], "read");
      @(negedge clk);
      chk(model[a], "hold");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
