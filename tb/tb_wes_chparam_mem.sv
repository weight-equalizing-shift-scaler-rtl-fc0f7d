// tb_wes_chparam_mem: checks the per-channel bias / shift-scale table.
//
// Fills all channels of a small table with random 32-bit biases and 4-bit
// shift scales, overwrites some, and reads every channel back with the
// one-cycle latency.
module tb_wes_chparam_mem;
  import wes_pkg::*;
  localparam int unsigned N_CH = 64, AW = 6;

  logic clk = 0;
  always #5 clk = ~clk;

  logic               we_i = 0, re_i = 0;
  logic [AW-1:0]      waddr_i, raddr_i;
  logic [ACC_W-1:0]   wbias_i, rbias_o;
  logic [SHIFT_W-1:0] wshift_i, rshift_o;

  wes_chparam_mem #(.N_CH(N_CH)) dut (.*);

  int checks = 0, failures = 0;
  logic [ACC_W-1:0]   mb [N_CH];
  logic [SHIFT_W-1:0] ms [N_CH];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(int a);
    @(negedge clk);
    we_i = 1; waddr_i = AW'(a); wbias_i = $urandom(); wshift_i = SHIFT_W'($urandom());
    mb[a] = wbias_i; ms[a] = wshift_i;
    @(negedge clk); we_i = 0;
  endtask

  initial begin
    waddr_i = 0; raddr_i = 0; wbias_i = 0; wshift_i = 0;
    for (int a = 0; a < N_CH; a++) wr(a);
    for (int n = 0; n < 20; n++) wr($urandom_range(0, N_CH - 1));
    for (int pass = 0; pass < 3; pass++)
      for (int a = 0; a < N_CH; a++) begin
        @(negedge clk); re_i = 1; raddr_i = AW'(a);
        @(negedge clk); re_i = 0;
        checks++;
        if (rbias_o !== mb[a] || rshift_o !== ms[a]) begin
          failures++; $display("FAIL ch %0d", a);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
