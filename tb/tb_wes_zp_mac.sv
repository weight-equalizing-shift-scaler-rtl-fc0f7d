// tb_wes_zp_mac: checks the zero-point-corrected accumulator.
//
// Sends random runs of MAC beats (random operands and zero points, gaps in
// between) closed by a finish beat, and compares each emitted sum and tag,
// one cycle after the finish beat, with a sum of (q_in-z_in)*(q_w-z_w)
// computed in the testbench. Includes a run long enough to wrap 32 bits.
module tb_wes_zp_mac;
  import wes_pkg::*;

  localparam int unsigned TAG_W = 12;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              mac_i = 0, fin_i = 0;
  logic [DATA_W-1:0] q_in_i, q_w_i, z_in_i, z_w_i;
  logic [TAG_W-1:0]  tag_i;
  logic              valid_o;
  logic [ACC_W-1:0]  sum_o;
  logic [TAG_W-1:0]  tag_o;

  wes_zp_mac #(.TAG_W(TAG_W)) dut (.*);

  int checks = 0, failures = 0;
  int exp_sum;
  int unsigned exp_tag;
  bit expect_now = 0;

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // outputs are compared at the negedge after the finish beat's edge
  task automatic check_out();
    @(negedge clk);
    mac_i = 0; fin_i = 0;
    checks++;
    if (!valid_o || sum_o !== ACC_W'(exp_sum) || tag_o !== TAG_W'(exp_tag)) begin
      failures++;
      $display("FAIL valid=%0b sum=%0d exp=%0d tag=%0h exp=%0h", valid_o, $signed(sum_o), exp_sum, tag_o, exp_tag);
    end
    @(negedge clk);
    checks++;
    if (valid_o) begin failures++; $display("FAIL valid held"); end
  endtask

  task automatic run(int n, bit extreme);
    int acc = 0;
    z_in_i = extreme ? 8'd255 : DATA_W'($urandom());
    z_w_i  = extreme ? 8'd0   : DATA_W'($urandom());
    for (int b = 0; b < n; b++) begin
      @(negedge clk);
      fin_i = 0;
      if (!extreme && $urandom_range(0, 3) == 0) begin
        mac_i = 0; q_in_i = DATA_W'($urandom()); q_w_i = DATA_W'($urandom());
      end else begin
        mac_i  = 1;
        q_in_i = extreme ? 8'd0   : DATA_W'($urandom());
        q_w_i  = extreme ? 8'd255 : DATA_W'($urandom());
        acc += (int'(q_in_i) - int'(z_in_i)) * (int'(q_w_i) - int'(z_w_i));
      end
    end
    @(negedge clk);
    mac_i = 0; fin_i = 1; tag_i = TAG_W'($urandom());
    exp_sum = acc; exp_tag = tag_i;
    check_out();
  endtask

  initial begin
    q_in_i = 0; q_w_i = 0; z_in_i = 0; z_w_i = 0; tag_i = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(0, 0);                 // empty output: sum 0
    for (int r = 0; r < 300; r++) run($urandom_range(1, 300), 0);
    run(40000, 1);             // -255*255 per beat: wraps past -2^31
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
