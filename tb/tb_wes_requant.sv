// tb_wes_requant: checks the output stage against the 64-bit golden model.
//
// Streams directed corner cases (left and right layer exponent, channel
// shifts 0..15, ReLU on and off, saturation at both ends, int32 saturation
// of the left shift) and random values, one per cycle, and checks every
// result and that it appears exactly three cycles after its input.
module tb_wes_requant;
  import wes_pkg::*;
  import wes_ref_pkg::*;

  localparam int unsigned AW = 12;
  localparam int unsigned LAT = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  wes_qparam_t        qp;
  logic               valid_i = 0;
  logic [ACC_W-1:0]   acc_i, bias_i;
  logic [SHIFT_W-1:0] shift_i;
  logic [AW-1:0]      addr_i;
  logic               valid_o;
  logic [AW-1:0]      addr_o;
  logic [DATA_W-1:0]  data_o;

  wes_requant #(.AW(AW)) dut (.clk, .rst_n, .qp_i(qp), .valid_i, .acc_i, .bias_i, .shift_i, .addr_i,
                              .valid_o, .addr_o, .data_o);

  int checks = 0, failures = 0;
  longint cyc = 0;
  typedef struct { longint t; int unsigned addr; int unsigned exp; } exp_t;
  exp_t q[$];

  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n && valid_o) begin
    exp_t e;
    checks++;
    if (q.size() == 0) begin
      failures++; $display("unexpected output");
    end else begin
      e = q.pop_front();
      if (data_o !== e.exp[7:0] || addr_o !== AW'(e.addr) || cyc - e.t != LAT) begin
        failures++;
        $display("FAIL addr=%0d got %0d exp %0d latency %0d", e.addr, data_o, e.exp, cyc - e.t);
      end
    end
  end

  task automatic push(int acc, int bias, int sh);
    @(negedge clk);
    valid_i = 1; acc_i = acc; bias_i = bias; shift_i = SHIFT_W'(sh); addr_i = AW'(q.size() + checks);
    q.push_back('{cyc, addr_i, ref_requant(acc, bias, sh, qp.m, int'(qp.s), qp.relu, qp.z_out)});
  endtask

  task automatic idle();
    @(negedge clk); valid_i = 0;
  endtask

  task automatic drain();
    idle(); repeat (LAT + 2) @(negedge clk);
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    qp = '{z_in: 0, z_w: 0, z_out: 8'd3, relu: 0, m: 32'hC000_0000, s: -6'sd4};
    acc_i = 0; bias_i = 0; shift_i = 0; addr_i = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // directed: right exponent, each channel shift
    for (int sh = 0; sh < 16; sh++) push(123456, -789, sh);
    push(-5000, 100, 2);          // negative, no relu
    push(-1, 0, 0);
    drain();
    qp.relu = 1;
    push(-5000, 100, 2);          // clipped by ReLU
    push(1 << 20, 0, 0);          // saturates at 255
    drain();
    qp.s = 6'sd5; qp.m = 32'h8000_0001; qp.z_out = 0;
    push(1000, 0, 3);             // left exponent, then shift
    push(32'h7000_0000, 0, 0);    // left shift saturates to int32
    push(-7, 0, 0);
    drain();
    qp.s = -6'sd32; qp.relu = 0; qp.z_out = 128;
    push(-2147483647, -1, 15);
    drain();
    // random, back to back
    for (int n = 0; n < 4000; n++) begin
      if (n % 500 == 0) begin
        drain();
        qp.m     = 32'h8000_0000 | $urandom();
        qp.s     = EXP_W'($urandom_range(0, 63));
        qp.relu  = $urandom_range(0, 1);
        qp.z_out = DATA_W'($urandom());
      end
      push(int'($urandom()) >>> $urandom_range(0, 24), int'($urandom()) >>> $urandom_range(8, 31),
           $urandom_range(0, 15));
    end
    drain();
    if (q.size() != 0) begin failures++; $display("missing outputs %0d", q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
