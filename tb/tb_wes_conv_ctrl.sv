// tb_wes_conv_ctrl: checks the loop nest and address generator.
//
// For several layer shapes (normal and depthwise, 1x1 and 3x3 kernels,
// stride 1 and 2, with and without padding) the testbench builds the
// expected beat sequence from the operator's loop nest, records what the
// controller issues, and compares them beat by beat. It also checks the
// cycle count from start to done against
//   sum over outputs of (in-bounds taps * c_in, or 1 in depthwise mode)
//                       + padded taps + 1.
module tb_wes_conv_ctrl;
  import wes_pkg::*;

  localparam int unsigned AW_IN = 16, AW_W = 16, AW_OUT = 16, CH_AW = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  wes_cfg_t          cfg_i, cfg_o;
  logic              start_i = 0, busy_o, done_o, mac_o, fin_o;
  logic [AW_IN-1:0]  in_addr_o;
  logic [AW_W-1:0]   w_addr_o;
  logic [CH_AW-1:0]  ch_o;
  logic [AW_OUT-1:0] out_addr_o;

  wes_conv_ctrl #(.AW_IN(AW_IN), .AW_W(AW_W), .AW_OUT(AW_OUT), .CH_AW(CH_AW)) dut (.*);

  int checks = 0, failures = 0;
  // beat encoding: {fin, addr_a, addr_b}
  typedef struct { bit fin; int a; int b; } beat_t;
  beat_t expq[$], gotq[$];

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (mac_o) gotq.push_back('{0, int'(in_addr_o), int'(w_addr_o)});
    if (fin_o) gotq.push_back('{1, int'(ch_o), int'(out_addr_o)});
  end

  task automatic run(int w_in, h_in, c_in, c_out, kw, kh, st, pl, pt, bit dw);
    int w_out, h_out, cyc_exp, cyc;
    w_out = (w_in + 2 * pl - kw) / st + 1;
    h_out = (h_in + 2 * pt - kh) / st + 1;
    if (dw) c_in = c_out;
    cfg_i = '0;
    cfg_i.w_in = DIM_W'(w_in); cfg_i.h_in = DIM_W'(h_in); cfg_i.c_in = DIM_W'(c_in);
    cfg_i.w_out = DIM_W'(w_out); cfg_i.h_out = DIM_W'(h_out); cfg_i.c_out = DIM_W'(c_out);
    cfg_i.w_w = KDIM_W'(kw); cfg_i.h_w = KDIM_W'(kh); cfg_i.stride = KDIM_W'(st);
    cfg_i.pad_left = KDIM_W'(pl); cfg_i.pad_top = KDIM_W'(pt); cfg_i.depthwise = dw;
    // expected beats, straight from the loop nest
    expq.delete(); gotq.delete(); cyc_exp = 0;
    for (int y = 0; y < h_out; y++)
      for (int x = 0; x < w_out; x++)
        for (int z = 0; z < c_out; z++) begin
          for (int j = 0; j < kh; j++)
            for (int i = 0; i < kw; i++) begin
              int ix = x * st - pl + i, iy = y * st - pt + j;
              if (ix >= 0 && ix < w_in && iy >= 0 && iy < h_in) begin
                if (dw) begin
                  expq.push_back('{0, iy * w_in * c_in + ix * c_in + z, j * kw * c_out + i * c_out + z});
                  cyc_exp++;
                end else
                  for (int k = 0; k < c_in; k++) begin
                    expq.push_back('{0, iy * w_in * c_in + ix * c_in + k,
                                     j * kw * c_in * c_out + i * c_in * c_out + k * c_out + z});
                    cyc_exp++;
                  end
              end else cyc_exp++;
            end
          expq.push_back('{1, z, y * w_out * c_out + x * c_out + z});
          cyc_exp++;
        end
    @(negedge clk); start_i = 1;
    @(negedge clk); start_i = 0; cfg_i = '1;   // latched: later changes must not matter
    cyc = 1;
    while (!done_o) begin @(negedge clk); cyc++; end
    @(negedge clk);                 // let the last beat be recorded
    checks++;
    if (cyc != cyc_exp + 1) begin
      failures++; $display("FAIL cycles %0d exp %0d", cyc, cyc_exp + 1);
    end
    checks++;
    if (gotq.size() != expq.size()) begin
      failures++; $display("FAIL beats %0d exp %0d", gotq.size(), expq.size());
    end
    for (int n = 0; n < expq.size() && n < gotq.size(); n++) begin
      checks++;
      if (gotq[n] != expq[n]) begin
        failures++;
        if (failures < 10) $display("FAIL beat %0d fin=%0b %0d %0d exp fin=%0b %0d %0d", n,
                                    gotq[n].fin, gotq[n].a, gotq[n].b, expq[n].fin, expq[n].a, expq[n].b);
      end
    end
    checks++;
    if (busy_o) begin failures++; $display("FAIL busy after done"); end
  endtask

  initial begin
    cfg_i = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(5, 4, 3, 4, 3, 3, 1, 1, 1, 0);   // 3x3 same padding
    run(7, 6, 2, 3, 3, 3, 2, 1, 1, 0);   // stride 2
    run(6, 5, 1, 5, 3, 3, 1, 1, 1, 1);   // depthwise
    run(8, 8, 1, 4, 3, 3, 2, 0, 0, 1);   // depthwise stride 2, no padding
    run(1, 1, 16, 10, 1, 1, 1, 0, 0, 0); // fully connected as 1x1
    run(4, 4, 5, 6, 1, 1, 1, 0, 0, 0);   // pointwise
    run(5, 5, 2, 2, 5, 5, 1, 2, 2, 0);   // 5x5 kernel
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
