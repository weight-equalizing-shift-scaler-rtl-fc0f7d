// tb_wes_conv_top: end-to-end test of the WES convolution engine.
//
// Runs the engine at its default (full) buffer sizes through a sequence of
// small layers: 3x3 convolution with padding, a strided convolution with a
// left-shifting layer exponent, a depthwise convolution whose weights are
// loaded in the pruned (mask + packed) format, a fully connected layer as a
// 1x1 convolution on a 1x1 input, and a larger 3x3 layer with ReLU. For each
// layer it loads the buffers through the host ports, runs it, reads every
// output byte back and compares it with a reference computed here from the
// operator's loop nest in plain integer arithmetic. It checks the cycle count
// from start to done (in-bounds taps * c_in, or 1 per tap in depthwise mode,
// + 1 per padded tap + 1 per output, + 6 cycles of pipeline) and counts how
// often each mechanism occurred: padded taps skipped, depthwise and normal
// mode, stride 2, left and right layer exponent, nonzero channel shift,
// ReLU clipping, saturation at 255 and at 0, pruned and dense weight loads.
// A mechanism that never occurs counts as a failure.
module tb_wes_conv_top;
  import wes_pkg::*;
  import wes_ref_pkg::*;

  localparam int unsigned AW_IN = 21, AW_W = 22, AW_OUT = 21, CH_AW = 11;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  wes_cfg_t           cfg_i;
  logic               start_i = 0, busy_o, done_o;
  logic               ifm_we_i = 0, w_we_i = 0, ch_we_i = 0;
  logic [AW_IN-1:0]   ifm_waddr_i;
  logic [DATA_W-1:0]  ifm_wdata_i, w_wdata_i;
  logic [AW_W-1:0]    w_waddr_i;
  logic [CH_AW-1:0]   ch_waddr_i;
  logic [ACC_W-1:0]   ch_wbias_i;
  logic [SHIFT_W-1:0] ch_wshift_i;
  logic               sp_start_i = 0;
  logic [AW_W:0]      sp_n_dense_i, sp_nnz_i;
  logic               sp_mask_valid_i = 0, sp_mask_ready_o, sp_val_valid_i = 0, sp_val_ready_o;
  logic [7:0]         sp_mask_i;
  logic [DATA_W-1:0]  sp_val_i;
  logic               sp_busy_o, sp_done_o, sp_err_o;
  logic [AW_OUT-1:0]  ofm_raddr_i;
  logic [DATA_W-1:0]  ofm_rdata_o;

  wes_conv_top dut (.*);

  int checks = 0, failures = 0;

  typedef enum int {M_PAD, M_DW, M_NORMAL, M_STRIDE2, M_S_LEFT, M_S_RIGHT, M_CH_SHIFT,
                    M_RELU_CLIP, M_SAT_HI, M_SAT_LO, M_SPARSE, M_DENSE, M_N} mech_e;
  int mech [M_N];
  string mech_name [M_N] = '{"padded tap skipped", "depthwise layer", "normal layer", "stride 2",
                             "left exponent", "right exponent", "channel shift > 0",
                             "ReLU clip", "saturate 255", "saturate 0", "pruned load", "dense load"};

  // layer data
  logic [7:0]  ifm [];
  logic [7:0]  wts [];
  int          bias [];
  int unsigned shf [];

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load_ifm();
    foreach (ifm[a]) begin
      @(negedge clk); ifm_we_i = 1; ifm_waddr_i = AW_IN'(a); ifm_wdata_i = ifm[a];
    end
    @(negedge clk); ifm_we_i = 0;
  endtask

  task automatic load_ch();
    foreach (bias[c]) begin
      @(negedge clk); ch_we_i = 1; ch_waddr_i = CH_AW'(c);
      ch_wbias_i = bias[c]; ch_wshift_i = SHIFT_W'(shf[c]);
    end
    @(negedge clk); ch_we_i = 0;
  endtask

  task automatic load_w_dense();
    foreach (wts[a]) begin
      @(negedge clk); w_we_i = 1; w_waddr_i = AW_W'(a); w_wdata_i = wts[a];
    end
    @(negedge clk); w_we_i = 0;
    mech[M_DENSE]++;
  endtask

  // prune about 20 % of the weights to the zero point, then send them in the
  // mask + packed format
  task automatic load_w_sparse(logic [7:0] z_w);
    logic [7:0] masks [$], vals [$];
    logic [7:0] m;
    int mi = 0, vi = 0;
    foreach (wts[e]) begin
      if ($urandom_range(0, 4) == 0) wts[e] = z_w;
      if (e % 8 == 0) m = 8'h00;
      if (wts[e] != z_w) begin m[e % 8] = 1'b1; vals.push_back(wts[e]); end
      if (e % 8 == 7 || e == wts.size() - 1) masks.push_back(m);
    end
    @(negedge clk);
    sp_start_i = 1; sp_n_dense_i = (AW_W+1)'(wts.size()); sp_nnz_i = (AW_W+1)'(vals.size());
    @(negedge clk);
    sp_start_i = 0;
    while (!sp_done_o) begin
      bit fire_m, fire_v;
      sp_mask_valid_i = (mi < masks.size()); sp_mask_i = (mi < masks.size()) ? masks[mi] : 8'h0;
      sp_val_valid_i  = (vi < vals.size());  sp_val_i  = (vi < vals.size())  ? vals[vi]  : 8'h0;
      #1;  // ready depends on state only: sample the handshake before the edge
      fire_m = sp_mask_valid_i && sp_mask_ready_o;
      fire_v = sp_val_valid_i && sp_val_ready_o;
      @(posedge clk);
      if (fire_m) mi++;
      if (fire_v) vi++;
      @(negedge clk);
    end
    sp_mask_valid_i = 0; sp_val_valid_i = 0;
    checks++;
    if (sp_err_o || vi != vals.size()) begin failures++; $display("FAIL pruned load"); end
    mech[M_SPARSE]++;
  endtask

  task automatic run_layer(string name, int w_in, h_in, c_in, c_out, kw, kh, st, pl, pt,
                           bit dw, bit relu, int s, bit sparse);
    int w_out, h_out, cyc, cyc_exp, bad;
    int unsigned m;
    logic [7:0] z_in, z_w, z_out;
    int exp_out [];
    w_out = (w_in + 2 * pl - kw) / st + 1;
    h_out = (h_in + 2 * pt - kh) / st + 1;
    if (dw) c_in = c_out;
    z_in = 8'($urandom_range(100, 150)); z_w = 8'($urandom_range(100, 150));
    z_out = 8'($urandom_range(0, 80));
    m = 32'h8000_0000 | $urandom();
    ifm = new[w_in * h_in * c_in];
    wts = new[dw ? kh * kw * c_out : kh * kw * c_in * c_out];
    bias = new[c_out]; shf = new[c_out];
    foreach (ifm[a]) ifm[a] = 8'($urandom());
    foreach (wts[a]) wts[a] = 8'($urandom_range(64, 192));
    foreach (bias[c]) begin
      bias[c] = int'($urandom_range(0, 20000)) - 10000;
      shf[c] = (c % 3 == 0) ? 0 : $urandom_range(1, 4);   // equalizing shift per channel
    end
    cfg_i = '0;
    cfg_i.w_in = DIM_W'(w_in); cfg_i.h_in = DIM_W'(h_in); cfg_i.c_in = DIM_W'(c_in);
    cfg_i.w_out = DIM_W'(w_out); cfg_i.h_out = DIM_W'(h_out); cfg_i.c_out = DIM_W'(c_out);
    cfg_i.w_w = KDIM_W'(kw); cfg_i.h_w = KDIM_W'(kh); cfg_i.stride = KDIM_W'(st);
    cfg_i.pad_left = KDIM_W'(pl); cfg_i.pad_top = KDIM_W'(pt);
    cfg_i.depthwise = dw; cfg_i.relu = relu;
    cfg_i.z_in = z_in; cfg_i.z_w = z_w; cfg_i.z_out = z_out; cfg_i.m = m; cfg_i.s = EXP_W'(s);
    load_ifm();
    load_ch();
    if (sparse) load_w_sparse(z_w); else load_w_dense();
    // reference: the operator's loop nest
    exp_out = new[w_out * h_out * c_out];
    cyc_exp = 0;
    for (int y = 0; y < h_out; y++)
      for (int x = 0; x < w_out; x++)
        for (int z = 0; z < c_out; z++) begin
          int acc = 0;
          longint r;
          for (int j = 0; j < kh; j++)
            for (int i = 0; i < kw; i++) begin
              int ix = x * st - pl + i, iy = y * st - pt + j;
              if (ix >= 0 && ix < w_in && iy >= 0 && iy < h_in) begin
                for (int k = 0; k < (dw ? 1 : c_in); k++) begin
                  int kk = dw ? z : k;
                  int wi = dw ? (j * kw + i) * c_out + z : ((j * kw + i) * c_in + k) * c_out + z;
                  acc += (int'(ifm[(iy * w_in + ix) * c_in + kk]) - int'(z_in)) *
                         (int'(wts[wi]) - int'(z_w));
                  cyc_exp++;
                end
              end else begin
                cyc_exp++; mech[M_PAD]++;
              end
            end
          cyc_exp++;
          r = ref_scaled(acc, bias[z], shf[z], m, s);
          if (relu && r < 0) mech[M_RELU_CLIP]++;
          if (relu && r < 0) r = 0;
          if (r + longint'(z_out) > 255) mech[M_SAT_HI]++;
          if (r + longint'(z_out) < 0)   mech[M_SAT_LO]++;
          if (shf[z] > 0)      mech[M_CH_SHIFT]++;
          exp_out[(y * w_out + x) * c_out + z] = ref_requant(acc, bias[z], shf[z], m, s, relu, z_out);
        end
    if (dw) mech[M_DW]++; else mech[M_NORMAL]++;
    if (st == 2) mech[M_STRIDE2]++;
    if (s > 0) mech[M_S_LEFT]++; else mech[M_S_RIGHT]++;
    // run
    @(negedge clk); start_i = 1;
    @(negedge clk); start_i = 0;
    cyc = 1;
    while (!done_o) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != cyc_exp + 6) begin
      failures++; $display("FAIL %s cycles %0d exp %0d", name, cyc, cyc_exp + 6);
    end
    checks++;
    @(negedge clk);
    if (busy_o) begin failures++; $display("FAIL %s busy after done", name); end
    // read back
    bad = 0;
    foreach (exp_out[a]) begin
      ofm_raddr_i = AW_OUT'(a);
      @(negedge clk);
      checks++;
      if (ofm_rdata_o !== 8'(exp_out[a])) begin
        failures++; bad++;
        if (bad < 5) $display("FAIL %s out[%0d] got %0d exp %0d", name, a, ofm_rdata_o, exp_out[a]);
      end
    end
    $display("layer %s: %0dx%0dx%0d -> %0dx%0dx%0d, %0d cycles, %0d mismatches",
             name, w_in, h_in, c_in, w_out, h_out, c_out, cyc, bad);
  endtask

  initial begin
    cfg_i = '0; ifm_waddr_i = 0; ifm_wdata_i = 0; w_waddr_i = 0; w_wdata_i = 0;
    ch_waddr_i = 0; ch_wbias_i = 0; ch_wshift_i = 0; sp_n_dense_i = 0; sp_nnz_i = 0;
    sp_mask_i = 0; sp_val_i = 0; ofm_raddr_i = 0;
    foreach (mech[n]) mech[n] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    //        name        w_in h_in c_in c_out kw kh st pl pt dw relu s    sparse
    run_layer("conv3x3",  6,   5,   3,   4,    3, 3, 1, 1, 1, 0, 0,   -4,  0);
    run_layer("conv_s2",  7,   7,   4,   3,    3, 3, 2, 1, 1, 0, 1,    1,  0);
    run_layer("dw3x3",    8,   6,   1,   6,    3, 3, 1, 1, 1, 1, 1,   -1,  1);
    run_layer("fc",       1,   1,   32,  10,   1, 1, 1, 0, 0, 0, 0,   -5,  0);
    run_layer("conv_big", 10,  10,  8,   8,    3, 3, 1, 1, 1, 0, 1,   -6,  1);
    for (int n = 0; n < M_N; n++) begin
      $display("mechanism %-20s %0d", mech_name[n], mech[n]);
      checks++;
      if (mech[n] == 0) begin failures++; $display("FAIL mechanism never occurred: %s", mech_name[n]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
