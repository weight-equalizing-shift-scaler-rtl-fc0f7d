// tb_wes_workload: layers of the evaluated networks, quantized with and
// without the weight equalizing shift, run through the full engine.
//
// Layers, at their real sizes:
//   MobileNet v1, first depthwise layer: 112x112x32, 3x3, stride 1, pad 1
//   ResNet56 (CIFAR-10), a first-stage convolution: 32x32x16 -> 16, 3x3, pad 1
// both followed by ReLU6. For each layer the testbench synthesizes float
// weights whose per-output-channel ranges differ by up to 64x (some channels
// off-centre), as after batch-norm folding, and quantizes them twice:
//   WES: S_z = floor(log2(r_max / r_z)), r_z = 2*max|w_z| (clamped to 0..15),
//        weights and bias scaled by 2^S_z, then one layer-wise uint8
//        quantization (scale (max-min)/255, rounded zero point);
//   LWQ: the same with every S_z = 0.
// The scale compound s_in*s_w/s_out is split into M*2^s with M in [0.5,1).
// For both runs every output byte must equal the integer reference, the
// cycle count must match the controller formula, and the dequantized WES
// outputs must be closer (mean squared error) to the float layer than the
// LWQ outputs, which is the accuracy effect the method is built for.
module tb_wes_workload;
  import wes_pkg::*;
  import wes_ref_pkg::*;

  localparam int K = 3;
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
  logic [AW_W:0]      sp_n_dense_i = 0, sp_nnz_i = 0;
  logic               sp_mask_valid_i = 0, sp_mask_ready_o, sp_val_valid_i = 0, sp_val_ready_o;
  logic [7:0]         sp_mask_i = 0;
  logic [DATA_W-1:0]  sp_val_i = 0;
  logic               sp_busy_o, sp_done_o, sp_err_o;
  logic [AW_OUT-1:0]  ofm_raddr_i;
  logic [DATA_W-1:0]  ofm_rdata_o;

  wes_conv_top dut (.*);

  int checks = 0, failures = 0;

  // current layer
  int          W, H, CI, CO;
  bit          DW;
  real         wf [];           // float weights, engine layout
  real         bf [];
  logic [7:0]  q_in [];
  real         yref [];         // float layer output after ReLU6
  real         s_in = 6.0 / 255.0, s_out = 6.0 / 255.0;

  initial begin
    repeat (40000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real urand();   // uniform in [0,1)
    return real'($urandom()) / 4294967296.0;
  endfunction

  function automatic real fabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction

  function automatic int rnd(real v);
    return (v >= 0.0) ? int'($floor(v + 0.5)) : -int'($floor(-v + 0.5));
  endfunction

  // weight index and input index of tap (j,i), input channel k, output channel z
  function automatic int widx(int j, int i, int k, int z);
    return DW ? (j * K + i) * CO + z : ((j * K + i) * CI + k) * CO + z;
  endfunction

  function automatic int taps_in(int y, int x);
    int n = 0;
    for (int j = 0; j < K; j++)
      for (int i = 0; i < K; i++)
        if (x - 1 + i >= 0 && x - 1 + i < W && y - 1 + j >= 0 && y - 1 + j < H) n++;
    return n;
  endfunction

  // quantize, run, compare; returns the mean squared error against yref
  task automatic run(string lname, bit wes, output real mse);
    int unsigned sh [];
    real   r [], rmax, wmin, wmax, s_w, comp, mf, err;
    int    z_w, e, cyc, cyc_exp, bad, nk;
    int unsigned m;
    longint mm;
    logic [7:0] q_w [];
    int    qb [];
    sh = new[CO]; r = new[CO]; qb = new[CO]; q_w = new[wf.size()];
    nk = DW ? 1 : CI;
    // shift scales from the per-channel symmetric ranges
    rmax = 0.0;
    for (int z = 0; z < CO; z++) r[z] = 0.0;
    for (int n = 0; n < wf.size(); n++)
      if (2.0 * fabs(wf[n]) > r[n % CO]) r[n % CO] = 2.0 * fabs(wf[n]);
    for (int z = 0; z < CO; z++) if (r[z] > rmax) rmax = r[z];
    for (int z = 0; z < CO; z++) begin
      int v;
      v = wes ? int'($floor($ln(rmax / r[z]) / $ln(2.0))) : 0;
      sh[z] = (v < 0) ? 0 : (v > 15) ? 15 : v;
    end
    // layer-wise asymmetric quantization of the shifted weights
    wmin = 0.0; wmax = 0.0;
    for (int n = 0; n < wf.size(); n++) begin
      real v;
      v = wf[n] * (2.0 ** sh[n % CO]);
      if (v < wmin) wmin = v;
      if (v > wmax) wmax = v;
    end
    s_w = (wmax - wmin) / 255.0;
    z_w = rnd(-wmin / s_w);
    for (int n = 0; n < wf.size(); n++) begin
      int q;
      q = rnd(wf[n] * (2.0 ** sh[n % CO]) / s_w) + z_w;
      q_w[n] = 8'((q < 0) ? 0 : (q > 255) ? 255 : q);
    end
    for (int z = 0; z < CO; z++) qb[z] = rnd(bf[z] * (2.0 ** sh[z]) / (s_in * s_w));
    // scale compound M * 2^s
    comp = s_in * s_w / s_out;
    e  = int'($floor($ln(comp) / $ln(2.0))) + 1;
    mf = comp / (2.0 ** e);
    if (mf >= 1.0) begin mf = mf / 2.0; e++; end
    if (mf < 0.5)  begin mf = mf * 2.0; e--; end
    mm = longint'($floor(mf * 4294967296.0 + 0.5));
    if (mm > 64'sh0_FFFF_FFFF) mm = 64'sh0_FFFF_FFFF;
    m  = 32'(mm);
    // load parameters and weights
    for (int z = 0; z < CO; z++) begin
      @(negedge clk); ch_we_i = 1; ch_waddr_i = CH_AW'(z);
      ch_wbias_i = qb[z]; ch_wshift_i = SHIFT_W'(sh[z]);
    end
    @(negedge clk); ch_we_i = 0;
    foreach (q_w[n]) begin
      @(negedge clk); w_we_i = 1; w_waddr_i = AW_W'(n); w_wdata_i = q_w[n];
    end
    @(negedge clk); w_we_i = 0;
    cfg_i = '0;
    cfg_i.w_in = DIM_W'(W); cfg_i.h_in = DIM_W'(H); cfg_i.c_in = DIM_W'(CI);
    cfg_i.w_out = DIM_W'(W); cfg_i.h_out = DIM_W'(H); cfg_i.c_out = DIM_W'(CO);
    cfg_i.w_w = KDIM_W'(K); cfg_i.h_w = KDIM_W'(K); cfg_i.stride = 1;
    cfg_i.pad_left = 1; cfg_i.pad_top = 1; cfg_i.depthwise = DW; cfg_i.relu = 1;
    cfg_i.z_in = 0; cfg_i.z_w = 8'(z_w); cfg_i.z_out = 0; cfg_i.m = m; cfg_i.s = EXP_W'(e);
    @(negedge clk); start_i = 1;
    @(negedge clk); start_i = 0;
    cyc = 1;
    while (!done_o) begin @(negedge clk); cyc++; end
    // per output: in-bounds taps * nk MAC beats, 1 idle per padded tap, 1 finish
    cyc_exp = 6;
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        int t;
        t = taps_in(y, x);
        cyc_exp += CO * (t * nk + (K * K - t) + 1);
      end
    checks++;
    if (cyc != cyc_exp) begin failures++; $display("FAIL cycles %0d exp %0d", cyc, cyc_exp); end
    // compare with the integer reference, measure error against float
    bad = 0; err = 0.0;
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++)
        for (int z = 0; z < CO; z++) begin
          int acc, a;
          int unsigned exp_q;
          acc = 0; a = (y * W + x) * CO + z;
          for (int j = 0; j < K; j++)
            for (int i = 0; i < K; i++) begin
              int ix, iy;
              ix = x - 1 + i; iy = y - 1 + j;
              if (ix >= 0 && ix < W && iy >= 0 && iy < H)
                for (int k = 0; k < nk; k++)
                  acc += int'(q_in[(iy * W + ix) * CI + (DW ? z : k)]) * (int'(q_w[widx(j, i, k, z)]) - z_w);
            end
          exp_q = ref_requant(acc, qb[z], sh[z], m, e, 1'b1, 0);
          ofm_raddr_i = AW_OUT'(a);
          @(negedge clk);
          checks++;
          if (ofm_rdata_o !== 8'(exp_q)) begin
            failures++; bad++;
            if (bad < 5) $display("FAIL out[%0d] got %0d exp %0d", a, ofm_rdata_o, exp_q);
          end
          err += (s_out * real'(ofm_rdata_o) - yref[a]) ** 2;
        end
    mse = err / real'(W * H * CO);
    $display("%s %s: s_w=%g z_w=%0d M=%08h s=%0d, %0d cycles, mismatches %0d, MSE vs float %g",
             lname, wes ? "WES" : "LWQ", s_w, z_w, m, e, cyc, bad, mse);
  endtask

  task automatic layer(string lname, int w, int h, int ci, int co, bit dw);
    real mse_wes, mse_lwq, wscale;
    int nk;
    W = w; H = h; CO = co; DW = dw; CI = dw ? co : ci;
    nk = dw ? 1 : CI;
    wf = new[K * K * nk * CO]; bf = new[CO];
    q_in = new[W * H * CI]; yref = new[W * H * CO];
    // float weights: channel ranges spread over 2^0 .. 2^-6 of the widest
    wscale = 1.0 / $sqrt(real'(nk));
    for (int z = 0; z < CO; z++) begin
      real range, centre;
      range  = (z == 0) ? 1.0 : 2.0 ** (-6.0 * urand());
      centre = (z % 5 == 0) ? range * (urand() - 0.5) : 0.0;
      for (int t = 0; t < K * K * nk; t++)
        wf[t * CO + z] = wscale * (centre + range * (2.0 * urand() - 1.0) * 0.5);
      bf[z] = 0.5 * (urand() - 0.5);
    end
    foreach (q_in[a]) q_in[a] = 8'($urandom_range(0, 255));
    // float reference (input taken at its quantized values)
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++)
        for (int z = 0; z < CO; z++) begin
          real acc;
          acc = bf[z];
          for (int j = 0; j < K; j++)
            for (int i = 0; i < K; i++) begin
              int ix, iy;
              ix = x - 1 + i; iy = y - 1 + j;
              if (ix >= 0 && ix < W && iy >= 0 && iy < H)
                for (int k = 0; k < nk; k++)
                  acc += wf[widx(j, i, k, z)] * s_in * real'(q_in[(iy * W + ix) * CI + (dw ? z : k)]);
            end
          yref[(y * W + x) * CO + z] = (acc < 0.0) ? 0.0 : (acc > 6.0) ? 6.0 : acc;
        end
    foreach (q_in[a]) begin
      @(negedge clk); ifm_we_i = 1; ifm_waddr_i = AW_IN'(a); ifm_wdata_i = q_in[a];
    end
    @(negedge clk); ifm_we_i = 0;
    run(lname, 1'b1, mse_wes);
    run(lname, 1'b0, mse_lwq);
    checks++;
    if (!(mse_wes < mse_lwq)) begin
      failures++; $display("FAIL %s: WES error %g not below LWQ error %g", lname, mse_wes, mse_lwq);
    end
  endtask

  initial begin
    cfg_i = '0; ifm_waddr_i = 0; ifm_wdata_i = 0; w_waddr_i = 0; w_wdata_i = 0;
    ch_waddr_i = 0; ch_wbias_i = 0; ch_wshift_i = 0; ofm_raddr_i = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    layer("MobileNetV1-dw1", 112, 112, 32, 32, 1'b1);
    layer("ResNet56-conv",   32,  32,  16, 16, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
