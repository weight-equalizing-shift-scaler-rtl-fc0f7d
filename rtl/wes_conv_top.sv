// wes_conv_top: WES-coupled fixed-point convolution engine.
//
// Computes one convolution layer (normal or depthwise, any kernel size,
// stride and padding) on uint8 activations and uint8 weights that were
// quantized layer-wise after a per-output-channel power-of-two rescaling
// (the weight equalizing shift S_z). The inverse rescaling is fused into the
// output stage as an extra right shift, so the engine needs per channel only
// a 4-bit S_z next to the bias, while the scale compound M*2^s and all zero
// points stay per layer.
//
// Datapath, one beat per cycle:
//   wes_conv_ctrl   loop nest and addresses   (issue, registered)
//   wes_sram x2     input and weight buffers  (+1 cycle read)
//   wes_zp_mac      (q_in-z_in)*(q_w-z_w) accumulated in 32 bits
//   wes_chparam_mem bias q_B[z] and S_z, read on the finish beat
//   wes_requant     bias, M*2^s with >> S_z, ReLU, z_out, uint8 (+3 cycles)
//   wes_sram        output buffer
// Weights can be loaded dense through w_we_i, or from the pruned format
// (mask bits + packed non-zero weights) through wes_sparse_decoder; while the
// decoder is busy it owns the weight buffer write port.
//
// Host side: the buffers are written and the output buffer read through
// plain ports (one cycle read latency on ofm_rdata_o); the host or DMA that
// drives them is outside this design. cfg_i is sampled on start_i; done_o
// pulses once the last output byte has been written. The buffer sizes are
// this design's choice.
module wes_conv_top
  import wes_pkg::*;
#(
  parameter int unsigned IN_DEPTH  = 2097152,  // input feature map buffer, bytes
  parameter int unsigned W_DEPTH   = 4194304,  // weight buffer, bytes
  parameter int unsigned OUT_DEPTH = 2097152,  // output feature map buffer, bytes
  parameter int unsigned N_CH      = 2048,     // output channels in the parameter table
  localparam int unsigned AW_IN  = $clog2(IN_DEPTH),
  localparam int unsigned AW_W   = $clog2(W_DEPTH),
  localparam int unsigned AW_OUT = $clog2(OUT_DEPTH),
  localparam int unsigned CH_AW  = $clog2(N_CH)
) (
  input  logic               clk,
  input  logic               rst_n,
  // layer control
  input  wes_cfg_t           cfg_i,
  input  logic               start_i,
  output logic               busy_o,
  output logic               done_o,
  // input feature map load
  input  logic               ifm_we_i,
  input  logic [AW_IN-1:0]   ifm_waddr_i,
  input  logic [DATA_W-1:0]  ifm_wdata_i,
  // dense weight load
  input  logic               w_we_i,
  input  logic [AW_W-1:0]    w_waddr_i,
  input  logic [DATA_W-1:0]  w_wdata_i,
  // per-channel bias and shift scale load
  input  logic               ch_we_i,
  input  logic [CH_AW-1:0]   ch_waddr_i,
  input  logic [ACC_W-1:0]   ch_wbias_i,
  input  logic [SHIFT_W-1:0] ch_wshift_i,
  // pruned weight load
  input  logic               sp_start_i,
  input  logic [AW_W:0]      sp_n_dense_i,
  input  logic [AW_W:0]      sp_nnz_i,
  input  logic               sp_mask_valid_i,
  output logic               sp_mask_ready_o,
  input  logic [7:0]         sp_mask_i,
  input  logic               sp_val_valid_i,
  output logic               sp_val_ready_o,
  input  logic [DATA_W-1:0]  sp_val_i,
  output logic               sp_busy_o,
  output logic               sp_done_o,
  output logic               sp_err_o,
  // output feature map read
  input  logic [AW_OUT-1:0]  ofm_raddr_i,
  output logic [DATA_W-1:0]  ofm_rdata_o
);

  // ---- controller -------------------------------------------------------
  wes_cfg_t          cfg;
  logic              mac0, fin0, ctrl_busy, ctrl_done;
  logic [AW_IN-1:0]  in_addr0;
  logic [AW_W-1:0]   w_addr0;
  logic [CH_AW-1:0]  ch0;
  logic [AW_OUT-1:0] out_addr0;

  wes_conv_ctrl #(.AW_IN(AW_IN), .AW_W(AW_W), .AW_OUT(AW_OUT), .CH_AW(CH_AW)) u_ctrl (
    .clk, .rst_n,
    .cfg_i, .start_i,
    .busy_o(ctrl_busy), .done_o(ctrl_done), .cfg_o(cfg),
    .mac_o(mac0), .fin_o(fin0),
    .in_addr_o(in_addr0), .w_addr_o(w_addr0), .ch_o(ch0), .out_addr_o(out_addr0)
  );

  wes_qparam_t qp;
  assign qp = qparam_of(cfg);

  // ---- buffers ----------------------------------------------------------
  logic [DATA_W-1:0] q_in1, q_w1;

  wes_sram #(.DEPTH(IN_DEPTH), .DW(DATA_W)) u_ifm (
    .clk, .we_i(ifm_we_i), .waddr_i(ifm_waddr_i), .wdata_i(ifm_wdata_i),
    .re_i(mac0), .raddr_i(in_addr0), .rdata_o(q_in1)
  );

  logic              sp_wr_en;
  logic [AW_W-1:0]   sp_wr_addr;
  logic [DATA_W-1:0] sp_wr_data;
  logic              sp_busy;

  wes_sram #(.DEPTH(W_DEPTH), .DW(DATA_W)) u_wbuf (
    .clk,
    .we_i   (sp_busy ? sp_wr_en   : w_we_i),
    .waddr_i(sp_busy ? sp_wr_addr : w_waddr_i),
    .wdata_i(sp_busy ? sp_wr_data : w_wdata_i),
    .re_i(mac0), .raddr_i(w_addr0), .rdata_o(q_w1)
  );

  logic [ACC_W-1:0]   bias1;
  logic [SHIFT_W-1:0] shift1;

  wes_chparam_mem #(.N_CH(N_CH)) u_chparam (
    .clk, .we_i(ch_we_i), .waddr_i(ch_waddr_i), .wbias_i(ch_wbias_i), .wshift_i(ch_wshift_i),
    .re_i(fin0), .raddr_i(ch0), .rbias_o(bias1), .rshift_o(shift1)
  );

  // beat flags and output address aligned with the buffer read data
  logic              mac1, fin1;
  logic [AW_OUT-1:0] out_addr1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mac1 <= 1'b0; fin1 <= 1'b0; out_addr1 <= '0;
    end else begin
      mac1 <= mac0;
      fin1 <= fin0;
      if (fin0) out_addr1 <= out_addr0;
    end
  end

  // ---- multiply-accumulate ---------------------------------------------
  localparam int unsigned TAG_W = ACC_W + SHIFT_W + AW_OUT;

  logic              sum_valid;
  logic [ACC_W-1:0]  sum2;
  logic [TAG_W-1:0]  tag2;

  wes_zp_mac #(.TAG_W(TAG_W)) u_mac (
    .clk, .rst_n,
    .mac_i(mac1), .fin_i(fin1),
    .q_in_i(q_in1), .q_w_i(q_w1), .z_in_i(qp.z_in), .z_w_i(qp.z_w),
    .tag_i({bias1, shift1, out_addr1}),
    .valid_o(sum_valid), .sum_o(sum2), .tag_o(tag2)
  );

  // ---- output stage -----------------------------------------------------
  logic              o_valid;
  logic [AW_OUT-1:0] o_addr;
  logic [DATA_W-1:0] o_data;

  wes_requant #(.AW(AW_OUT)) u_requant (
    .clk, .rst_n, .qp_i(qp),
    .valid_i(sum_valid), .acc_i(sum2),
    .bias_i (tag2[TAG_W-1 -: ACC_W]),
    .shift_i(tag2[AW_OUT +: SHIFT_W]),
    .addr_i (tag2[AW_OUT-1:0]),
    .valid_o(o_valid), .addr_o(o_addr), .data_o(o_data)
  );

  wes_sram #(.DEPTH(OUT_DEPTH), .DW(DATA_W)) u_ofm (
    .clk, .we_i(o_valid), .waddr_i(o_addr), .wdata_i(o_data),
    .re_i(1'b1), .raddr_i(ofm_raddr_i), .rdata_o(ofm_rdata_o)
  );

  // ---- completion: the last finish beat leaves the output stage after
  // buffer read (1) + accumulate (1) + requantize (3) cycles
  localparam int unsigned DRAIN = 5;
  logic [DRAIN-1:0] done_sr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) done_sr <= '0;
    else        done_sr <= {done_sr[DRAIN-2:0], ctrl_done};
  end

  assign done_o = done_sr[DRAIN-1];
  assign busy_o = ctrl_busy || (done_sr != '0);

  // ---- pruned weight loader ----------------------------------------------
  wes_sparse_decoder #(.AW(AW_W)) u_sparse (
    .clk, .rst_n,
    .start_i(sp_start_i), .n_dense_i(sp_n_dense_i), .nnz_i(sp_nnz_i), .z_w_i(cfg_i.z_w),
    .mask_valid_i(sp_mask_valid_i), .mask_ready_o(sp_mask_ready_o), .mask_i(sp_mask_i),
    .val_valid_i(sp_val_valid_i), .val_ready_o(sp_val_ready_o), .val_i(sp_val_i),
    .busy_o(sp_busy),
    .wr_en_o(sp_wr_en), .wr_addr_o(sp_wr_addr), .wr_data_o(sp_wr_data),
    .done_o(sp_done_o), .err_o(sp_err_o)
  );

  assign sp_busy_o = sp_busy;

  // the weight buffer must not be reloaded while a layer runs
  assert property (@(posedge clk) disable iff (!rst_n) !(ctrl_busy && (sp_busy || w_we_i)))
    else $error("wes_conv_top: weight buffer written during a layer");

endmodule
