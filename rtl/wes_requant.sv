// wes_requant: output stage of the WES-coupled fixed-point operator.
//
// Turns a finished 32-bit accumulator of output channel z into a uint8
// activation:
//   a   = acc + q_B[z]                                (32-bit wrap)
//   t   = (s > 0) ? sat32(a << s) : (a >>> -s)        layer exponent
//   u   = t >>> S_z                                   channel-wise inverse shift
//   r   = round(u * M / 2^32)                         layer mantissa, M in [0.5,1)
//   r   = relu ? max(0, r) : r
//   out = sat_uint8(r + z_out)
// The inverse of the weight equalizing shift is therefore just an extra
// right shift folded into the per-layer scaling, so no separate scaling layer
// exists. The order of the steps follows the method's operator description;
// saturation of the left shift and round-half-up of the mantissa product are
// this design's choices. ReLU6 is obtained with relu=1 and an output
// quantization range of [0,6], which the uint8 saturation then enforces.
//
// Timing: fully pipelined, one input per cycle, valid_o three cycles after
// valid_i. The per-layer parameters (qp_i) must stay stable while results are
// in flight. addr_i travels with the data to addr_o.
module wes_requant
  import wes_pkg::*;
#(
  parameter int unsigned AW = 21
) (
  input  logic               clk,
  input  logic               rst_n,
  input  wes_qparam_t        qp_i,
  input  logic               valid_i,
  input  logic [ACC_W-1:0]   acc_i,
  input  logic [ACC_W-1:0]   bias_i,
  input  logic [SHIFT_W-1:0] shift_i,
  input  logic [AW-1:0]      addr_i,
  output logic               valid_o,
  output logic [AW-1:0]      addr_o,
  output logic [DATA_W-1:0]  data_o
);

  localparam logic signed [63:0] I32_MAX = 64'sd2147483647;
  localparam logic signed [63:0] I32_MIN = -64'sd2147483648;

  // ---- stage 1: bias and layer exponent --------------------------------
  logic signed [ACC_W-1:0] a;
  logic signed [63:0]      a_shl;
  logic signed [ACC_W-1:0] t;

  always_comb begin
    a     = signed'(acc_i + bias_i);
    a_shl = 64'(a) <<< qp_i.s[EXP_W-2:0];
    if (qp_i.s > 0) begin
      if (a_shl > I32_MAX)      t = ACC_W'(I32_MAX);
      else if (a_shl < I32_MIN) t = ACC_W'(I32_MIN);
      else                      t = ACC_W'(a_shl);
    end else begin
      t = a >>> (7'(-7'(qp_i.s)));
    end
  end

  logic                    v1;
  logic signed [ACC_W-1:0] t1;
  logic [SHIFT_W-1:0]      sh1;
  logic [AW-1:0]           ad1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; t1 <= '0; sh1 <= '0; ad1 <= '0;
    end else begin
      v1 <= valid_i;
      if (valid_i) begin
        t1 <= t; sh1 <= shift_i; ad1 <= addr_i;
      end
    end
  end

  // ---- stage 2: channel-wise inverse shift and mantissa product ---------
  logic signed [ACC_W-1:0] u;
  logic signed [64:0]      p;

  always_comb begin
    u = t1 >>> sh1;
    p = 65'(u) * signed'({33'd0, qp_i.m});
  end

  logic               v2;
  logic signed [64:0] p2;
  logic [AW-1:0]      ad2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v2 <= 1'b0; p2 <= '0; ad2 <= '0;
    end else begin
      v2 <= v1;
      if (v1) begin
        p2 <= p; ad2 <= ad1;
      end
    end
  end

  // ---- stage 3: rounding, activation, zero point, saturation -----------
  logic signed [64:0] pr;
  logic signed [33:0] r, ro;

  always_comb begin
    pr = p2 + 65'sd2147483648;             // + 2^31: round half up
    r  = 34'(pr >>> 32);
    if (qp_i.relu && r < 0) r = '0;
    ro = r + signed'({26'd0, qp_i.z_out});
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_o <= 1'b0; addr_o <= '0; data_o <= '0;
    end else begin
      valid_o <= v2;
      if (v2) begin
        addr_o <= ad2;
        if (ro < 0)        data_o <= 8'd0;
        else if (ro > 255) data_o <= 8'd255;
        else               data_o <= ro[7:0];
      end
    end
  end

endmodule
