// wes_chparam_mem: per-output-channel parameter table.
//
// Holds, for every output channel z, the quantized bias q_B[z] (32 bit,
// already divided by s_in*s_w at compile time) and the 4-bit channel-wise
// shift scale S_z of the weight equalizing shift. These are the only
// per-channel quantities of the method: the scale compound M*2^s and the
// zero points are per layer. One write port for the host, one read port with
// one cycle latency for the output stage of the engine. The depth (2048
// channels) is this design's choice.
module wes_chparam_mem
  import wes_pkg::*;
#(
  parameter int unsigned N_CH = 2048,
  localparam int unsigned AW  = (N_CH > 1) ? $clog2(N_CH) : 1
) (
  input  logic               clk,
  input  logic               we_i,
  input  logic [AW-1:0]      waddr_i,
  input  logic [ACC_W-1:0]   wbias_i,
  input  logic [SHIFT_W-1:0] wshift_i,
  input  logic               re_i,
  input  logic [AW-1:0]      raddr_i,
  output logic [ACC_W-1:0]   rbias_o,
  output logic [SHIFT_W-1:0] rshift_o
);

  typedef struct packed {
    logic [ACC_W-1:0]   bias;
    logic [SHIFT_W-1:0] shift;
  } chparam_t;

  chparam_t mem [N_CH];
  chparam_t rd_q;

  always_ff @(posedge clk) begin
    if (we_i) mem[waddr_i] <= '{bias: wbias_i, shift: wshift_i};
    if (re_i) rd_q <= mem[raddr_i];
  end

  assign rbias_o  = rd_q.bias;
  assign rshift_o = rd_q.shift;

endmodule
