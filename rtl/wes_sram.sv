// wes_sram: on-chip buffer with one write port and one read port.
//
// Used three times in the convolution engine: input feature map buffer,
// weight buffer and output feature map buffer, all holding uint8 values.
// A write takes effect at the clock edge; a read returns the word addressed
// in the previous cycle (one cycle latency, registered output), which is how
// a synchronous SRAM macro behaves. The memory is a plain array so that a
// synthesis flow can map it to a macro of its choice; the contents are not
// reset. The sizes are this design's choice, picked to hold most single
// layers of common ImageNet networks.
module wes_sram #(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned DW    = 8,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we_i,
  input  logic [AW-1:0] waddr_i,
  input  logic [DW-1:0] wdata_i,
  input  logic          re_i,
  input  logic [AW-1:0] raddr_i,
  output logic [DW-1:0] rdata_o
);

  logic [DW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we_i) mem[waddr_i] <= wdata_i;
    if (re_i) rdata_o <= mem[raddr_i];
  end

endmodule
