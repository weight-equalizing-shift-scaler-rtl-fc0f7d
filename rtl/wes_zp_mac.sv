// wes_zp_mac: zero-point-corrected multiply-accumulate.
//
// For each MAC beat it computes (q_in - z_in) * (q_w - z_w) with both
// differences taken as 16-bit signed values (9 significant bits), and adds
// the product to a 32-bit accumulator that wraps on overflow. A finish beat
// closes the current output: the accumulator is presented on sum_o together
// with the side-band tag (valid_o high for one cycle, one cycle after the
// beat) and cleared for the next output. The arithmetic is the inner loop of
// the method's fixed-point operator; the beat/tag interface is this design's.
// A beat may not be both MAC and finish.
module wes_zp_mac
  import wes_pkg::*;
#(
  parameter int unsigned TAG_W = 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              mac_i,     // accumulate this beat
  input  logic              fin_i,     // end of output: emit and clear
  input  logic [DATA_W-1:0] q_in_i,
  input  logic [DATA_W-1:0] q_w_i,
  input  logic [DATA_W-1:0] z_in_i,
  input  logic [DATA_W-1:0] z_w_i,
  input  logic [TAG_W-1:0]  tag_i,
  output logic              valid_o,
  output logic [ACC_W-1:0]  sum_o,
  output logic [TAG_W-1:0]  tag_o
);

  logic signed [15:0]      d_in, d_w;
  logic signed [ACC_W-1:0] prod;
  logic signed [ACC_W-1:0] acc_q;

  always_comb begin
    d_in = signed'({8'd0, q_in_i}) - signed'({8'd0, z_in_i});
    d_w  = signed'({8'd0, q_w_i})  - signed'({8'd0, z_w_i});
    prod = ACC_W'(d_in * d_w);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q   <= '0;
      valid_o <= 1'b0;
      sum_o   <= '0;
      tag_o   <= '0;
    end else begin
      valid_o <= fin_i;
      if (fin_i) begin
        sum_o <= acc_q;
        tag_o <= tag_i;
        acc_q <= '0;
      end else if (mac_i) begin
        acc_q <= acc_q + prod;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(mac_i && fin_i))
    else $error("wes_zp_mac: beat is both MAC and finish");

endmodule
