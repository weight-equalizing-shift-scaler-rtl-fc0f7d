// wes_conv_ctrl: loop controller and address generator of the convolution.
//
// Runs the loop nest of the fixed-point operator for one layer. For every
// output pixel (y, x) and output channel z it walks the kernel taps (row j,
// column i) and, for a tap that lies inside the input, the input channels k.
// Each such (j, i, k) is one MAC beat: the controller presents the input
// address (iy*w_in + ix)*c_in + k and the weight address
// ((j*w_w + i)*c_in + k)*c_out + z, the layouts given by the method. A tap
// that falls into the zero padding is skipped: it costs one idle cycle and
// issues nothing. After the last tap a finish beat carries z and the output
// address (y*w_out + x)*c_out + z to the output stage.
//
// In depthwise mode the input channel is z and the weight address is
// (j*w_w + i)*c_out + z (one filter per channel); this layout, the loop
// order (y, x, z, then j, i, k) and the one-beat-per-cycle rate are this
// design's choices.
//
// Interface: cfg_i is latched on start_i while idle; busy_o stays high until
// the last finish beat has been issued, and done_o pulses in the cycle after
// it. Beats (mac_o / fin_o and the addresses) are registered outputs.
// Cycles per output = (sum over in-bounds taps of c_in, or 1 in depthwise
// mode) + (number of padded taps) + 1. All dimensions must be at least 1.
module wes_conv_ctrl
  import wes_pkg::*;
#(
  parameter int unsigned AW_IN  = 21,
  parameter int unsigned AW_W   = 22,
  parameter int unsigned AW_OUT = 21,
  parameter int unsigned CH_AW  = 11
) (
  input  logic              clk,
  input  logic              rst_n,
  input  wes_cfg_t          cfg_i,
  input  logic              start_i,
  output logic              busy_o,
  output logic              done_o,
  output wes_cfg_t          cfg_o,        // latched configuration
  output logic              mac_o,
  output logic              fin_o,
  output logic [AW_IN-1:0]  in_addr_o,
  output logic [AW_W-1:0]   w_addr_o,
  output logic [CH_AW-1:0]  ch_o,
  output logic [AW_OUT-1:0] out_addr_o
);

  typedef enum logic [1:0] {S_IDLE, S_TAP, S_FIN} state_e;

  state_e          state;
  wes_cfg_t        cfg;
  logic [DIM_W-1:0] x, y, z, k;
  logic [KDIM_W-1:0] i, j;

  // ---- combinational view of the current beat --------------------------
  localparam int unsigned IW = DIM_W + KDIM_W + 2;
  logic signed [IW-1:0] ix, iy;
  logic             tap_ok;
  logic [DIM_W-1:0] kk, k_last;
  logic             last_i, last_j, last_k, last_z, last_x, last_y;
  logic [47:0]      in_addr, w_addr, out_addr, tap;

  always_comb begin
    ix = signed'(IW'(x) * IW'(cfg.stride) + IW'(i) - IW'(cfg.pad_left));
    iy = signed'(IW'(y) * IW'(cfg.stride) + IW'(j) - IW'(cfg.pad_top));
    tap_ok = (ix >= 0) && (iy >= 0) &&
             (ix < signed'(IW'(cfg.w_in))) &&
             (iy < signed'(IW'(cfg.h_in)));
    k_last = cfg.depthwise ? DIM_W'(0) : cfg.c_in - 1'b1;
    kk     = cfg.depthwise ? z : k;
    last_k = (k == k_last);
    last_i = (i == cfg.w_w - 1'b1);
    last_j = (j == cfg.h_w - 1'b1);
    last_z = (z == cfg.c_out - 1'b1);
    last_x = (x == cfg.w_out - 1'b1);
    last_y = (y == cfg.h_out - 1'b1);
    tap      = 48'(j) * 48'(cfg.w_w) + 48'(i);
    in_addr  = (48'(iy[DIM_W-1:0]) * 48'(cfg.w_in) + 48'(ix[DIM_W-1:0]))
               * 48'(cfg.depthwise ? cfg.c_out : cfg.c_in) + 48'(kk);
    w_addr   = cfg.depthwise ? tap * 48'(cfg.c_out) + 48'(z)
                             : (tap * 48'(cfg.c_in) + 48'(k)) * 48'(cfg.c_out) + 48'(z);
    out_addr = (48'(y) * 48'(cfg.w_out) + 48'(x)) * 48'(cfg.c_out) + 48'(z);
  end

  // ---- loop counters ----------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cfg   <= '0;
      {x, y, z, k} <= '0;
      {i, j}       <= '0;
      mac_o <= 1'b0; fin_o <= 1'b0; done_o <= 1'b0;
      in_addr_o <= '0; w_addr_o <= '0; ch_o <= '0; out_addr_o <= '0;
    end else begin
      mac_o  <= 1'b0;
      fin_o  <= 1'b0;
      done_o <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (start_i) begin
            cfg   <= cfg_i;
            state <= S_TAP;
            {x, y, z, k} <= '0;
            {i, j}       <= '0;
          end
        end
        S_TAP: begin
          if (tap_ok) begin
            mac_o     <= 1'b1;
            in_addr_o <= AW_IN'(in_addr);
            w_addr_o  <= AW_W'(w_addr);
          end
          if (tap_ok && !last_k) begin
            k <= k + 1'b1;
          end else begin
            k <= '0;
            if (!last_i) i <= i + 1'b1;
            else begin
              i <= '0;
              if (!last_j) j <= j + 1'b1;
              else begin
                j     <= '0;
                state <= S_FIN;
              end
            end
          end
        end
        S_FIN: begin
          fin_o      <= 1'b1;
          ch_o       <= CH_AW'(z);
          out_addr_o <= AW_OUT'(out_addr);
          state      <= S_TAP;
          if (!last_z) z <= z + 1'b1;
          else begin
            z <= '0;
            if (!last_x) x <= x + 1'b1;
            else begin
              x <= '0;
              if (!last_y) y <= y + 1'b1;
              else begin
                y      <= '0;
                state  <= S_IDLE;
                done_o <= 1'b1;
              end
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy_o = (state != S_IDLE);
  assign cfg_o  = cfg;

endmodule
