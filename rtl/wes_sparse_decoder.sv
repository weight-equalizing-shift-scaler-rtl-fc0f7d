// wes_sparse_decoder: expands pruned weights into the dense weight buffer.
//
// Pruned weights are stored as one mask bit per weight (1 = kept), the kept
// weights packed back to back, and one integer giving how many were kept.
// The decoder reads the mask on one ready/valid stream, 8 bits per beat,
// least significant bit first, and the packed weights on a second stream.
// It writes the dense weights to consecutive addresses from 0: a kept weight
// is taken from the value stream, a pruned one is written as the weight zero
// point z_w, since a real zero quantizes exactly to the zero point.
// The mask/value split into two streams, the bit order and the handshake are
// this design's choices.
//
// Timing: after start_i (while idle) it writes one dense weight per cycle in
// which the next value is available, plus one cycle to load each mask byte,
// i.e. 9 cycles per 8 weights with streams that never stall. done_o pulses
// together with the last write; err_o (held until the next start) flags that the
// number of packed weights consumed differs from nnz_i. busy_o covers the
// whole load including the last write, so it can steer a shared write port.
module wes_sparse_decoder
  import wes_pkg::*;
#(
  parameter int unsigned AW = 22
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start_i,
  input  logic [AW:0]       n_dense_i,   // number of dense weights, >= 1
  input  logic [AW:0]       nnz_i,       // number of packed non-zero weights
  input  logic [DATA_W-1:0] z_w_i,
  input  logic              mask_valid_i,
  output logic              mask_ready_o,
  input  logic [7:0]        mask_i,
  input  logic              val_valid_i,
  output logic              val_ready_o,
  input  logic [DATA_W-1:0] val_i,
  output logic              busy_o,
  output logic              wr_en_o,
  output logic [AW-1:0]     wr_addr_o,
  output logic [DATA_W-1:0] wr_data_o,
  output logic              done_o,
  output logic              err_o
);

  logic              busy, have_mask;
  logic [7:0]        mask_q;
  logic [2:0]        bitpos;
  logic [AW:0]       idx, n_dense, nnz, used;
  logic [DATA_W-1:0] z_w;
  logic              cur_bit, step;

  assign cur_bit      = mask_q[bitpos];
  assign mask_ready_o = busy && !have_mask;
  assign val_ready_o  = busy && have_mask && cur_bit;
  // a dense weight is produced when the mask bit is known and, for a kept
  // weight, its value is present
  assign step         = busy && have_mask && (!cur_bit || val_valid_i);
  assign busy_o       = busy || wr_en_o;   // until the last write has left

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; have_mask <= 1'b0; mask_q <= '0; bitpos <= '0;
      idx <= '0; n_dense <= '0; nnz <= '0; used <= '0; z_w <= '0;
      wr_en_o <= 1'b0; wr_addr_o <= '0; wr_data_o <= '0;
      done_o <= 1'b0; err_o <= 1'b0;
    end else begin
      wr_en_o <= 1'b0;
      done_o  <= 1'b0;
      if (!busy) begin
        if (start_i) begin
          busy <= 1'b1; have_mask <= 1'b0; bitpos <= '0;
          idx <= '0; used <= '0; err_o <= 1'b0;
          n_dense <= n_dense_i; nnz <= nnz_i; z_w <= z_w_i;
        end
      end else if (!have_mask) begin
        if (mask_valid_i) begin
          mask_q    <= mask_i;
          have_mask <= 1'b1;
        end
      end else if (step) begin
        wr_en_o   <= 1'b1;
        wr_addr_o <= AW'(idx);
        wr_data_o <= cur_bit ? val_i : z_w;
        if (cur_bit) used <= used + 1'b1;
        idx    <= idx + 1'b1;
        bitpos <= bitpos + 1'b1;
        if (bitpos == 3'd7) have_mask <= 1'b0;
        if (idx + 1'b1 == n_dense) begin
          busy   <= 1'b0;
          done_o <= 1'b1;
          err_o  <= ((used + (AW+1)'(cur_bit)) != nnz);
        end
      end
    end
  end

endmodule
