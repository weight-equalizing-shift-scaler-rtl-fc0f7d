// tb_wes_sparse_decoder: checks the pruned-weight expander.
//
// Builds random pruned weight sets (about 20 % and 60 % zeros, lengths that
// are and are not multiples of 8), encodes them as mask bytes plus packed
// non-zero values, feeds the two streams with random gaps or with no gaps,
// and compares every dense write (address and value, z_w for pruned
// weights). With gap-free streams it checks 9 cycles per 8 weights, and it
// checks the error flag for a wrong non-zero count.
module tb_wes_sparse_decoder;
  import wes_pkg::*;
  localparam int unsigned AW = 12;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              start_i = 0;
  logic [AW:0]       n_dense_i, nnz_i;
  logic [DATA_W-1:0] z_w_i;
  logic              mask_valid_i = 0, mask_ready_o, val_valid_i = 0, val_ready_o;
  logic [7:0]        mask_i;
  logic [DATA_W-1:0] val_i;
  logic              busy_o, wr_en_o, done_o, err_o;
  logic [AW-1:0]     wr_addr_o;
  logic [DATA_W-1:0] wr_data_o;

  wes_sparse_decoder #(.AW(AW)) dut (.*);

  int checks = 0, failures = 0;
  logic [7:0] dense [$], masks [$], vals [$];
  int wr_count;
  bit gaps;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // stream drivers: present data, advance on handshake
  int mi, vi;
  always @(negedge clk) begin
    mask_valid_i <= (mi < masks.size()) && (!gaps || $urandom_range(0, 2) != 0);
    mask_i       <= (mi < masks.size()) ? masks[mi] : 8'h00;
    val_valid_i  <= (vi < vals.size()) && (!gaps || $urandom_range(0, 2) != 0);
    val_i        <= (vi < vals.size()) ? vals[vi] : 8'h00;
  end
  always @(posedge clk) begin
    if (mask_valid_i && mask_ready_o) mi <= mi + 1;
    if (val_valid_i && val_ready_o)   vi <= vi + 1;
  end

  always @(posedge clk) if (rst_n && wr_en_o) begin
    checks++;
    if (int'(wr_addr_o) >= dense.size() || wr_data_o !== dense[wr_addr_o] || int'(wr_addr_o) != wr_count) begin
      failures++; $display("FAIL write addr %0d data %0h", wr_addr_o, wr_data_o);
    end
    wr_count <= wr_count + 1;
  end

  task automatic run(int n, int zero_pct, bit with_gaps, int nnz_adjust);
    int nnz = 0, cyc = 0;
    logic [7:0] m;
    dense.delete(); masks.delete(); vals.delete();
    z_w_i = DATA_W'($urandom());
    for (int e = 0; e < n; e++) begin
      bit keep = ($urandom_range(0, 99) >= zero_pct);
      if (e % 8 == 0) m = 8'h00;
      if (keep) begin
        logic [7:0] v = 8'($urandom());
        m[e % 8] = 1'b1; vals.push_back(v); dense.push_back(v); nnz++;
      end else dense.push_back(z_w_i);
      if (e % 8 == 7 || e == n - 1) masks.push_back(m);
    end
    @(negedge clk);
    gaps = with_gaps; mi = 0; vi = 0; wr_count = 0;
    n_dense_i = (AW+1)'(n); nnz_i = (AW+1)'(nnz + nnz_adjust);
    start_i = 1;
    @(negedge clk); start_i = 0;
    while (!done_o) begin @(negedge clk); cyc++; end
    @(negedge clk);                 // let the last write be recorded
    checks++;
    if (wr_count != n) begin failures++; $display("FAIL wrote %0d of %0d", wr_count, n); end
    checks++;
    if (err_o != (nnz_adjust != 0)) begin failures++; $display("FAIL err=%0b", err_o); end
    if (!with_gaps) begin
      checks++;
      // one cycle per mask byte + one per weight; done comes with the last write
      if (cyc != n + (n + 7) / 8) begin
        failures++; $display("FAIL cycles %0d exp %0d", cyc, n + (n + 7) / 8);
      end
    end
    repeat (3) @(negedge clk);
  endtask

  initial begin
    n_dense_i = 0; nnz_i = 0; z_w_i = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(64, 20, 0, 0);
    run(61, 20, 0, 0);
    run(200, 60, 1, 0);
    run(333, 20, 1, 0);
    run(9, 100, 0, 0);
    run(40, 20, 0, 1);     // header integer one too large: error
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
