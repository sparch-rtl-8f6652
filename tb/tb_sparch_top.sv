// tb_sparch_top: end-to-end test of the accelerator. Random sparse A and B in
// CSR are placed in the test memory (which stands in for the HBM), the
// weights of the condensed columns are loaded, and C = A x B is computed. The
// CSR result in memory is compared with a product computed here. Values are
// multiples of 1/8, so every sum is exact whatever the merge order.
//
// The accelerator is built small here (4-way tree, 4-line row buffer, short
// look-ahead; leaf FIFOs deep enough to hold a whole partial matrix, which the
// merge tree's firing rule needs, see the merge tree notes) so that every mechanism happens on a small problem; each one is
// counted and one that never happens is a failure: several Huffman rounds,
// re-reading partial results, multi-line rows of B, row buffer hits and
// spills, the multiplier array, every merge tree layer, the adder merging
// equal coordinates, and the final CSR write.
module tb_sparch_top;
  import sparch_pkg::*;
  localparam int LAYERS = 2, WAYS = 4, LINES = 4, LE = 48;
  localparam int ROWS = 24, KB = 40, NB = 30;   // A is ROWS x KB, B is KB x NB
  localparam int MAXA = 14;                     // longest row of A
  localparam addr_t APB = 32'h100, AEB = 32'h200, BPB = 32'h800, BEB = 32'h1000,
                    CPB = 32'h4000, CEB = 32'h5000, TMP = 32'h8000;
  localparam int TIMEOUT = 400000;

  logic clk = 0, rst_n = 0;
  logic w_valid, start, done;
  logic [31:0] w_weight;
  idx_t a_ccols;
  logic  rd_valid [3], rd_ready [3], rsp_valid [3];
  addr_t rd_addr [3];
  word_t rsp_data [3];
  logic  wr_valid, wr_ready;
  addr_t wr_addr;
  word_t wr_data;
  logic [31:0] rounds, c_nnz, hits, misses, mults, htotal;
  logic [31:0] fires [LAYERS];
  int checks = 0, failures = 0;

  tb_mem #(.RP(3)) u_mem (.clk(clk), .rd_valid(rd_valid), .rd_addr(rd_addr), .rd_ready(rd_ready),
    .rsp_valid(rsp_valid), .rsp_data(rsp_data), .wr_valid(wr_valid), .wr_addr(wr_addr),
    .wr_data(wr_data), .wr_ready(wr_ready));

  sparch_top #(.LAYERS(LAYERS), .FIFO_DEPTH(2048), .LOOKAHEAD(64), .HASH(64), .LINES(LINES), .LINE_ELEMS(LE),
               .WRITER_DEPTH(64), .MAX_NODES(64)) dut (
    .clk(clk), .rst_n(rst_n),
    .a_ptr_base_i(APB), .a_elem_base_i(AEB), .a_rows_i(ROWS), .a_ccols_i(a_ccols),
    .b_ptr_base_i(BPB), .b_elem_base_i(BEB), .c_ptr_base_i(CPB), .c_elem_base_i(CEB),
    .tmp_base_i(TMP), .w_valid_i(w_valid), .w_weight_i(w_weight), .start_i(start), .done_o(done),
    .a_req_valid_o(rd_valid[0]), .a_req_addr_o(rd_addr[0]), .a_req_ready_i(rd_ready[0]),
    .a_rsp_valid_i(rsp_valid[0]), .a_rsp_data_i(rsp_data[0]),
    .b_req_valid_o(rd_valid[1]), .b_req_addr_o(rd_addr[1]), .b_req_ready_i(rd_ready[1]),
    .b_rsp_valid_i(rsp_valid[1]), .b_rsp_data_i(rsp_data[1]),
    .p_req_valid_o(rd_valid[2]), .p_req_addr_o(rd_addr[2]), .p_req_ready_i(rd_ready[2]),
    .p_rsp_valid_i(rsp_valid[2]), .p_rsp_data_i(rsp_data[2]),
    .w_req_valid_o(wr_valid), .w_req_addr_o(wr_addr), .w_req_data_o(wr_data), .w_req_ready_i(wr_ready),
    .rounds_o(rounds), .c_nnz_o(c_nnz), .row_hits_o(hits), .row_misses_o(misses), .mults_o(mults),
    .merge_fires_o(fires), .huffman_total_o(htotal));

  always #5 clk = ~clk;
  initial begin #(TIMEOUT * 10); $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  int p_reads = 0;
  always @(posedge clk) if (rd_valid[2] && rd_ready[2]) p_reads <= p_reads + 1;

  task automatic expect_true(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
    else $display("seen: %s", what);
  endtask

  int alen [ROWS], aptr [ROWS+1], acol [$], blen [KB], bptr [KB+1], bcol [$];
  real aval [$], bval [$];
  real cref [key_t];
  longint weight [MAXA];
  int ccols, products, multiline;

  function automatic longint ref_huffman(longint w [$], int ways);
    longint tot, s; int k;
    tot = 0;
    if (w.size() <= 1) return 0;
    k = (w.size() - 2) % (ways - 1) + 2;
    while (w.size() > 1) begin
      w.sort(); s = 0;
      for (int i = 0; i < k; i++) s += w.pop_front();
      tot += s; w.push_back(s); k = ways;
    end
    return tot;
  endfunction

  initial begin
    longint wq [$];
    int guard;
    w_valid = 0; w_weight = 0; start = 0; a_ccols = 0;
    // B: KB rows, some longer than one buffer line
    bptr[0] = 0; multiline = 0;
    for (int k = 0; k < KB; k++) begin
      int c;
      blen[k] = (k % 9 == 0) ? $urandom_range(LE + 1, NB) + LE : $urandom_range(0, 8);
      if (blen[k] > LE) multiline++;
      c = 0;
      for (int j = 0; j < blen[k]; j++) begin
        c += (k % 9 == 0) ? 1 : $urandom_range(1, 4);
        bcol.push_back(c); bval.push_back(real'($urandom_range(1, 16)) / 8.0);
      end
      bptr[k+1] = bptr[k] + blen[k];
    end
    // A: ROWS rows, sorted distinct columns
    aptr[0] = 0; ccols = 0;
    for (int r = 0; r < ROWS; r++) begin
      int c;
      alen[r] = $urandom_range(0, MAXA);
      if (r == 3) alen[r] = MAXA;
      c = -1;
      for (int i = 0; i < alen[r]; i++) begin
        c += $urandom_range(1, 2);
        acol.push_back(c); aval.push_back(real'($urandom_range(1, 16)) / 8.0);
      end
      aptr[r+1] = aptr[r] + alen[r];
      if (alen[r] > ccols) ccols = alen[r];
    end
    foreach (weight[k]) weight[k] = 0;
    products = 0;
    for (int r = 0; r < ROWS; r++)
      for (int i = 0; i < alen[r]; i++) begin
        int k; k = acol[aptr[r] + i];
        weight[i] += blen[k];
        for (int j = 0; j < blen[k]; j++) begin
          key_t key; key = {32'(r), 32'(bcol[bptr[k] + j])};
          if (cref.exists(key)) cref[key] += aval[aptr[r] + i] * bval[bptr[k] + j];
          else cref[key] = aval[aptr[r] + i] * bval[bptr[k] + j];
          products++;
        end
      end
    // memory image
    repeat (2) @(negedge clk);
    for (int r = 0; r <= ROWS; r++) u_mem.mem[APB + r] = word_t'(aptr[r]);
    foreach (acol[i]) u_mem.mem[AEB + i] = {32'h0, 32'(acol[i]), $realtobits(aval[i])};
    for (int k = 0; k <= KB; k++) u_mem.mem[BPB + k] = word_t'(bptr[k]);
    foreach (bcol[i]) u_mem.mem[BEB + i] = {32'h0, 32'(bcol[i]), $realtobits(bval[i])};
    a_ccols = 32'(ccols);
    rst_n = 1;
    @(negedge clk);
    for (int k = 0; k < ccols; k++) begin
      w_valid = 1; w_weight = 32'(weight[k]); wq.push_back(weight[k]);
      @(negedge clk);
    end
    w_valid = 0; start = 1;
    @(negedge clk);
    start = 0;
    guard = 0;
    while (!done && guard < TIMEOUT) begin guard++; @(negedge clk); end
    checks++;
    if (!done) begin failures++; $display("FAIL: accelerator did not finish"); end
    // the result
    checks++;
    if (int'(c_nnz) != cref.num()) begin failures++; $display("FAIL: C has %0d nonzeros, want %0d", c_nnz, cref.num()); end
    begin
      int i, r, bad;
      i = 0; bad = 0;
      foreach (cref[key]) begin
        elem_t e; e = elem_t'(u_mem.mem[CEB + i]);
        checks++;
        if (e.col != key[31:0] || $bitstoreal(e.val) != cref[key]) begin
          failures++; bad++;
          if (bad < 8) $display("FAIL: C element %0d is (%0d,%0d)=%f, want (%0d,%0d)=%f", i, e.row, e.col,
                                $bitstoreal(e.val), key[63:32], key[31:0], cref[key]);
        end
        i++;
      end
      for (r = 0; r <= ROWS; r++) begin
        int want; want = 0;
        foreach (cref[key]) if (int'(key[63:32]) < r) want++;
        checks++;
        if (u_mem.mem[CPB + r][31:0] != 32'(want)) begin failures++;
          if (bad++ < 8) $display("FAIL: C row_ptr[%0d] = %0d, want %0d", r, u_mem.mem[CPB + r][31:0], want); end
      end
    end
    // the mechanisms
    $display("rounds %0d, products %0d, C nnz %0d, hits %0d, misses %0d, partial reads %0d",
             rounds, mults, c_nnz, hits, misses, p_reads);
    expect_true(rounds > 1, "several Huffman rounds");
    expect_true(htotal == 32'(ref_huffman(wq, WAYS)), "Huffman schedule matches the reference tree");
    expect_true(p_reads > 0, "partial results read back into the tree");
    expect_true(multiline > 0 && misses > 0, "rows of B longer than one buffer line");
    expect_true(hits > 0, "row buffer hits");
    expect_true(misses > 32'(KB / 2), "row buffer spills and refills");
    expect_true(int'(mults) == products, "multiplier array computed every product");
    for (int d = 0; d < LAYERS; d++) expect_true(fires[d] > 0, $sformatf("merge tree layer %0d merging", d));
    expect_true(int'(c_nnz) < products, "adder merged equal coordinates");
    expect_true(done && int'(c_nnz) == cref.num(), "final CSR written");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
