// tb_matb_row_prefetcher: a random CSR matrix B sits in the test memory and a
// random stream of A elements (with exact next-use times) asks for its rows.
// For every A element the beats must carry exactly the B row's elements in
// order, paired with that A element. With the full 1024-line buffer nothing is
// spilled, so misses must equal the number of distinct lines touched and hits
// the remaining lookups. A 4-line buffer must spill and refill and still
// deliver the same data.
module tb_matb_row_prefetcher;
  import sparch_pkg::*;
  localparam int NI = 2, SEG = 16, LE = 48;
  localparam int LN [NI] = '{1024, 4};
  logic clk = 0, rst_n = 0;
  logic in_valid [NI], in_ready [NI], out_valid [NI], out_ready [NI], idle [NI];
  a_elem_t in_e [NI], out_a [NI];
  logic [31:0] in_next [NI], hits [NI], misses [NI];
  logic [4:0] out_cnt [NI];
  elem_t [SEG-1:0] out_b [NI];
  logic  rd_valid [NI], rd_ready [NI], rsp_valid [NI];
  addr_t rd_addr [NI];
  word_t rsp_data [NI];
  logic  wr_ready;
  int checks = 0, failures = 0;
  localparam addr_t PB = 32'h40, EB = 32'h400;

  tb_mem #(.RP(NI)) u_mem (.clk(clk), .rd_valid(rd_valid), .rd_addr(rd_addr), .rd_ready(rd_ready),
    .rsp_valid(rsp_valid), .rsp_data(rsp_data), .wr_valid(1'b0), .wr_addr('0), .wr_data('0),
    .wr_ready(wr_ready));
  for (genvar g = 0; g < NI; g++) begin : g_dut
    matb_row_prefetcher #(.LINES(LN[g]), .LINE_ELEMS(LE), .SEG(SEG)) dut (.clk(clk), .rst_n(rst_n),
      .ptr_base_i(PB), .elem_base_i(EB), .in_valid_i(in_valid[g]), .in_i(in_e[g]), .in_next_i(in_next[g]),
      .in_ready_o(in_ready[g]), .mem_req_valid_o(rd_valid[g]), .mem_req_addr_o(rd_addr[g]),
      .mem_req_ready_i(rd_ready[g]), .mem_rsp_valid_i(rsp_valid[g]), .mem_rsp_data_i(rsp_data[g]),
      .out_valid_o(out_valid[g]), .out_a_o(out_a[g]), .out_cnt_o(out_cnt[g]), .out_b_o(out_b[g]),
      .out_ready_i(out_ready[g]), .hit_count_o(hits[g]), .miss_count_o(misses[g]), .idle_o(idle[g]));
  end
  always #5 clk = ~clk;
  initial begin #20ms; $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  localparam int K = 30;
  int blen [K], bptr [K+1];

  task automatic run(int g, int n);
    a_elem_t src [$];
    int nxt [$], last [int];
    elem_t want_b [$];
    a_elem_t want_a [$];
    int sent, guard, lookups, distinct, h0, m0;
    int seen [int];
    lookups = 0; distinct = 0;
    for (int i = 0; i < n; i++) begin
      int c;
      c = $urandom_range(0, K - 1);
      src.push_back('{row: 32'(i), col: 32'(c), ccol: 32'($urandom_range(0, 63)), val: {$urandom, $urandom}});
      nxt.push_back(-1);
      if (last.exists(c)) nxt[last[c]] = 1000 + i;
      last[c] = i;
      lookups += (blen[c] + LE - 1) / LE;
      if (!seen.exists(c)) begin seen[c] = 1; distinct += (blen[c] + LE - 1) / LE; end
      for (int j = 0; j < blen[c]; j++) begin
        want_a.push_back(src[i]);
        want_b.push_back(elem_t'(u_mem.mem[EB + bptr[c] + j]));
      end
    end
    h0 = int'(hits[g]); m0 = int'(misses[g]);
    sent = 0; guard = 0;
    while ((sent < n || want_b.size() > 0 || !idle[g]) && guard < 500000) begin
      guard++;
      in_valid[g] = (sent < n) && ($urandom_range(0, 3) != 0);
      in_e[g]     = (sent < n) ? src[sent] : '0;
      in_next[g]  = (sent < n && nxt[sent] >= 0) ? 32'(nxt[sent]) : '1;
      out_ready[g] = ($urandom_range(0, 3) != 0);
      #1;
      if (in_valid[g] && in_ready[g]) sent++;
      if (out_valid[g] && out_ready[g]) begin
        for (int k = 0; k < out_cnt[g]; k++) begin
          checks++;
          if (want_b.size() == 0) begin failures++; $display("lines %0d: extra data", LN[g]); break; end
          if (out_a[g] !== want_a[0] || out_b[g][k].col !== want_b[0].col || out_b[g][k].val !== want_b[0].val) begin
            failures++; if (failures < 10) $display("lines %0d: beat element wrong", LN[g]);
          end
          void'(want_a.pop_front()); void'(want_b.pop_front());
        end
      end
      @(negedge clk);
    end
    in_valid[g] = 0; out_ready[g] = 0;
    checks++;
    if (want_b.size() != 0 || int'(hits[g]) - h0 + int'(misses[g]) - m0 != lookups) begin failures++;
      $display("lines %0d: %0d left, lookups %0d+%0d want %0d", LN[g], want_b.size(), hits[g]-h0, misses[g]-m0, lookups); end
    if (g == 0) begin
      checks++;
      if (int'(misses[g]) - m0 != distinct) begin failures++; $display("misses %0d, distinct lines %0d", misses[g]-m0, distinct); end
    end else begin
      checks++;
      if (int'(misses[g]) - m0 <= distinct) begin failures++; $display("small buffer did not spill"); end
    end
  endtask

  initial begin
    foreach (in_valid[g]) begin in_valid[g] = 0; out_ready[g] = 0; in_e[g] = '0; in_next[g] = '1; end
    bptr[0] = 0;
    for (int k = 0; k < K; k++) begin
      blen[k] = (k % 7 == 0) ? $urandom_range(49, 130) : $urandom_range(0, 40);
      bptr[k+1] = bptr[k] + blen[k];
      u_mem.mem[PB + k] = word_t'(bptr[k]);
      for (int j = 0; j < blen[k]; j++)
        u_mem.mem[EB + bptr[k] + j] = {32'h0, 32'(j * 5 + k), $realtobits(real'(k) + real'(j) / 4.0)};
    end
    u_mem.mem[PB + K] = word_t'(bptr[K]);
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(0, 150);
    run(1, 150);
    $display("hits %0d/%0d misses %0d/%0d", hits[0], hits[1], misses[0], misses[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
