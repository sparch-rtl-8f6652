// tb_partial_matrix_fetcher: partial results of random lengths are stored in
// the test memory and assigned to random leaves. A model of each leaf FIFO is
// drained at random; the fetcher must never overfill one, must deliver each
// leaf's list in order and complete, and must raise every leaf's done flag.
module tb_partial_matrix_fetcher;
  import sparch_pkg::*;
  localparam int P = 64, DEPTH = 64;
  logic clk = 0, rst_n = 0;
  logic start, out_valid;
  logic [P-1:0] cfg_en, leaf_done;
  addr_t cfg_addr [P];
  logic [31:0] cfg_len [P];
  logic [6:0] leaf_free [P];
  logic [5:0] out_leaf;
  logic [4:0] out_cnt;
  elem_t [15:0] out_d;
  logic  rd_valid [1], rd_ready [1], rsp_valid [1];
  addr_t rd_addr [1];
  word_t rsp_data [1];
  logic  wr_ready;
  int checks = 0, failures = 0;

  tb_mem #(.RP(1)) u_mem (.clk(clk), .rd_valid(rd_valid), .rd_addr(rd_addr), .rd_ready(rd_ready),
    .rsp_valid(rsp_valid), .rsp_data(rsp_data), .wr_valid(1'b0), .wr_addr('0), .wr_data('0),
    .wr_ready(wr_ready));
  partial_matrix_fetcher dut (.clk(clk), .rst_n(rst_n), .start_i(start), .cfg_en_i(cfg_en),
    .cfg_addr_i(cfg_addr), .cfg_len_i(cfg_len), .leaf_free_i(leaf_free),
    .mem_req_valid_o(rd_valid[0]), .mem_req_addr_o(rd_addr[0]), .mem_req_ready_i(rd_ready[0]),
    .mem_rsp_valid_i(rsp_valid[0]), .mem_rsp_data_i(rsp_data[0]), .out_valid_o(out_valid),
    .out_leaf_o(out_leaf), .out_cnt_o(out_cnt), .out_o(out_d), .leaf_done_o(leaf_done));
  always #5 clk = ~clk;
  initial begin #20ms; $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    int occ [P];
    start = 0; cfg_en = '0;
    foreach (cfg_addr[l]) begin cfg_addr[l] = 0; cfg_len[l] = 0; leaf_free[l] = 7'(DEPTH); occ[l] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 4; run++) begin
      elem_t want [P][$];
      int base, guard, total;
      base = 32'h100; total = 0;
      for (int l = 0; l < P; l++) begin
        want[l].delete();
        cfg_en[l] = ($urandom_range(0, 2) == 0);
        cfg_len[l] = cfg_en[l] ? 32'($urandom_range(0, 150)) : 32'($urandom);
        cfg_addr[l] = 32'(base);
        if (cfg_en[l]) begin
          for (int i = 0; i < cfg_len[l]; i++) begin
            elem_t e;
            e = '{row: 32'(i / 4), col: 32'(l * 10 + i % 4), val: {$urandom, $urandom}};
            u_mem.mem[base + i] = e;
            want[l].push_back(e);
          end
          base += cfg_len[l]; total += cfg_len[l];
        end
        occ[l] = 0; leaf_free[l] = 7'(DEPTH);
      end
      start = 1; @(negedge clk); start = 0;
      guard = 0;
      while (guard < 100000) begin
        int dl;
        guard++;
        #1;
        if (out_valid) begin
          checks++;
          if (out_cnt != 1 || !cfg_en[out_leaf] || want[out_leaf].size() == 0 || out_d[0] !== want[out_leaf][0]) begin
            failures++; if (failures < 10) $display("run %0d leaf %0d: wrong element", run, out_leaf);
          end
          if (want[out_leaf].size() > 0) void'(want[out_leaf].pop_front());
          occ[out_leaf]++;
          checks++;
          if (occ[out_leaf] > DEPTH) begin failures++; $display("leaf %0d overfilled", out_leaf); end
        end
        @(negedge clk);
        // the tree drains a random leaf
        dl = $urandom_range(0, P - 1);
        occ[dl] -= (occ[dl] < 16) ? occ[dl] : 16;
        foreach (leaf_free[l]) leaf_free[l] = 7'(DEPTH - occ[l]);
        if (leaf_done == '1) begin
          int left; left = 0;
          foreach (want[l]) left += want[l].size();
          if (left == 0) break;
        end
      end
      for (int l = 0; l < P; l++) begin
        checks++;
        if (want[l].size() != 0 || !leaf_done[l]) begin failures++;
          if (failures < 10) $display("run %0d leaf %0d: %0d missing, done %0d", run, l, want[l].size(), leaf_done[l]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
