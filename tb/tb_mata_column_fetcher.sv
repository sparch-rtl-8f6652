// tb_mata_column_fetcher: a random CSR matrix A sits in the test memory; a
// random set of condensed columns, each bound to a leaf, is fetched. The
// stream must hold, row by row and in selection order, element row_ptr[r]+k
// of every row r longer than k, tagged with its leaf; done_o must follow.
module tb_mata_column_fetcher;
  import sparch_pkg::*;
  localparam int MC = 64;
  logic clk = 0, rst_n = 0;
  logic start, out_valid, out_ready, done;
  addr_t ptr_base, elem_base;
  idx_t  num_rows;
  logic [6:0] sel_cnt;
  idx_t  sel_col [MC];
  logic [7:0] sel_leaf [MC];
  a_elem_t out_e;
  logic  rd_valid [1], rd_ready [1], rsp_valid [1];
  addr_t rd_addr [1];
  word_t rsp_data [1];
  logic  wr_ready;
  int checks = 0, failures = 0;

  tb_mem #(.RP(1)) u_mem (.clk(clk), .rd_valid(rd_valid), .rd_addr(rd_addr), .rd_ready(rd_ready),
    .rsp_valid(rsp_valid), .rsp_data(rsp_data), .wr_valid(1'b0), .wr_addr('0), .wr_data('0),
    .wr_ready(wr_ready));
  mata_column_fetcher dut (.clk(clk), .rst_n(rst_n), .start_i(start), .ptr_base_i(ptr_base),
    .elem_base_i(elem_base), .num_rows_i(num_rows), .sel_cnt_i(sel_cnt), .sel_col_i(sel_col),
    .sel_leaf_i(sel_leaf), .mem_req_valid_o(rd_valid[0]), .mem_req_addr_o(rd_addr[0]),
    .mem_req_ready_i(rd_ready[0]), .mem_rsp_valid_i(rsp_valid[0]), .mem_rsp_data_i(rsp_data[0]),
    .out_valid_o(out_valid), .out_o(out_e), .out_ready_i(out_ready), .done_o(done));
  always #5 clk = ~clk;
  initial begin #5ms; $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    start = 0; out_ready = 0; ptr_base = 32'h100; elem_base = 32'h1000; num_rows = 0; sel_cnt = 0;
    foreach (sel_col[i]) begin sel_col[i] = 0; sel_leaf[i] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 8; run++) begin
      int len [$], rp, maxlen, guard;
      a_elem_t want [$];
      int used [int];
      num_rows = 32'($urandom_range(1, 60));
      maxlen = (run == 0) ? 70 : 12;
      rp = 0;
      for (int r = 0; r <= num_rows; r++) begin
        u_mem.mem[ptr_base + r] = word_t'(rp);
        if (r < num_rows) begin
          len.push_back($urandom_range(0, maxlen));
          for (int i = 0; i < len[r]; i++)
            u_mem.mem[elem_base + rp + i] = {32'h0, 32'(r * 7 + i * 3), $realtobits(real'(rp + i) + 0.5)};
          rp += len[r];
        end
      end
      sel_cnt = 7'($urandom_range(0, (run == 0) ? 64 : 10));
      used.delete();
      for (int s = 0; s < sel_cnt; s++) begin
        int c;
        do c = $urandom_range(0, maxlen); while (used.exists(c));
        used[c] = 1;
        sel_col[s] = 32'(c); sel_leaf[s] = 8'(s ^ 5);
      end
      want.delete();
      for (int r = 0; r < num_rows; r++) begin
        int base;
        base = 0; for (int q = 0; q < r; q++) base += len[q];
        for (int s = 0; s < sel_cnt; s++)
          if (len[r] > int'(sel_col[s]))
            want.push_back('{row: 32'(r), col: 32'(r * 7 + int'(sel_col[s]) * 3),
                             ccol: 32'(sel_leaf[s]), val: $realtobits(real'(base + int'(sel_col[s])) + 0.5)});
      end
      start = 1; @(negedge clk); start = 0;
      guard = 0;
      while (guard < 50000) begin
        guard++;
        out_ready = ($urandom_range(0, 2) != 0);
        #1;
        if (out_valid && out_ready) begin
          checks++;
          if (want.size() == 0) begin failures++; $display("run %0d: extra element", run); end
          else if (out_e !== want[0]) begin failures++;
            if (failures < 10) $display("run %0d: got %p want %p", run, out_e, want[0]); void'(want.pop_front()); end
          else void'(want.pop_front());
        end
        @(negedge clk);
        if (done) break;
      end
      checks++;
      if (!done || want.size() != 0) begin failures++; $display("run %0d: done=%0d, %0d elements missing", run, done, want.size()); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
