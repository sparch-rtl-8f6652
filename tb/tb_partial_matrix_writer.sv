// tb_partial_matrix_writer: a model root FIFO offers a sorted element list with
// random arrival. Non-final: the list must appear as consecutive COO words.
// Final: the column/value words and the CSR row pointer array (including
// empty rows before, between and after the elements) must be written, with
// done_o and count_o at the end.
module tb_partial_matrix_writer;
  import sparch_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 0;
  logic start, fin, root_done, done;
  addr_t eb, pb;
  idx_t  nrows;
  lane_t [N-1:0] head;
  logic [6:0] rcount;
  logic [4:0] rpop;
  logic  wr_valid, wr_ready;
  addr_t wr_addr;
  word_t wr_data;
  logic [31:0] count;
  logic  rd_ready [1], rsp_valid [1];
  word_t rsp_data [1];
  logic  rdv [1];
  addr_t rda [1];
  int checks = 0, failures = 0;

  assign rdv[0] = 1'b0; assign rda[0] = '0;
  tb_mem #(.RP(1)) u_mem (.clk(clk), .rd_valid(rdv), .rd_addr(rda), .rd_ready(rd_ready),
    .rsp_valid(rsp_valid), .rsp_data(rsp_data), .wr_valid(wr_valid), .wr_addr(wr_addr),
    .wr_data(wr_data), .wr_ready(wr_ready));
  partial_matrix_writer dut (.clk(clk), .rst_n(rst_n), .start_i(start), .final_i(fin),
    .elem_base_i(eb), .ptr_base_i(pb), .num_rows_i(nrows), .root_head_i(head),
    .root_count_i(rcount), .root_pop_o(rpop), .root_done_i(root_done),
    .mem_wr_valid_o(wr_valid), .mem_wr_addr_o(wr_addr), .mem_wr_data_o(wr_data),
    .mem_wr_ready_i(wr_ready), .count_o(count), .done_o(done));
  always #5 clk = ~clk;
  initial begin #20ms; $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  elem_t q [$];
  int avail;
  task automatic drive();
    int n;
    n = (q.size() < avail) ? q.size() : avail;
    if (n > 127) n = 127;
    for (int k = 0; k < N; k++) head[k] = (k < n) ? '{v: 1'b1, e: q[k]} : '0;
    rcount = 7'(n);
    root_done = (avail >= q.size());
  endtask

  initial begin
    start = 0; fin = 0; eb = 0; pb = 0; nrows = 0; head = '0; rcount = 0; root_done = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 6; run++) begin
      elem_t all [$];
      int guard, r, ptr [$];
      fin = run % 2; eb = 32'h1000; pb = 32'h100;
      nrows = 32'($urandom_range(1, 40));
      for (int i = 0; i < 32'h2000; i++) u_mem.mem[i] = '1;
      q.delete(); all.delete();
      r = 3;
      for (int i = 0; i < $urandom_range(0, 400) && r < int'(nrows) - 2; i++) begin
        elem_t e;
        if ($urandom_range(0, 5) == 0) r += $urandom_range(1, 3);
        if (r >= int'(nrows) - 2) break;
        e = '{row: 32'(r), col: 32'(i), val: {$urandom, $urandom}};
        q.push_back(e); all.push_back(e);
      end
      avail = 0;
      start = 1; @(negedge clk); start = 0;
      guard = 0;
      while (guard < 50000) begin
        guard++;
        avail += $urandom_range(0, 20);
        drive();
        #1;
        for (int k = 0; k < rpop; k++) void'(q.pop_front());
        @(negedge clk);
        if (done && q.size() == 0) break;
      end
      root_done = 0;
      repeat (3) @(negedge clk);
      checks++;
      if (!done || int'(count) != all.size()) begin failures++; $display("run %0d: done %0d count %0d want %0d", run, done, count, all.size()); end
      foreach (all[i]) begin
        checks++;
        if (elem_t'(u_mem.mem[eb + i]) !== all[i]) begin failures++;
          if (failures < 10) $display("run %0d: element %0d not written", run, i); end
      end
      if (fin) begin
        for (int rr = 0; rr <= int'(nrows); rr++) begin
          int want; want = 0;
          foreach (all[i]) if (int'(all[i].row) < rr) want++;
          checks++;
          if (u_mem.mem[pb + rr][31:0] != 32'(want)) begin failures++;
            if (failures < 10) $display("run %0d: row_ptr[%0d] = %0d want %0d", run, rr, u_mem.mem[pb + rr][31:0], want); end
        end
      end else begin
        checks++;
        if (u_mem.mem[pb] != '1) begin failures++; $display("run %0d: pointers written for a partial result", run); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
