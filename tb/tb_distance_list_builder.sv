// tb_distance_list_builder: random A elements (B rows drawn from a small set)
// pass through the look-ahead FIFO. Elements must leave in order, unchanged,
// with their sequence number; the next-use field must be the sequence number
// of the next element for the same B row when that one entered the FIFO
// while this one was still inside, and NEVER otherwise. Checked with the full
// 8192-deep FIFO and flush, and with a 16-deep FIFO that fills up and so
// releases elements before their next use is known.
module tb_distance_list_builder;
  import sparch_pkg::*;
  localparam int NI = 2;
  localparam int DEP [NI] = '{8192, 16};
  logic clk = 0, rst_n = 0;
  logic clear, flush;
  logic in_valid [NI], in_ready [NI], out_valid [NI], out_ready [NI], empty [NI];
  a_elem_t in_e [NI], out_e [NI];
  logic [31:0] out_next [NI], out_seq [NI];
  int checks = 0, failures = 0;

  for (genvar g = 0; g < NI; g++) begin : g_dut
    distance_list_builder #(.DEPTH(DEP[g]), .HASH(g == 0 ? 1024 : 64)) dut (.clk(clk), .rst_n(rst_n),
      .clear_i(clear), .in_valid_i(in_valid[g]), .in_i(in_e[g]), .in_ready_o(in_ready[g]),
      .flush_i(flush), .out_valid_o(out_valid[g]), .out_o(out_e[g]), .out_next_o(out_next[g]),
      .out_seq_o(out_seq[g]), .out_ready_i(out_ready[g]), .empty_o(empty[g]));
  end
  always #5 clk = ~clk;
  initial begin #20ms; $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic run(int g, int n);
    a_elem_t src [$];
    int nxt [$];
    int sent, recv, guard, exact, base;
    int last [int];
    for (int i = 0; i < n; i++) begin
      int c;
      c = $urandom_range(0, 40);
      src.push_back('{row: 32'(i), col: 32'(c), ccol: 32'($urandom_range(0, 63)), val: {$urandom, $urandom}});
      nxt.push_back(-1);
      if (last.exists(c)) nxt[last[c]] = i;
      last[c] = i;
    end
    sent = 0; recv = 0; guard = 0; exact = 0; base = 0;
    while (recv < n && guard < 200000) begin
      guard++;
      in_valid[g] = (sent < n) && ($urandom_range(0, 3) != 0);
      in_e[g] = (sent < n) ? src[sent] : '0;
      out_ready[g] = ($urandom_range(0, 3) != 0);
      #1;
      if (in_valid[g] && in_ready[g]) sent++;
      if (out_valid[g] && out_ready[g]) begin
        int w;
        if (recv == 0) base = int'(out_seq[g]);
        w = (nxt[recv] < 0) ? -1 : nxt[recv] + base;
        checks++;
        if (out_e[g] !== src[recv] || int'(out_seq[g]) != base + recv) begin failures++;
          if (failures < 10) $display("depth %0d: element %0d wrong or seq %0d", DEP[g], recv, out_seq[g]); end
        checks++;
        if (out_next[g] == '1) begin
          // NEVER is right when there is no next use or it was too far ahead
          if (w >= 0 && w - base - recv < DEP[g] - 1) begin failures++;
            if (failures < 10) $display("depth %0d: element %0d lost next use %0d", DEP[g], recv, w); end
        end else begin
          if (int'(out_next[g]) != w) begin failures++;
            if (failures < 10) $display("depth %0d: element %0d next %0d want %0d", DEP[g], recv, out_next[g], w); end
          else exact++;
        end
        recv++;
      end
      @(negedge clk);
      flush = (sent == n);
    end
    in_valid[g] = 0; out_ready[g] = 0;
    checks++;
    if (recv != n || exact == 0) begin failures++; $display("depth %0d: %0d of %0d out, %0d exact", DEP[g], recv, n, exact); end
  endtask

  initial begin
    clear = 0; flush = 0;
    foreach (in_valid[g]) begin in_valid[g] = 0; out_ready[g] = 0; in_e[g] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 3; rep++) begin
      clear = 1; @(negedge clk); clear = 0; flush = 0;
      run(0, $urandom_range(100, 1500));
      clear = 1; @(negedge clk); clear = 0; flush = 0;
      run(1, $urandom_range(100, 400));
      checks++;
      if (!empty[0] || !empty[1]) begin failures++; $display("not empty after a run"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
