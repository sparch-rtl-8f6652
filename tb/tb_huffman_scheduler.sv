// tb_huffman_scheduler: the weights of the paper's Huffman example (twelve
// partial matrices, 15 15 13 12 9 7 3 2 2 2 2 2) are scheduled as a 2-way and
// a 4-way tree; the internal nodes must sum to 270 and 144, the totals of the
// example's trees less the leaf weights (354 - 84 and 228 - 84). Then random
// weight sets are scheduled with 2, 4 and 64 ways and compared with a k-ary
// Huffman reference. Each round's size (k_init first, then WAYS), the final
// flag, the member weights and the round ids are checked as well.
module tb_huffman_scheduler;
  localparam int NI = 3;
  localparam int WAYS_T [NI] = '{2, 4, 64};
  logic clk = 0, rst_n = 0;
  logic load_valid, start;
  logic [31:0] load_weight;
  logic        mvalid [NI], mlast [NI], mfinal [NI], mready [NI], done [NI];
  logic [15:0] mid [NI], rid [NI];
  logic [31:0] mweight [NI], total [NI];
  int checks = 0, failures = 0;

  for (genvar g = 0; g < NI; g++) begin : g_dut
    huffman_scheduler #(.WAYS(WAYS_T[g])) dut (.clk(clk), .rst_n(rst_n),
      .load_valid_i(load_valid), .load_weight_i(load_weight), .start_i(start),
      .mem_valid_o(mvalid[g]), .mem_id_o(mid[g]), .mem_weight_o(mweight[g]), .mem_last_o(mlast[g]),
      .mem_final_o(mfinal[g]), .mem_ready_i(mready[g]), .round_id_o(rid[g]), .done_o(done[g]),
      .total_o(total[g]));
  end
  always #5 clk = ~clk;
  initial begin #20ms; $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic longint ref_total(int w[$], int ways);
    longint q[$], tot, s;
    int k;
    foreach (w[i]) q.push_back(w[i]);
    tot = 0;
    if (q.size() <= 1) return 0;
    k = (q.size() - 2) % (ways - 1) + 2;
    while (q.size() > 1) begin
      q.sort();
      s = 0;
      for (int i = 0; i < k; i++) s += q.pop_front();
      tot += s; q.push_back(s);
      k = ways;
    end
    return tot;
  endfunction

  // one scheduler consumes its members with random back-pressure
  task automatic consume(int g, int n, int w[$], output longint tot_seen);
    longint wt [int];
    int members, round, next_id, exp_k, guard;
    logic saw_final;
    foreach (w[i]) wt[i] = w[i];
    next_id = n; members = 0; round = 0; tot_seen = 0; saw_final = 0; guard = 0;
    exp_k = (n <= WAYS_T[g]) ? n : (n - 2) % (WAYS_T[g] - 1) + 2;
    begin
      longint rsum = 0;
      while (!done[g] && guard < 100000) begin
        guard++;
        mready[g] = ($urandom_range(0, 3) != 0);
        @(posedge clk);
        if (mvalid[g] && mready[g]) begin
          checks++;
          if (!wt.exists(int'(mid[g])) || wt[int'(mid[g])] != longint'(mweight[g])) begin
            failures++; $display("ways %0d: member id %0d weight %0d unexpected", WAYS_T[g], mid[g], mweight[g]);
          end
          wt.delete(int'(mid[g]));
          rsum += mweight[g]; members++;
          if (mlast[g]) begin
            checks++;
            if (members != exp_k || int'(rid[g]) != next_id) begin failures++;
              $display("ways %0d round %0d: %0d members id %0d, want %0d id %0d", WAYS_T[g], round, members, rid[g], exp_k, next_id); end
            wt[next_id] = rsum; tot_seen += rsum;
            next_id++; round++; members = 0; rsum = 0; exp_k = WAYS_T[g];
            checks++;
            if (saw_final) begin failures++; $display("round after the final one"); end
            saw_final = mfinal[g];
          end
        end
        @(negedge clk);
      end
      mready[g] = 0;
      checks++;
      if (!saw_final || wt.num() != 1) begin failures++; $display("ways %0d: no final round or %0d nodes left", WAYS_T[g], wt.num()); end
    end
  endtask

  task automatic run(int w[$]);
    longint seen [NI];
    rst_n = 0; load_valid = 0; start = 0;
    foreach (mready[g]) mready[g] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    foreach (w[i]) begin
      load_valid = 1; load_weight = 32'(w[i]);
      @(negedge clk);
    end
    load_valid = 0; start = 1;
    @(negedge clk);
    start = 0;
    fork
      consume(0, w.size(), w, seen[0]);
      consume(1, w.size(), w, seen[1]);
      consume(2, w.size(), w, seen[2]);
    join
    for (int g = 0; g < NI; g++) begin
      checks++;
      if (longint'(total[g]) != ref_total(w, WAYS_T[g]) || seen[g] != longint'(total[g])) begin
        failures++; $display("ways %0d: total %0d, seen %0d, reference %0d", WAYS_T[g], total[g], seen[g], ref_total(w, WAYS_T[g]));
      end
    end
  endtask

  initial begin
    int w[$];
    load_valid = 0; start = 0; load_weight = 0;
    foreach (mready[g]) mready[g] = 0;
    w = '{15, 15, 13, 12, 9, 7, 3, 2, 2, 2, 2, 2};
    run(w);
    checks++;
    if (total[0] != 270 || total[1] != 144) begin failures++; $display("example totals %0d %0d", total[0], total[1]); end
    for (int t = 0; t < 6; t++) begin
      w.delete();
      repeat ($urandom_range(2, 300)) w.push_back($urandom_range(1, 5000));
      run(w);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
