// tb_merge_tree: all 8 leaves of a 3-layer tree (the full 6-layer tree takes
// too long to build for a unit test; the full-size top test uses it) receive sorted partial
// matrices, some through the multiplier port and some through the partial
// matrix fetcher port, in random-sized pieces that respect each leaf's free
// space. Coordinates overlap between leaves. The root must deliver the sorted
// union with the values of equal coordinates added, then raise out_done_o,
// and every layer's merger must have fired. Values are multiples of 1/8 so
// that the sums do not depend on the order of addition.
module tb_merge_tree;
  import sparch_pkg::*;
  localparam int N = 16, L = 3, P = 8, DEPTH = 64;
  logic clk = 0, rst_n = 0;
  logic [P-1:0] src, ldone;
  logic mv, pv, done;
  logic [L-1:0] ml, pl;
  logic [4:0] mc, pc, pop;
  elem_t [N-1:0] md, pd;
  logic [6:0] free [P];
  lane_t [N-1:0] head;
  logic [6:0] count;
  logic [31:0] fires [L];
  int checks = 0, failures = 0;

  merge_tree #(.N(N), .LAYERS(L), .DEPTH(DEPTH)) dut (.clk(clk), .rst_n(rst_n), .leaf_src_i(src), .leaf_done_i(ldone),
    .mul_valid_i(mv), .mul_leaf_i(ml), .mul_cnt_i(mc), .mul_d_i(md),
    .pmf_valid_i(pv), .pmf_leaf_i(pl), .pmf_cnt_i(pc), .pmf_d_i(pd),
    .leaf_free_o(free), .out_head_o(head), .out_count_o(count), .out_pop_i(pop),
    .out_done_o(done), .fire_count_o(fires));
  always #5 clk = ~clk;
  initial begin #50ms; $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  elem_t lq [P][$];
  real   ref_sum [key_t];
  elem_t got [$];

  // choose a leaf of the given source with data left and room for it
  function automatic int pick(logic s);
    int start;
    start = $urandom_range(0, P - 1);
    for (int k = 0; k < P; k++) begin
      int l;
      l = (start + k) % P;
      if (src[l] == s && lq[l].size() > 0 && free[l] > 0) return l;
    end
    return -1;
  endfunction

  task automatic fill(input int l, output logic [L-1:0] leaf, output logic [4:0] cnt, output elem_t [N-1:0] d);
    int n;
    n = $urandom_range(1, N);
    if (n > lq[l].size()) n = lq[l].size();
    if (n > int'(free[l])) n = int'(free[l]);
    leaf = L'(l); cnt = 5'(n); d = '0;
    for (int k = 0; k < n; k++) d[k] = lq[l].pop_front();
  endtask

  initial begin
    int guard;
    logic [P-1:0] empty_prev;
    mv = 0; pv = 0; ml = 0; pl = 0; mc = 0; pc = 0; md = '0; pd = '0; pop = 0; ldone = '0;
    for (int l = 0; l < P; l++) begin
      int r, c;
      src[l] = ($urandom_range(0, 3) == 0);
      r = 0; c = $urandom_range(0, 5);
      repeat ($urandom_range(0, 150)) begin
        elem_t e;
        e = '{row: 32'(r), col: 32'(c), val: $realtobits(real'($urandom_range(1, 64)) / 8.0)};
        lq[l].push_back(e);
        if (ref_sum.exists(key_of(e))) ref_sum[key_of(e)] += $bitstoreal(e.val);
        else ref_sum[key_of(e)] = $bitstoreal(e.val);
        c += $urandom_range(1, 6);
        if (c > 40) begin r++; c = $urandom_range(0, 5); end
      end
    end
    empty_prev = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    guard = 0;
    while (!done && guard < 200000) begin
      int a, b;
      guard++;
      // a leaf is done once its last piece went in an earlier cycle
      for (int l = 0; l < P; l++) begin
        ldone[l] = empty_prev[l];
        empty_prev[l] = (lq[l].size() == 0);
      end
      a = ($urandom_range(0, 3) != 0) ? pick(1'b0) : -1;
      b = ($urandom_range(0, 3) != 0) ? pick(1'b1) : -1;
      mv = (a >= 0); pv = (b >= 0);
      if (mv) fill(a, ml, mc, md); else mc = 0;
      if (pv) fill(b, pl, pc, pd); else pc = 0;
      pop = 5'($urandom_range(0, N));
      if (pop > count) pop = 5'(count);
      #1;
      for (int k = 0; k < pop; k++) begin
        checks++;
        if (!head[k].v) begin failures++; $display("root lane %0d popped but empty", k); end
        got.push_back(head[k].e);
      end
      @(negedge clk);
    end
    checks++;
    if (!done) begin failures++; $display("tree never finished"); end
    checks++;
    if (got.size() != ref_sum.num()) begin failures++; $display("%0d results, want %0d", got.size(), ref_sum.num()); end
    begin
      int i; i = 0;
      foreach (ref_sum[k]) begin
        if (i < got.size()) begin
          checks++;
          if (key_of(got[i]) != k || $bitstoreal(got[i].val) != ref_sum[k]) begin failures++;
            if (failures < 10) $display("result %0d: key %h val %f, want key %h val %f", i, key_of(got[i]),
                                        $bitstoreal(got[i].val), k, ref_sum[k]); end
        end
        i++;
      end
    end
    for (int d = 0; d < L; d++) begin
      checks++;
      if (fires[d] == 0) begin failures++; $display("layer %0d never fired", d); end
    end
    $display("fires per layer: %0d %0d %0d", fires[0], fires[1], fires[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
