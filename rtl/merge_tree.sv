// merge_tree: a full binary tree of node FIFOs that merges up to 2^LAYERS
// sorted COO streams into one, with one shared array_merger per layer.
//
// Follows the paper's merge tree: every tree node is a FIFO, input streams
// enter the leaf FIFOs, and a merger reads two sibling FIFOs and writes their
// parent. The root has a single merger and bounds the throughput, so every
// layer shares one merger among all its nodes (LAYERS mergers in total, one
// firing of N elements per layer per cycle). Nodes are numbered as a heap:
// node 1 is the root, node p has children 2p and 2p+1, and leaf l is node
// 2^LAYERS + l. In front of every leaf sits a multiplexer that takes the
// leaf's data either from the multiplier array or from the partial matrix
// fetcher, selected per leaf by leaf_src_i (1 = partial matrix fetcher).
//
// This design's own choices, where the paper is silent: node FIFO depth
// (DEPTH), the round-robin choice of which node a layer's merger serves, and
// the end-of-stream rule. A merger may fire for parent p when each child holds
// at least N elements or will receive no more, at least one child holds
// something, and the parent has room for N more elements beyond those already
// promised to firings in flight. A node receives no more elements when both
// its children receive no more, are empty and nothing is in flight to it; for
// a leaf this is leaf_done_i.
//
// Interface: mul_* and pmf_* each push up to N compacted elements into one
// leaf per cycle; the producer checks leaf_free_o first. out_head_o /
// out_count_o show the root FIFO, out_pop_i removes from it. out_done_o is
// high when every stream has been merged and the root FIFO is empty.
module merge_tree
  import sparch_pkg::*;
#(
  parameter int unsigned N      = 16,
  parameter int unsigned LAYERS = 6,
  parameter int unsigned DEPTH  = 64
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [2**LAYERS-1:0]       leaf_src_i,
  input  logic [2**LAYERS-1:0]       leaf_done_i,
  input  logic                       mul_valid_i,
  input  logic [LAYERS-1:0]          mul_leaf_i,
  input  logic [$clog2(N+1)-1:0]     mul_cnt_i,
  input  elem_t [N-1:0]                      mul_d_i ,
  input  logic                       pmf_valid_i,
  input  logic [LAYERS-1:0]          pmf_leaf_i,
  input  logic [$clog2(N+1)-1:0]     pmf_cnt_i,
  input  elem_t [N-1:0]                      pmf_d_i ,
  output logic [$clog2(DEPTH+1)-1:0] leaf_free_o [2**LAYERS],
  output lane_t [N-1:0]                      out_head_o ,
  output logic [$clog2(DEPTH+1)-1:0] out_count_o,
  input  logic [$clog2(N+1)-1:0]     out_pop_i,
  output logic                       out_done_o,
  output logic [31:0]                fire_count_o [LAYERS]
);
  localparam int unsigned P  = 2**LAYERS;
  localparam int unsigned CW = $clog2(DEPTH+1);
  localparam int unsigned PW = $clog2(N+1);

  lane_t [N-1:0]          head_all  [2*P];
  logic [CW-1:0]  count_all [2*P];
  logic [CW-1:0]  free_all  [2*P];
  logic [PW-1:0]  push_cnt  [2*P];
  elem_t [N-1:0]          push_d    [2*P];
  logic [PW-1:0]  pop_cnt   [2*P];
  logic           no_more   [2*P];   // node will receive no more elements
  logic           node_ready[P];     // merger may fire for parent p

  // ---------------- one shared merger per layer ----------------
  for (genvar d = 0; d < LAYERS; d++) begin : g_layer
    localparam int unsigned NP   = 2**d;
    localparam int unsigned BASE = 2**d;
    localparam int unsigned SW   = (d == 0) ? 1 : d;

    logic [SW-1:0]     rr_q, sel;
    logic              any;
    lane_t [N-1:0]             a_head ;
    lane_t [N-1:0]             b_head ;
    logic [CW-1:0]     a_cnt, b_cnt;
    logic              a_done, b_done;
    logic              ready, fire;
    logic [PW-1:0]     pop_a, pop_b;
    lane_t [N-1:0]             out ;
    logic [PW-1:0]     out_cnt;
    logic              out_valid;
    logic [LAYERS-1:0] out_tag;
    logic [31:0]       fires_q;

    always_comb begin
      int unsigned idx;
      any = 1'b0;
      sel = '0;
      for (int unsigned k = 0; k < NP; k++) begin
        idx = (int'(rr_q) + k) % NP;
        if (!any && node_ready[BASE + idx]) begin
          any = 1'b1;
          sel = SW'(idx);
        end
      end
      a_head = head_all[2*(BASE + int'(sel))];
      b_head = head_all[2*(BASE + int'(sel)) + 1];
      a_cnt  = count_all[2*(BASE + int'(sel))];
      b_cnt  = count_all[2*(BASE + int'(sel)) + 1];
      a_done = no_more[2*(BASE + int'(sel))];
      b_done = no_more[2*(BASE + int'(sel)) + 1];
    end

    array_merger #(.N(N), .TAG_W(LAYERS), .CNT_W(CW)) u_merger (
      .clk(clk), .rst_n(rst_n),
      .a_head_i(a_head), .a_cnt_i(a_cnt), .a_done_i(a_done),
      .b_head_i(b_head), .b_cnt_i(b_cnt), .b_done_i(b_done),
      .en_i(any), .tag_i(LAYERS'(sel)),
      .ready_o(ready), .fire_o(fire), .pop_a_o(pop_a), .pop_b_o(pop_b),
      .out_o(out), .out_cnt_o(out_cnt), .out_valid_o(out_valid),
      .out_tag_o(out_tag)
    );

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        rr_q    <= '0;
        fires_q <= '0;
      end else if (fire) begin
        rr_q    <= SW'((int'(sel) + 1) % NP);
        fires_q <= fires_q + 1;
      end
    end
    assign fire_count_o[d] = fires_q;

    // the node chosen by the scheduler is one the merger can serve
    a_sel_ready: assert property (@(posedge clk) disable iff (!rst_n) any |-> ready);
  end

  // ---------------- node FIFOs ----------------
  for (genvar n = 1; n < 2*P; n++) begin : g_node
    localparam int unsigned DN  = $clog2(n + 1) - 1;        // depth of node n
    localparam int unsigned DP  = (n > 1) ? $clog2(n / 2 + 1) - 1 : 0;  // depth of parent

    // pop: by the parent's layer merger, or by the consumer at the root
    if (n == 1) begin : g_root_pop
      assign pop_cnt[n] = out_pop_i;
    end else begin : g_pop
      assign pop_cnt[n] =
        (g_layer[DP].fire && int'(g_layer[DP].sel) == n / 2 - 2**DP)
          ? ((n % 2 == 0) ? g_layer[DP].pop_a : g_layer[DP].pop_b) : '0;
    end

    if (n >= P) begin : g_leaf
      localparam int unsigned L = n - P;
      logic take_mul, take_pmf;
      always_comb begin
        take_mul = mul_valid_i && int'(mul_leaf_i) == L && !leaf_src_i[L];
        take_pmf = pmf_valid_i && int'(pmf_leaf_i) == L &&  leaf_src_i[L];
        push_cnt[n] = take_mul ? mul_cnt_i : (take_pmf ? pmf_cnt_i : '0);
        push_d[n] = take_pmf ? pmf_d_i : mul_d_i;
      end
      assign no_more[n]     = leaf_done_i[L];
      assign leaf_free_o[L] = free_all[n];
      // data must arrive through the source the leaf multiplexer selects
      a_mux: assert property (@(posedge clk) disable iff (!rst_n)
               !(mul_valid_i && int'(mul_leaf_i) == L && leaf_src_i[L]) &&
               !(pmf_valid_i && int'(pmf_leaf_i) == L && !leaf_src_i[L]));
    end else begin : g_inner
      logic          push;
      logic [CW+1:0] resv_q;                 // places promised to firings in flight
      logic          fire_here;
      always_comb begin
        push      = g_layer[DN].out_valid && int'(g_layer[DN].out_tag) == n - 2**DN;
        fire_here = g_layer[DN].fire && int'(g_layer[DN].sel) == n - 2**DN;
        push_cnt[n] = push ? g_layer[DN].out_cnt : '0;
        for (int k = 0; k < N; k++) push_d[n][k] = g_layer[DN].out[k].e;  // drop valid bits
        node_ready[n] = (count_all[2*n] >= CW'(N) || no_more[2*n]) &&
                        (count_all[2*n+1] >= CW'(N) || no_more[2*n+1]) &&
                        (count_all[2*n] != '0 || count_all[2*n+1] != '0) &&
                        ((CW+2)'(free_all[n]) >= resv_q + (CW+2)'(N));
      end
      assign no_more[n] = no_more[2*n] && no_more[2*n+1] &&
                          count_all[2*n] == '0 && count_all[2*n+1] == '0 && resv_q == '0;
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) resv_q <= '0;
        else resv_q <= resv_q + (fire_here ? (CW+2)'(N) : '0) - (push ? (CW+2)'(N) : '0);
      end
    end

    lane_fifo #(.N(N), .DEPTH(DEPTH)) u_fifo (
      .clk(clk), .rst_n(rst_n),
      .push_cnt_i(push_cnt[n]), .push_i(push_d[n]),
      .pop_cnt_i(pop_cnt[n]),
      .head_o(head_all[n]), .count_o(count_all[n]), .free_o(free_all[n])
    );
  end

  // node 0 does not exist; tie its slots off
  assign push_cnt[0]  = '0;
  assign pop_cnt[0]   = '0;
  assign no_more[0]   = 1'b1;
  assign node_ready[0] = 1'b0;
  assign push_d[0]   = '0;
  assign head_all[0] = '0;
  assign count_all[0] = '0;
  assign free_all[0]  = '0;

  assign out_head_o  = head_all[1];
  assign out_count_o = count_all[1];
  assign out_done_o  = no_more[1] && count_all[1] == '0;

endmodule
