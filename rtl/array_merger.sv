// array_merger: streaming binary merger with adder slice and zero eliminator.
//
// Each firing takes a window of up to N elements from the head of each of two
// sorted input streams (A and B, held in FIFOs outside this block), merges the
// 2N elements with the comparator array, and emits the N smallest. Those N are
// final: any element not yet seen is at least as large as the largest element
// of its own window, and each of the N smallest is not larger than that. The
// window of each stream therefore advances by the number of its elements that
// were emitted, and the merger produces N elements per firing. (The paper
// moves one window forward by N per cycle; emitting the N smallest of both
// windows is this design's variant with the same throughput.) If element N-1
// and element N of the merged list have the same coordinate, only N-1 are
// taken, so that equal coordinates are never split across two firings.
//
// After a register stage, the adder slice adds every element to its right
// neighbour when both have the same coordinate and empties the neighbour
// lane; the zero eliminator then compacts the lanes (log2 N cycles). Each
// input stream holds every coordinate at most once, so at most two elements
// share a coordinate.
//
// Interface: a_head_i / a_cnt_i / a_done_i describe stream A (its oldest N
// entries, how many are stored, and whether no more will arrive); likewise B.
// ready_o says a firing is possible; it happens when en_i is also high, and
// then pop_a_o / pop_b_o must be removed from the input FIFOs in the same
// cycle. tag_i travels with the firing and comes out with its result on
// out_tag_o. Result: out_o (compacted), out_cnt_o, out_valid_o, 1 + log2(N)
// cycles after the firing. Fully pipelined: one firing per cycle.
module array_merger
  import sparch_pkg::*;
#(
  parameter int unsigned N     = 16,
  parameter int unsigned TAG_W = 6,
  parameter int unsigned CNT_W = 8
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  lane_t [N-1:0]                  a_head_i ,
  input  logic [CNT_W-1:0]       a_cnt_i,
  input  logic                   a_done_i,
  input  lane_t [N-1:0]                  b_head_i ,
  input  logic [CNT_W-1:0]       b_cnt_i,
  input  logic                   b_done_i,
  input  logic                   en_i,
  input  logic [TAG_W-1:0]       tag_i,
  output logic                   ready_o,
  output logic                   fire_o,
  output logic [$clog2(N+1)-1:0] pop_a_o,
  output logic [$clog2(N+1)-1:0] pop_b_o,
  output lane_t [N-1:0]                  out_o ,
  output logic [$clog2(N+1)-1:0] out_cnt_o,
  output logic                   out_valid_o,
  output logic [TAG_W-1:0]       out_tag_o
);
  localparam int unsigned LG = $clog2(N);

  lane_t [N-1:0] win_a ;
  lane_t [N-1:0] win_b ;
  lane_t [2*N-1:0] merged ;
  logic [2*N-1:0]  from_a ;
  lane_t [N-1:0] take ;

  // windows: entries beyond the stored count are empty (+inf)
  for (genvar k = 0; k < N; k++) begin : g_win
    assign win_a[k] = '{v: a_head_i[k].v && (CNT_W'(k) < a_cnt_i), e: a_head_i[k].e};
    assign win_b[k] = '{v: b_head_i[k].v && (CNT_W'(k) < b_cnt_i), e: b_head_i[k].e};
  end

  comparator_array #(.N(N)) u_cmp (
    .top_i(win_a), .left_i(win_b), .merged_o(merged), .from_top_o(from_a)
  );

  logic split;
  assign ready_o = (a_cnt_i >= CNT_W'(N) || a_done_i) &&
                   (b_cnt_i >= CNT_W'(N) || b_done_i) &&
                   (a_cnt_i != '0 || b_cnt_i != '0);
  assign fire_o  = ready_o && en_i;
  assign split   = merged[N-1].v && merged[N].v &&
                   key_of(merged[N-1].e) == key_of(merged[N].e);
  for (genvar k = 0; k < N; k++) begin : g_take
    assign take[k] = '{v: merged[k].v && !(k == N-1 && split), e: merged[k].e};
  end
  always_comb begin
    pop_a_o = '0;
    pop_b_o = '0;
    for (int k = 0; k < N; k++) begin
      if (take[k].v && from_a[k])  pop_a_o = pop_a_o + 1'b1;
      if (take[k].v && !from_a[k]) pop_b_o = pop_b_o + 1'b1;
    end
    if (!fire_o) begin
      pop_a_o = '0;
      pop_b_o = '0;
    end
  end

  // stage 1 register
  lane_t [N-1:0]            s1_q ;
  logic             s1_v_q;
  logic [TAG_W-1:0] tag_q [LG+1];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v_q <= 1'b0;
      s1_q   <= '0;
      for (int k = 0; k <= LG; k++) tag_q[k] <= '0;
    end else begin
      s1_v_q <= fire_o;
      s1_q   <= take;
      tag_q[0] <= tag_i;
      for (int k = 1; k <= LG; k++) tag_q[k] <= tag_q[k-1];
    end
  end

  // adder slice: lane k absorbs lane k+1 when both hold the same coordinate
  val_t [N-1-1:0]  sums ;
  lane_t [N-1:0] added ;
  for (genvar k = 0; k < N-1; k++) begin : g_add
    fp64_add u_add (.a_i(s1_q[k].e.val), .b_i(s1_q[k+1].e.val), .s_o(sums[k]));
  end
  logic [N-1:0] dup;
  for (genvar k = 0; k < N; k++) begin : g_dup
    if (k < N-1) begin : g_pair
      assign dup[k] = s1_q[k].v && s1_q[k+1].v &&
                      key_of(s1_q[k].e) == key_of(s1_q[k+1].e);
    end else begin : g_last
      assign dup[k] = 1'b0;
    end
    if (k == 0) begin : g_l0
      assign added[k] = dup[k] ? '{v: 1'b1, e: '{row: s1_q[k].e.row, col: s1_q[k].e.col,
                                                 val: sums[k]}} : s1_q[k];
    end else begin : g_lk
      // lane k is emptied when lane k-1 absorbed it
      assign added[k] = dup[k-1] ? lane_t'('0) :
                        dup[k]   ? '{v: 1'b1, e: '{row: s1_q[k].e.row, col: s1_q[k].e.col,
                                                   val: sums[(k < N-1) ? k : 0]}} : s1_q[k];
    end
  end

  zero_eliminator #(.N(N)) u_ze (
    .clk(clk), .rst_n(rst_n), .in_i(added), .in_valid_i(s1_v_q),
    .out_o(out_o), .out_valid_o(out_valid_o)
  );

  always_comb begin
    out_cnt_o = '0;
    for (int k = 0; k < N; k++) out_cnt_o = out_cnt_o + ($clog2(N+1))'(out_o[k].v);
  end
  assign out_tag_o = tag_q[LG];

  // a firing removes exactly what it merged
  a_pop_bound: assert property (@(posedge clk) disable iff (!rst_n)
                 fire_o |-> (int'(pop_a_o) + int'(pop_b_o)) <= int'(N));

endmodule
