// lane_fifo: a FIFO of COO elements that accepts up to N elements and releases
// up to N elements per cycle, with the N oldest entries visible at once.
//
// This is the node FIFO of the merge tree (the "Merger FIFO" of the system
// figure) and the buffer a merger reads its sliding window from. The paper
// does not give its depth or ports; a circular buffer with a variable write
// count and a variable read count is this design's choice. Pushed elements
// must be compacted into lanes 0..push_cnt-1. A pop and a push in the same
// cycle are allowed; a pop only sees entries stored in earlier cycles.
//
// Interface: push_cnt_i / push_i write; pop_cnt_i removes the oldest entries;
// head_o[k] is the k-th oldest entry (valid when k < count_o); free_o is the
// number of empty places. Both updates take effect at the clock edge.
module lane_fifo
  import sparch_pkg::*;
#(
  parameter int unsigned N     = 16,
  parameter int unsigned DEPTH = 64
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [$clog2(N+1)-1:0]     push_cnt_i,
  input  elem_t [N-1:0]                      push_i ,
  input  logic [$clog2(N+1)-1:0]     pop_cnt_i,
  output lane_t [N-1:0]                      head_o ,
  output logic [$clog2(DEPTH+1)-1:0] count_o,
  output logic [$clog2(DEPTH+1)-1:0] free_o
);
  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned CW = $clog2(DEPTH+1);

  elem_t         mem [DEPTH];
  logic [AW-1:0] rd_q, wr_q;
  logic [CW-1:0] cnt_q;

  for (genvar k = 0; k < N; k++) begin : g_head
    assign head_o[k] = '{v: (CW'(k) < cnt_q), e: mem[AW'(rd_q + AW'(k))]};
  end
  assign count_o = cnt_q;
  assign free_o  = CW'(DEPTH) - cnt_q;

  always_ff @(posedge clk) begin
    for (int k = 0; k < N; k++)
      if (k < int'(push_cnt_i)) mem[AW'(wr_q + AW'(k))] <= push_i[k];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
    end else begin
      rd_q  <= AW'(rd_q + AW'(pop_cnt_i));
      wr_q  <= AW'(wr_q + AW'(push_cnt_i));
      cnt_q <= cnt_q + CW'(push_cnt_i) - CW'(pop_cnt_i);
    end
  end

  // usage rules of the FIFO
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n)
                    CW'(push_cnt_i) <= free_o + CW'(pop_cnt_i));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n)
                    CW'(pop_cnt_i) <= cnt_q);

endmodule
