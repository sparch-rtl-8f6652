// distance_list_builder: the look-ahead FIFO and the Distance List Builder.
//
// Every A element selects one row of B (its original column). The row
// prefetcher needs, for each element, when that row is needed next, so that it
// can spill the buffer line whose next use is furthest away. Elements enter a
// DEPTH-deep look-ahead FIFO and get a sequence number. A table remembers, per
// B row, the sequence number of its latest entry still in the FIFO; when a new
// element for that row enters, the earlier entry's next-use field is set to
// the new sequence number. An element leaves the FIFO only when the FIFO is
// full or flush_i is high, so it has looked DEPTH elements ahead; an element
// whose row is not needed again inside that window leaves with next use
// NEVER (all ones).
//
// The paper gives the FIFO depth (8192) and the block's purpose; the table
// (direct-mapped on the low bits of the row index, HASH entries, with a tag)
// is this design's choice. When two rows share a table entry, the older link
// is lost and that element reports NEVER, which only weakens the replacement
// choice, never the result.
//
// Interface: in_* valid/ready stream of A elements; out_* valid/ready stream
// of the same elements with out_next_o (sequence number of the next use) and
// out_seq_o (their own sequence number). empty_o when the FIFO holds nothing.
module distance_list_builder
  import sparch_pkg::*;
#(
  parameter int unsigned DEPTH = 8192,
  parameter int unsigned HASH  = 1024
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    clear_i,
  input  logic    in_valid_i,
  input  a_elem_t in_i,
  output logic    in_ready_o,
  input  logic    flush_i,
  output logic    out_valid_o,
  output a_elem_t out_o,
  output logic [31:0] out_next_o,
  output logic [31:0] out_seq_o,
  input  logic    out_ready_i,
  output logic    empty_o
);
  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned HW = $clog2(HASH);
  localparam logic [31:0] NEVER = '1;

  typedef struct packed {
    logic        v;
    idx_t        tag;
    logic [31:0] seq;
  } link_t;

  a_elem_t     fifo_q [DEPTH];
  logic [31:0] next_q [DEPTH];
  link_t       tab_q  [HASH];
  logic [31:0] wr_seq_q, rd_seq_q;     // sequence numbers of tail and head
  logic [AW:0] cnt_q;

  logic push, pop;
  link_t hit;
  logic [HW-1:0] h;

  assign h           = in_i.col[HW-1:0];
  assign hit         = tab_q[h];
  assign in_ready_o  = (cnt_q != (AW+1)'(DEPTH)) || pop;
  assign push        = in_valid_i && in_ready_o;
  assign out_valid_o = (cnt_q != '0) && (cnt_q == (AW+1)'(DEPTH) || flush_i);
  assign pop         = out_valid_o && out_ready_i;
  assign out_o       = fifo_q[rd_seq_q[AW-1:0]];
  assign out_next_o  = next_q[rd_seq_q[AW-1:0]];
  assign out_seq_o   = rd_seq_q;
  assign empty_o     = (cnt_q == '0);

  // the linked entry is still in the FIFO (not popped in this cycle either)
  logic link_live;
  assign link_live = hit.v && hit.tag == in_i.col &&
                     (hit.seq - rd_seq_q) < 32'(cnt_q) &&
                     !(pop && hit.seq == rd_seq_q);

  always_ff @(posedge clk) begin
    if (push) begin
      fifo_q[wr_seq_q[AW-1:0]] <= in_i;
      next_q[wr_seq_q[AW-1:0]] <= NEVER;
      if (link_live) next_q[hit.seq[AW-1:0]] <= wr_seq_q;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_seq_q <= '0;
      rd_seq_q <= '0;
      cnt_q    <= '0;
      for (int k = 0; k < HASH; k++) tab_q[k] <= '0;
    end else if (clear_i) begin
      cnt_q    <= '0;
      rd_seq_q <= wr_seq_q;
    end else begin
      if (push) begin
        wr_seq_q <= wr_seq_q + 1;
        tab_q[h] <= '{v: 1'b1, tag: in_i.col, seq: wr_seq_q};
      end
      if (pop) rd_seq_q <= rd_seq_q + 1;
      cnt_q <= cnt_q + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
            out_valid_o && !out_ready_i && !clear_i |=> out_valid_o);
endmodule
