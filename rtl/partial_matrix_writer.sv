// partial_matrix_writer: drains the root of the merge tree through a
// DEPTH-element FIFO and writes the merged matrix to memory.
//
// Up to N elements per cycle move from the root FIFO into the writer FIFO;
// one element per cycle is written out. For a partially merged result the
// elements are written as consecutive COO words (elem_t) from elem_base_i.
// For the final result (final_i) the block also produces CSR: the elements
// are written the same way (their column and value are the CSR column and
// value arrays) and the row pointer array is written at ptr_base_i: before
// the first element of row r, row_ptr[r'] = index is written for every row
// r' not yet written up to r, and after the last element the remaining
// pointers up to row num_rows_i get the element count. The FIFO size (1024)
// is the paper's; the one-word-per-cycle write port is this design's choice.
//
// Interface: start_i pulses with the configuration; root_* is the merge tree's
// root FIFO (head, count, pop); root_done_i says nothing more will come;
// mem_wr_* is a write port with ready; count_o is the number of elements
// written; done_o rises when everything, pointers included, is written.
module partial_matrix_writer
  import sparch_pkg::*;
#(
  parameter int unsigned N      = 16,
  parameter int unsigned DEPTH  = 1024,
  parameter int unsigned ROOT_W = 7
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start_i,
  input  logic                   final_i,
  input  addr_t                  elem_base_i,
  input  addr_t                  ptr_base_i,
  input  idx_t                   num_rows_i,
  input  lane_t [N-1:0]          root_head_i,
  input  logic [ROOT_W-1:0]      root_count_i,
  output logic [$clog2(N+1)-1:0] root_pop_o,
  input  logic                   root_done_i,
  output logic                   mem_wr_valid_o,
  output addr_t                  mem_wr_addr_o,
  output word_t                  mem_wr_data_o,
  input  logic                   mem_wr_ready_i,
  output logic [31:0]            count_o,
  output logic                   done_o
);
  localparam int unsigned CW = $clog2(DEPTH+1);
  localparam int unsigned PW = $clog2(N+1);

  lane_t [N-1:0] head;
  logic [CW-1:0] cnt, free;
  logic [PW-1:0] pop;
  logic          active_q, final_q;
  idx_t          next_row_q;           // next row pointer to write

  // move as much of the root as fits
  always_comb begin
    int unsigned m;
    m = (int'(root_count_i) < int'(N)) ? int'(root_count_i) : N;
    if (m > int'(free)) m = int'(free);
    root_pop_o = active_q ? PW'(m) : '0;
  end

  elem_t [N-1:0] root_elems;
  for (genvar k = 0; k < N; k++) begin : g_strip
    assign root_elems[k] = root_head_i[k].e;
  end

  lane_fifo #(.N(N), .DEPTH(DEPTH)) u_buf (
    .clk(clk), .rst_n(rst_n),
    .push_cnt_i(root_pop_o), .push_i(root_elems),
    .pop_cnt_i(pop), .head_o(head), .count_o(cnt), .free_o(free)
  );

  // write one word per cycle: a pending row pointer first, else an element
  logic ptr_due, tail_due, elem_due;
  assign ptr_due  = active_q && final_q && head[0].v && next_row_q <= head[0].e.row;
  assign tail_due = active_q && final_q && !head[0].v && root_done_i &&
                    root_count_i == '0 && next_row_q <= num_rows_i;
  assign elem_due = active_q && head[0].v && !ptr_due;

  always_comb begin
    mem_wr_valid_o = ptr_due || tail_due || elem_due;
    mem_wr_addr_o  = (ptr_due || tail_due) ? ptr_base_i + next_row_q : elem_base_i + count_o;
    mem_wr_data_o  = (ptr_due || tail_due) ? word_t'(count_o) : word_t'(head[0].e);
    pop            = (elem_due && mem_wr_ready_i) ? PW'(1) : '0;
  end

  assign done_o = !active_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active_q   <= 1'b0;
      final_q    <= 1'b0;
      next_row_q <= '0;
      count_o    <= '0;
    end else if (start_i) begin
      active_q   <= 1'b1;
      final_q    <= final_i;
      next_row_q <= '0;
      count_o    <= '0;
    end else if (active_q) begin
      if (mem_wr_ready_i && (ptr_due || tail_due)) next_row_q <= next_row_q + 1;
      if (mem_wr_ready_i && elem_due) count_o <= count_o + 1;
      if (root_done_i && root_count_i == '0 && !head[0].v &&
          (!final_q || next_row_q > num_rows_i || (tail_due && mem_wr_ready_i && next_row_q == num_rows_i)))
        active_q <= 1'b0;
    end
  end
endmodule
