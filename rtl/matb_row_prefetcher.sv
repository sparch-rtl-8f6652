// matb_row_prefetcher: the row buffer for the right matrix B, with spilling by
// furthest next use (the paper's MatB Row Prefetcher).
//
// Rows of B are cut into buffer lines of LINE_ELEMS elements; line l of row k
// holds elements l*LINE_ELEMS .. of that row. For each incoming A element the
// block reads the two row pointers of B row k = the element's original column,
// then for every line of that row looks it up among the LINES buffer lines. A
// hit reuses the line; a miss spills the line whose next use is furthest away
// (an empty line first), refills it from memory and tags it. The lines of the
// row in hand are locked so that a long row does not spill its own lines. Each
// line of the row gets the element's next-use time, so a line's priority is
// always the time its row is needed next. Spilling is line by line, as in the
// paper, so a row can be partly resident and only its missing lines are read.
// The line's elements are then handed to the multiplier array SEG at a time,
// together with the A element.
//
// Follows the paper: buffer of 1024 lines x 48 elements, replacement by
// furthest next use found with a reduction over the lines' next-use times,
// line-by-line spilling. This design's own choices: tags are searched by
// comparing all lines (the paper uses a hash table from row to position), and
// a single fetcher with reads pipelined one per cycle (the paper has 16
// fetchers, one per DRAM channel, to hide latency).
//
// Memory layout: word ptr_base + k holds row_ptr[k] of B in bits 31:0; word
// elem_base + i holds nonzero i of B as an elem_t. Interface: in_* stream of A
// elements with their next use; out_* stream of beats (A element, up to SEG B
// elements); hit_count_o / miss_count_o count line lookups; idle_o when no
// element is in hand.
module matb_row_prefetcher
  import sparch_pkg::*;
#(
  parameter int unsigned LINES      = 1024,
  parameter int unsigned LINE_ELEMS = 48,
  parameter int unsigned SEG        = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  addr_t                    ptr_base_i,
  input  addr_t                    elem_base_i,
  input  logic                     in_valid_i,
  input  a_elem_t                  in_i,
  input  logic [31:0]              in_next_i,
  output logic                     in_ready_o,
  output logic                     mem_req_valid_o,
  output addr_t                    mem_req_addr_o,
  input  logic                     mem_req_ready_i,
  input  logic                     mem_rsp_valid_i,
  input  word_t                    mem_rsp_data_i,
  output logic                     out_valid_o,
  output a_elem_t                  out_a_o,
  output logic [$clog2(SEG+1)-1:0] out_cnt_o,
  output elem_t [SEG-1:0]          out_b_o,
  input  logic                     out_ready_i,
  output logic [31:0]              hit_count_o,
  output logic [31:0]              miss_count_o,
  output logic                     idle_o
);
  localparam int unsigned LW = $clog2(LINES);
  localparam int unsigned EW = $clog2(LINE_ELEMS + 1);
  localparam int unsigned DW = $clog2(LINES * LINE_ELEMS);

  typedef struct packed {
    logic        v;
    idx_t        row;
    logic [15:0] line;
  } tag_t;

  typedef enum logic [2:0] {IDLE, PTR0, PTR1, LOOK, FILL, EMIT} state_e;

  tag_t        tag_q  [LINES];
  logic [31:0] next_q [LINES];
  logic [LINES-1:0] lock_q;
  elem_t       data_q [LINES * LINE_ELEMS];

  state_e      state_q;
  a_elem_t     a_q;
  logic [31:0] nu_q;
  idx_t        start_q, len_q;
  logic [15:0] line_q;                 // line of the row in hand
  logic [LW-1:0] way_q;
  logic [EW-1:0] llen_q;               // elements in this line
  logic [EW-1:0] req_q, rsp_q, off_q;
  logic          wait_q;

  // ---- lookup and victim choice (reduction over all lines) ----
  logic          hit;
  logic [LW-1:0] hit_way, victim;
  always_comb begin
    hit     = 1'b0;
    hit_way = '0;
    for (int w = 0; w < LINES; w++) begin
      if (tag_q[w].v && tag_q[w].row == a_q.col && tag_q[w].line == line_q) begin
        hit     = 1'b1;
        hit_way = LW'(w);
      end
    end
  end
  always_comb begin
    logic [32:0] best, pri;
    best   = '0;
    victim = '0;
    for (int w = 0; w < LINES; w++) begin
      // an empty line ranks above every next-use time; locked lines never win
      pri = !tag_q[w].v ? {1'b1, 32'hffff_ffff} : {1'b0, next_q[w]};
      if (!lock_q[w] && (pri > best || (best == '0 && w == 0))) begin
        best   = pri;
        victim = LW'(w);
      end
    end
  end

  idx_t line_base;
  assign line_base = start_q + 32'(line_q) * LINE_ELEMS;

  // ---- memory reads ----
  always_comb begin
    mem_req_valid_o = 1'b0;
    mem_req_addr_o  = '0;
    case (state_q)
      PTR0: begin mem_req_valid_o = !wait_q; mem_req_addr_o = ptr_base_i + a_q.col; end
      PTR1: begin mem_req_valid_o = !wait_q; mem_req_addr_o = ptr_base_i + a_q.col + 1; end
      FILL: begin
        mem_req_valid_o = (req_q != llen_q);
        mem_req_addr_o  = elem_base_i + line_base + 32'(req_q);
      end
      default: ;
    endcase
  end

  // ---- output beat ----
  for (genvar k = 0; k < SEG; k++) begin : g_beat
    assign out_b_o[k] = data_q[DW'(way_q) * DW'(LINE_ELEMS) + DW'(off_q) + DW'(k)];
  end
  assign out_valid_o = (state_q == EMIT);
  assign out_a_o     = a_q;
  assign out_cnt_o   = ((llen_q - off_q) > EW'(SEG)) ? ($clog2(SEG+1))'(SEG)
                                                     : ($clog2(SEG+1))'(llen_q - off_q);
  assign in_ready_o  = (state_q == IDLE);
  assign idle_o      = (state_q == IDLE);

  always_ff @(posedge clk) begin
    if (state_q == FILL && mem_rsp_valid_i)
      data_q[DW'(way_q) * DW'(LINE_ELEMS) + DW'(rsp_q)] <= elem_t'(mem_rsp_data_i);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q      <= IDLE;
      a_q          <= '0;
      nu_q         <= '0;
      start_q      <= '0;
      len_q        <= '0;
      line_q       <= '0;
      way_q        <= '0;
      llen_q       <= '0;
      req_q        <= '0;
      rsp_q        <= '0;
      off_q        <= '0;
      wait_q       <= 1'b0;
      lock_q       <= '0;
      hit_count_o  <= '0;
      miss_count_o <= '0;
      for (int w = 0; w < LINES; w++) begin
        tag_q[w]  <= '0;
        next_q[w] <= '0;
      end
    end else begin
      case (state_q)
        IDLE: if (in_valid_i) begin
          a_q     <= in_i;
          nu_q    <= in_next_i;
          lock_q  <= '0;
          line_q  <= '0;
          wait_q  <= 1'b0;
          state_q <= PTR0;
        end
        PTR0: begin
          if (mem_req_valid_o && mem_req_ready_i) wait_q <= 1'b1;
          if (wait_q && mem_rsp_valid_i) begin
            wait_q  <= 1'b0;
            start_q <= mem_rsp_data_i[31:0];
            state_q <= PTR1;
          end
        end
        PTR1: begin
          if (mem_req_valid_o && mem_req_ready_i) wait_q <= 1'b1;
          if (wait_q && mem_rsp_valid_i) begin
            wait_q  <= 1'b0;
            len_q   <= mem_rsp_data_i[31:0] - start_q;
            state_q <= (mem_rsp_data_i[31:0] == start_q) ? IDLE : LOOK;
          end
        end
        LOOK: begin
          llen_q <= ((len_q - 32'(line_q) * LINE_ELEMS) > LINE_ELEMS) ? EW'(LINE_ELEMS)
                    : EW'(len_q - 32'(line_q) * LINE_ELEMS);
          off_q  <= '0;
          req_q  <= '0;
          rsp_q  <= '0;
          if (hit) begin
            way_q          <= hit_way;
            lock_q[hit_way] <= 1'b1;
            next_q[hit_way] <= nu_q;
            hit_count_o    <= hit_count_o + 1;
            state_q        <= EMIT;
          end else begin
            way_q          <= victim;
            lock_q[victim] <= 1'b1;
            next_q[victim] <= nu_q;
            tag_q[victim]  <= '{v: 1'b1, row: a_q.col, line: line_q};
            miss_count_o   <= miss_count_o + 1;
            state_q        <= FILL;
          end
        end
        FILL: begin
          if (mem_req_valid_o && mem_req_ready_i) req_q <= req_q + 1'b1;
          if (mem_rsp_valid_i) begin
            rsp_q <= rsp_q + 1'b1;
            if (rsp_q + 1'b1 == llen_q) state_q <= EMIT;
          end
        end
        EMIT: if (out_ready_i) begin
          if (off_q + EW'(SEG) >= llen_q) begin
            line_q  <= line_q + 1'b1;
            state_q <= ((32'(line_q) + 1) * LINE_ELEMS >= len_q) ? IDLE : LOOK;
          end
          off_q <= off_q + EW'(SEG);
        end
        default: state_q <= IDLE;
      endcase
    end
  end

  a_victim_free: assert property (@(posedge clk) disable iff (!rst_n)
                   state_q == LOOK && !hit |-> !lock_q[victim]);
endmodule
