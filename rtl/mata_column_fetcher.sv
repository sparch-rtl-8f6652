// mata_column_fetcher: reads the left matrix A, stored in CSR, by condensed
// columns. The k-th nonzero of a CSR row is, by definition, in condensed column
// k, so fetching condensed column k means fetching element row_ptr[r] + k of
// every row r that has more than k nonzeros.
//
// A round selects up to MAX_COLS condensed columns (sel_col_i), each bound to a
// merge tree leaf (sel_leaf_i). The fetcher walks the rows top to bottom, as
// the paper's load sequence does (Fig. 7), and for each row reads the two row
// pointers and then every selected element present in that row. Each element
// leaves tagged with its row, its original column (which selects the row of B)
// and, in the ccol field, its leaf. The paper uses 64 parallel fetchers; this
// block is one sequential fetcher with one read outstanding, which is this
// design's simplification.
//
// Memory layout (this design's choice): word ptr_base + r holds row_ptr[r] in
// bits 31:0; word elem_base + i holds nonzero i as an elem_t (col, val).
// Interface: start_i pulses with the configuration valid; mem_req_* /
// mem_rsp_* is an in-order read port; out_* is a valid/ready stream;
// done_o rises when every row has been read and the last element taken.
module mata_column_fetcher
  import sparch_pkg::*;
#(
  parameter int unsigned MAX_COLS = 64
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start_i,
  input  addr_t                       ptr_base_i,
  input  addr_t                       elem_base_i,
  input  idx_t                        num_rows_i,
  input  logic [$clog2(MAX_COLS+1)-1:0] sel_cnt_i,
  input  idx_t                        sel_col_i  [MAX_COLS],
  input  logic [7:0]                  sel_leaf_i [MAX_COLS],
  output logic                        mem_req_valid_o,
  output addr_t                       mem_req_addr_o,
  input  logic                        mem_req_ready_i,
  input  logic                        mem_rsp_valid_i,
  input  word_t                       mem_rsp_data_i,
  output logic                        out_valid_o,
  output a_elem_t                     out_o,
  input  logic                        out_ready_i,
  output logic                        done_o
);
  localparam int unsigned SW = $clog2(MAX_COLS+1);

  typedef enum logic [2:0] {IDLE, PTR0, PTR1, SCAN, ELEM, EMIT, DONE} state_e;
  state_e state_q;
  logic   wait_q;                     // a read is outstanding
  idx_t   row_q, start_q, len_q;
  logic [SW-1:0] s_q;                 // index into the selection

  assign done_o = (state_q == DONE);

  always_comb begin
    mem_req_valid_o = 1'b0;
    mem_req_addr_o  = '0;
    if (!wait_q) begin
      case (state_q)
        PTR0: begin mem_req_valid_o = 1'b1; mem_req_addr_o = ptr_base_i + row_q; end
        PTR1: begin mem_req_valid_o = 1'b1; mem_req_addr_o = ptr_base_i + row_q + 1; end
        ELEM: begin
          mem_req_valid_o = 1'b1;
          mem_req_addr_o  = elem_base_i + start_q + sel_col_i[s_q];
        end
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q     <= IDLE;
      wait_q      <= 1'b0;
      row_q       <= '0;
      start_q     <= '0;
      len_q       <= '0;
      s_q         <= '0;
      out_valid_o <= 1'b0;
      out_o       <= '0;
    end else begin
      if (mem_req_valid_o && mem_req_ready_i) wait_q <= 1'b1;
      case (state_q)
        IDLE, DONE: if (start_i) begin
          row_q   <= '0;
          state_q <= (num_rows_i == '0 || sel_cnt_i == '0) ? DONE : PTR0;
        end
        PTR0: if (wait_q && mem_rsp_valid_i) begin
          wait_q  <= 1'b0;
          start_q <= mem_rsp_data_i[31:0];
          state_q <= PTR1;
        end
        PTR1: if (wait_q && mem_rsp_valid_i) begin
          wait_q  <= 1'b0;
          len_q   <= mem_rsp_data_i[31:0] - start_q;
          s_q     <= '0;
          state_q <= SCAN;
        end
        SCAN: begin
          // skip selected columns this row does not reach
          if (s_q == sel_cnt_i) begin
            row_q   <= row_q + 1;
            state_q <= (row_q + 1 == num_rows_i) ? DONE : PTR0;
          end else if (sel_col_i[s_q] < len_q) begin
            state_q <= ELEM;
          end else begin
            s_q <= s_q + 1'b1;
          end
        end
        ELEM: if (wait_q && mem_rsp_valid_i) begin
          wait_q      <= 1'b0;
          out_valid_o <= 1'b1;
          out_o       <= '{row: row_q, col: mem_rsp_data_i[95:64],
                           ccol: idx_t'(sel_leaf_i[s_q]), val: mem_rsp_data_i[63:0]};
          state_q     <= EMIT;
        end
        EMIT: if (out_ready_i) begin
          out_valid_o <= 1'b0;
          s_q         <= s_q + 1'b1;
          state_q     <= SCAN;
        end
        default: state_q <= IDLE;
      endcase
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
            out_valid_o && !out_ready_i |=> out_valid_o && $stable(out_o));
endmodule
