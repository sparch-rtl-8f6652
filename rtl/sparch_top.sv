// sparch_top: the SpArch SpGEMM accelerator, C = A x B with A and B in CSR.
//
// The product is computed as a sum of outer products. A is read by condensed
// columns: condensed column k holds the k-th nonzero of every row, so the
// number of partial matrices equals the longest row of A instead of A's
// column count. Each condensed column times B is one partial matrix, and the
// partial matrices are merged by a 64-leaf merge tree right as they are
// produced. When there are more condensed columns than leaves, rounds are
// needed: a round merges up to 64 nodes (condensed columns still to be
// multiplied, or results of earlier rounds read back from memory) into one
// result written to memory. The Huffman scheduler picks the members of each
// round so that small partial matrices are merged first.
//
// Data path of a round (the system figure of the paper):
//   mata_column_fetcher -> distance_list_builder (look-ahead FIFO, next use of
//   each B row) -> matb_row_prefetcher (row buffer) -> multiplier_array ->
//   merge_tree leaves;  partial_matrix_fetcher -> merge_tree leaves;
//   merge_tree root -> partial_matrix_writer -> memory.
// The round controller below stands in for the paper's software scheduler,
// whose interface the paper does not give: it takes the members of a round
// from the Huffman scheduler, binds member j to leaf j (multiplier source for
// a condensed column, fetcher source for an earlier result), starts the
// round, and records where each result was written and how long it is.
// Results of non-final rounds go to a scratch area from tmp_base_i as COO
// words; the final round writes C as CSR at c_ptr_base_i / c_elem_base_i.
//
// Interface: configuration inputs (bases of A, B, C and scratch, numbers of
// rows and condensed columns), w_valid_i / w_weight_i load the weight of each
// condensed column (its product's nonzero count, computed by the host), then
// start_i. Four memory ports (A reads, B reads, partial result reads, writes)
// go to the HBM, which is outside this design. done_o when C is written.
module sparch_top
  import sparch_pkg::*;
#(
  parameter int unsigned N            = 16,
  parameter int unsigned LAYERS       = 6,
  parameter int unsigned FIFO_DEPTH   = 64,
  parameter int unsigned LOOKAHEAD    = 8192,
  parameter int unsigned HASH         = 1024,
  parameter int unsigned LINES        = 1024,
  parameter int unsigned LINE_ELEMS   = 48,
  parameter int unsigned WRITER_DEPTH = 1024,
  parameter int unsigned MAX_NODES    = 1024
) (
  input  logic         clk,
  input  logic         rst_n,
  // problem description
  input  addr_t        a_ptr_base_i,
  input  addr_t        a_elem_base_i,
  input  idx_t         a_rows_i,
  input  idx_t         a_ccols_i,
  input  addr_t        b_ptr_base_i,
  input  addr_t        b_elem_base_i,
  input  addr_t        c_ptr_base_i,
  input  addr_t        c_elem_base_i,
  input  addr_t        tmp_base_i,
  input  logic         w_valid_i,
  input  logic [31:0]  w_weight_i,
  input  logic         start_i,
  output logic         done_o,
  // memory ports
  output logic         a_req_valid_o,
  output addr_t        a_req_addr_o,
  input  logic         a_req_ready_i,
  input  logic         a_rsp_valid_i,
  input  word_t        a_rsp_data_i,
  output logic         b_req_valid_o,
  output addr_t        b_req_addr_o,
  input  logic         b_req_ready_i,
  input  logic         b_rsp_valid_i,
  input  word_t        b_rsp_data_i,
  output logic         p_req_valid_o,
  output addr_t        p_req_addr_o,
  input  logic         p_req_ready_i,
  input  logic         p_rsp_valid_i,
  input  word_t        p_rsp_data_i,
  output logic         w_req_valid_o,
  output addr_t        w_req_addr_o,
  output word_t        w_req_data_o,
  input  logic         w_req_ready_i,
  // statistics
  output logic [31:0]  rounds_o,
  output logic [31:0]  c_nnz_o,
  output logic [31:0]  row_hits_o,
  output logic [31:0]  row_misses_o,
  output logic [31:0]  mults_o,
  output logic [31:0]  merge_fires_o [LAYERS],
  output logic [31:0]  huffman_total_o
);
  localparam int unsigned P    = 2**LAYERS;
  localparam int unsigned CW   = $clog2(FIFO_DEPTH+1);
  localparam int unsigned PWN  = $clog2(N+1);
  localparam int unsigned SEGN = N;
  localparam int unsigned NW   = $clog2(MAX_NODES);

  typedef enum logic [2:0] {S_IDLE, S_COLLECT, S_LAUNCH, S_RUN, S_DONE} state_e;
  state_e state_q;

  // ---------------- Huffman scheduler ----------------
  logic        h_valid, h_last, h_final, h_done, h_ready;
  logic [15:0] h_id, h_round_id;
  logic [31:0] h_weight;
  huffman_scheduler #(.WAYS(P), .MAX_NODES(MAX_NODES)) u_huff (
    .clk(clk), .rst_n(rst_n),
    .load_valid_i(w_valid_i && state_q == S_IDLE), .load_weight_i(w_weight_i),
    .start_i(start_i && state_q == S_IDLE),
    .mem_valid_o(h_valid), .mem_id_o(h_id), .mem_weight_o(h_weight),
    .mem_last_o(h_last), .mem_final_o(h_final), .mem_ready_i(h_ready),
    .round_id_o(h_round_id), .done_o(h_done), .total_o(huffman_total_o)
  );
  assign h_ready = (state_q == S_COLLECT);

  // ---------------- round configuration ----------------
  logic [$clog2(P+1)-1:0] nm_q, nsel_q;
  idx_t        sel_col_q  [P];
  logic [7:0]  sel_leaf_q [P];
  logic [P-1:0] used_q, src_q;           // src 1 = partial matrix fetcher
  addr_t       pm_addr_q [P];
  logic [31:0] pm_len_q  [P];
  logic        final_q;
  logic [15:0] rid_q;
  addr_t       part_addr_q [MAX_NODES];
  logic [31:0] part_len_q  [MAX_NODES];
  addr_t       tmp_ptr_q;
  logic        launch;
  assign launch = (state_q == S_LAUNCH);

  // ---------------- A column fetcher ----------------
  logic    f_valid, f_ready, f_done;
  a_elem_t f_elem;
  mata_column_fetcher #(.MAX_COLS(P)) u_fetch (
    .clk(clk), .rst_n(rst_n), .start_i(launch),
    .ptr_base_i(a_ptr_base_i), .elem_base_i(a_elem_base_i), .num_rows_i(a_rows_i),
    .sel_cnt_i(nsel_q), .sel_col_i(sel_col_q), .sel_leaf_i(sel_leaf_q),
    .mem_req_valid_o(a_req_valid_o), .mem_req_addr_o(a_req_addr_o),
    .mem_req_ready_i(a_req_ready_i), .mem_rsp_valid_i(a_rsp_valid_i),
    .mem_rsp_data_i(a_rsp_data_i),
    .out_valid_o(f_valid), .out_o(f_elem), .out_ready_i(f_ready), .done_o(f_done)
  );

  // ---------------- look-ahead FIFO and distance list ----------------
  logic        d_valid, d_ready, d_empty;
  a_elem_t     d_elem;
  logic [31:0] d_next, d_seq;
  distance_list_builder #(.DEPTH(LOOKAHEAD), .HASH(HASH)) u_dist (
    .clk(clk), .rst_n(rst_n), .clear_i(launch),
    .in_valid_i(f_valid), .in_i(f_elem), .in_ready_o(f_ready),
    .flush_i(f_done),
    .out_valid_o(d_valid), .out_o(d_elem), .out_next_o(d_next), .out_seq_o(d_seq),
    .out_ready_i(d_ready), .empty_o(d_empty)
  );

  // ---------------- B row prefetcher ----------------
  logic                pf_valid, pf_ready, pf_idle;
  a_elem_t             pf_a;
  logic [PWN-1:0]      pf_cnt;
  elem_t [SEGN-1:0]    pf_b;
  matb_row_prefetcher #(.LINES(LINES), .LINE_ELEMS(LINE_ELEMS), .SEG(SEGN)) u_pref (
    .clk(clk), .rst_n(rst_n),
    .ptr_base_i(b_ptr_base_i), .elem_base_i(b_elem_base_i),
    .in_valid_i(d_valid), .in_i(d_elem), .in_next_i(d_next), .in_ready_o(d_ready),
    .mem_req_valid_o(b_req_valid_o), .mem_req_addr_o(b_req_addr_o),
    .mem_req_ready_i(b_req_ready_i), .mem_rsp_valid_i(b_rsp_valid_i),
    .mem_rsp_data_i(b_rsp_data_i),
    .out_valid_o(pf_valid), .out_a_o(pf_a), .out_cnt_o(pf_cnt), .out_b_o(pf_b),
    .out_ready_i(pf_ready),
    .hit_count_o(row_hits_o), .miss_count_o(row_misses_o), .idle_o(pf_idle)
  );

  // ---------------- multiplier array ----------------
  logic [CW-1:0]     leaf_free [P];
  logic              m_valid;
  logic [LAYERS-1:0] m_leaf;
  logic [PWN-1:0]    m_cnt;
  elem_t [N-1:0]     m_d;
  // a beat goes out only when its leaf can take it and the one in flight
  assign pf_ready = 32'(leaf_free[pf_a.ccol[LAYERS-1:0]]) >= 32'(2 * N);
  multiplier_array #(.GROUPS(2), .PER_GROUP(N / 2), .LEAF_W(LAYERS)) u_mul (
    .clk(clk), .rst_n(rst_n),
    .in_valid_i(pf_valid && pf_ready), .a_i(pf_a), .b_cnt_i(pf_cnt), .b_i(pf_b),
    .out_valid_o(m_valid), .out_leaf_o(m_leaf), .out_cnt_o(m_cnt), .out_o(m_d),
    .mul_count_o(mults_o)
  );

  // ---------------- partial matrix fetcher ----------------
  logic              pmf_valid;
  logic [LAYERS-1:0] pmf_leaf;
  logic [PWN-1:0]    pmf_cnt;
  elem_t [N-1:0]     pmf_d;
  logic [P-1:0]      pmf_done;
  partial_matrix_fetcher #(.N(N), .PORTS(P), .FREE_W(CW)) u_pmf (
    .clk(clk), .rst_n(rst_n), .start_i(launch),
    .cfg_en_i(used_q & src_q), .cfg_addr_i(pm_addr_q), .cfg_len_i(pm_len_q),
    .leaf_free_i(leaf_free),
    .mem_req_valid_o(p_req_valid_o), .mem_req_addr_o(p_req_addr_o),
    .mem_req_ready_i(p_req_ready_i), .mem_rsp_valid_i(p_rsp_valid_i),
    .mem_rsp_data_i(p_rsp_data_i),
    .out_valid_o(pmf_valid), .out_leaf_o(pmf_leaf), .out_cnt_o(pmf_cnt), .out_o(pmf_d),
    .leaf_done_o(pmf_done)
  );

  // ---------------- merge tree ----------------
  logic         mult_done;
  logic [P-1:0] leaf_done;
  assign mult_done = f_done && d_empty && pf_idle && !pf_valid && !m_valid;
  for (genvar l = 0; l < P; l++) begin : g_leaf_done
    assign leaf_done[l] = (state_q == S_RUN) &&
                          (!used_q[l] || (src_q[l] ? pmf_done[l] : mult_done));
  end

  lane_t [N-1:0]  root_head;
  logic [CW-1:0]  root_count;
  logic [PWN-1:0] root_pop;
  logic           tree_done;
  merge_tree #(.N(N), .LAYERS(LAYERS), .DEPTH(FIFO_DEPTH)) u_tree (
    .clk(clk), .rst_n(rst_n),
    .leaf_src_i(src_q), .leaf_done_i(leaf_done),
    .mul_valid_i(m_valid), .mul_leaf_i(m_leaf), .mul_cnt_i(m_cnt), .mul_d_i(m_d),
    .pmf_valid_i(pmf_valid), .pmf_leaf_i(pmf_leaf), .pmf_cnt_i(pmf_cnt), .pmf_d_i(pmf_d),
    .leaf_free_o(leaf_free),
    .out_head_o(root_head), .out_count_o(root_count), .out_pop_i(root_pop),
    .out_done_o(tree_done), .fire_count_o(merge_fires_o)
  );

  // ---------------- partial matrix writer ----------------
  logic        wr_done;
  logic [31:0] wr_count;
  partial_matrix_writer #(.N(N), .DEPTH(WRITER_DEPTH), .ROOT_W(CW)) u_wr (
    .clk(clk), .rst_n(rst_n), .start_i(launch), .final_i(final_q),
    .elem_base_i(final_q ? c_elem_base_i : tmp_ptr_q), .ptr_base_i(c_ptr_base_i),
    .num_rows_i(a_rows_i),
    .root_head_i(root_head), .root_count_i(root_count), .root_pop_o(root_pop),
    .root_done_i(tree_done && state_q == S_RUN),
    .mem_wr_valid_o(w_req_valid_o), .mem_wr_addr_o(w_req_addr_o),
    .mem_wr_data_o(w_req_data_o), .mem_wr_ready_i(w_req_ready_i),
    .count_o(wr_count), .done_o(wr_done)
  );

  // ---------------- round controller ----------------
  logic run_started_q;   // writer has seen its start
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q       <= S_IDLE;
      nm_q          <= '0;
      nsel_q        <= '0;
      used_q        <= '0;
      src_q         <= '0;
      final_q       <= 1'b0;
      rid_q         <= '0;
      tmp_ptr_q     <= '0;
      rounds_o      <= '0;
      c_nnz_o       <= '0;
      run_started_q <= 1'b0;
      for (int l = 0; l < P; l++) begin
        sel_col_q[l]  <= '0;
        sel_leaf_q[l] <= '0;
        pm_addr_q[l]  <= '0;
        pm_len_q[l]   <= '0;
      end
    end else begin
      case (state_q)
        S_IDLE: if (start_i) begin
          tmp_ptr_q <= tmp_base_i;
          nm_q      <= '0;
          nsel_q    <= '0;
          used_q    <= '0;
          src_q     <= '0;
          state_q   <= S_COLLECT;
        end
        S_COLLECT: if (h_valid) begin
          used_q[nm_q[LAYERS-1:0]] <= 1'b1;
          if (32'(h_id) < a_ccols_i) begin
            sel_col_q[nsel_q[LAYERS-1:0]]  <= 32'(h_id);
            sel_leaf_q[nsel_q[LAYERS-1:0]] <= 8'(nm_q);
            nsel_q <= nsel_q + 1'b1;
            src_q[nm_q[LAYERS-1:0]] <= 1'b0;
          end else begin
            pm_addr_q[nm_q[LAYERS-1:0]] <= part_addr_q[NW'(h_id - 16'(a_ccols_i))];
            pm_len_q[nm_q[LAYERS-1:0]]  <= part_len_q[NW'(h_id - 16'(a_ccols_i))];
            src_q[nm_q[LAYERS-1:0]]     <= 1'b1;
          end
          nm_q <= nm_q + 1'b1;
          if (h_last) begin
            final_q <= h_final;
            rid_q   <= h_round_id;
            state_q <= S_LAUNCH;
          end
        end
        S_LAUNCH: begin
          run_started_q <= 1'b0;
          state_q       <= S_RUN;
        end
        S_RUN: begin
          run_started_q <= 1'b1;
          if (run_started_q && wr_done) begin
            rounds_o <= rounds_o + 1;
            if (final_q) begin
              c_nnz_o <= wr_count;
              state_q <= S_DONE;
            end else begin
              tmp_ptr_q <= tmp_ptr_q + wr_count;
              nm_q      <= '0;
              nsel_q    <= '0;
              used_q    <= '0;
              src_q     <= '0;
              state_q   <= S_COLLECT;
            end
          end
        end
        S_DONE: ;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // table of results written by earlier rounds, indexed by id - a_ccols_i
  always_ff @(posedge clk) begin
    if (state_q == S_RUN && run_started_q && wr_done && !final_q) begin
      part_addr_q[NW'(rid_q - 16'(a_ccols_i))] <= tmp_ptr_q;
      part_len_q[NW'(rid_q - 16'(a_ccols_i))]  <= wr_count;
    end
  end

  assign done_o = (state_q == S_DONE);

  a_round_fits: assert property (@(posedge clk) disable iff (!rst_n)
                  state_q == S_COLLECT && h_valid |-> nm_q < ($clog2(P+1))'(P));
endmodule
