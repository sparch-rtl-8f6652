// partial_matrix_fetcher: loads partially merged results back from memory
// into the merge tree leaves whose multiplexer selects this source.
//
// A partial result is a sorted COO list stored as consecutive elem_t words.
// For each of up to PORTS leaves the round gives an enable, a start address and
// a length. The fetcher issues one read per cycle, choosing leaves round robin
// among those with data left and room in their FIFO, and pushes each returned
// element into its leaf. Reads are in order; a small queue remembers which
// leaf each outstanding read belongs to. A leaf is only chosen while its free
// space exceeds everything outstanding, so a response always fits. The paper
// says only that the fetcher supports 64 partial results and fetches "once the
// FIFO is near empty"; the one-element-per-read scheme is this design's
// choice.
//
// Reads are only issued between start_i and the moment every leaf is done,
// so a configuration that changes between rounds never triggers a read.
// Interface: start_i pulses with cfg_* valid (no read may be outstanding); mem_req_* / mem_rsp_* in-order
// read port; out_* pushes one element into leaf out_leaf_o; leaf_free_i are the
// leaf FIFOs' free counts; leaf_done_o[l] when leaf l has everything (or is
// not used by this source).
module partial_matrix_fetcher
  import sparch_pkg::*;
#(
  parameter int unsigned N       = 16,
  parameter int unsigned PORTS   = 64,
  parameter int unsigned FREE_W  = 7,
  parameter int unsigned OUTSTD  = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start_i,
  input  logic [PORTS-1:0]         cfg_en_i,
  input  addr_t                    cfg_addr_i [PORTS],
  input  logic [31:0]              cfg_len_i  [PORTS],
  input  logic [FREE_W-1:0]        leaf_free_i [PORTS],
  output logic                     mem_req_valid_o,
  output addr_t                    mem_req_addr_o,
  input  logic                     mem_req_ready_i,
  input  logic                     mem_rsp_valid_i,
  input  word_t                    mem_rsp_data_i,
  output logic                     out_valid_o,
  output logic [$clog2(PORTS)-1:0] out_leaf_o,
  output logic [$clog2(N+1)-1:0]   out_cnt_o,
  output elem_t [N-1:0]            out_o,
  output logic [PORTS-1:0]         leaf_done_o
);
  localparam int unsigned PW = $clog2(PORTS);
  localparam int unsigned QW = $clog2(OUTSTD);

  logic [31:0]   issued_q [PORTS];
  logic [31:0]   recv_q   [PORTS];
  logic [PW-1:0] rr_q;
  logic [PW-1:0] tagq_q [OUTSTD];
  logic [QW-1:0] qh_q, qt_q;
  logic [QW:0]   qn_q;
  logic          active_q;     // between start_i and the last response

  // choose a leaf to read for
  logic          any;
  logic [PW-1:0] sel;
  always_comb begin
    int unsigned idx;
    any = 1'b0;
    sel = '0;
    for (int unsigned k = 0; k < PORTS; k++) begin
      idx = (int'(rr_q) + k) % PORTS;
      if (!any && cfg_en_i[idx] && issued_q[idx] != cfg_len_i[idx] &&
          32'(leaf_free_i[idx]) > 32'(qn_q)) begin
        any = 1'b1;
        sel = PW'(idx);
      end
    end
  end

  assign mem_req_valid_o = active_q && !start_i && any && (qn_q != (QW+1)'(OUTSTD));
  assign mem_req_addr_o  = cfg_addr_i[sel] + issued_q[sel];

  logic req_fire;
  assign req_fire = mem_req_valid_o && mem_req_ready_i;

  assign out_valid_o = mem_rsp_valid_i;
  assign out_leaf_o  = tagq_q[qh_q];
  assign out_cnt_o   = ($clog2(N+1))'(mem_rsp_valid_i);
  for (genvar k = 0; k < N; k++) begin : g_out
    if (k == 0) begin : g_first assign out_o[k] = elem_t'(mem_rsp_data_i); end
    else        begin : g_rest  assign out_o[k] = '0; end
  end
  for (genvar l = 0; l < PORTS; l++) begin : g_done
    assign leaf_done_o[l] = !cfg_en_i[l] || recv_q[l] == cfg_len_i[l];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr_q <= '0;
      qh_q <= '0;
      qt_q <= '0;
      qn_q <= '0;
      active_q <= 1'b0;
      for (int l = 0; l < PORTS; l++) begin
        issued_q[l] <= '0;
        recv_q[l]   <= '0;
        tagq_q[l % OUTSTD] <= '0;
      end
    end else if (start_i) begin
      active_q <= 1'b1;
      for (int l = 0; l < PORTS; l++) begin
        issued_q[l] <= '0;
        recv_q[l]   <= '0;
      end
    end else begin
      if (req_fire) begin
        issued_q[sel] <= issued_q[sel] + 1;
        tagq_q[qt_q]  <= sel;
        qt_q          <= qt_q + 1'b1;
        rr_q          <= PW'((int'(sel) + 1) % PORTS);
      end
      if (mem_rsp_valid_i) begin
        recv_q[tagq_q[qh_q]] <= recv_q[tagq_q[qh_q]] + 1;
        qh_q <= qh_q + 1'b1;
      end
      qn_q <= qn_q + (QW+1)'(req_fire) - (QW+1)'(mem_rsp_valid_i);
      if (&leaf_done_o && qn_q == '0) active_q <= 1'b0;
    end
  end

  a_rsp_expected: assert property (@(posedge clk) disable iff (!rst_n)
                    mem_rsp_valid_i |-> qn_q != '0);
endmodule
