// huffman_scheduler: decides the merge order of partial matrices by building a
// WAYS-ary Huffman tree on the fly with a sorted priority queue.
//
// Every condensed column of A yields one partial matrix (a leaf); its weight is
// its number of nonzeros. Merging a node early costs a memory round trip of its
// weight for every later round, so the cheapest order is a Huffman tree over
// the weights. The queue holds (weight, node id) sorted by weight, smallest
// first. Leaves are loaded one per cycle with ids 0, 1, 2, ...; each load is
// inserted at its sorted place (after equal weights). On start_i the first
// round takes k_init = (n - 2) mod (WAYS - 1) + 2 nodes (n = number of leaves),
// every later round WAYS nodes, which makes the last round full. A round pops
// its members from the head of the queue, one per cycle, handing each out on
// the member stream; the new internal node gets the next free id and the sum
// of the members' weights (the paper's estimate of its size) and is inserted
// back. The round whose members are the whole queue is the final one.
//
// Follows the paper (Section II-C, Eq. 1): k-ary Huffman tree, first round of
// k_init nodes, priority queue that is re-sorted after every round. This
// design's choices: insertion into a shift-register queue in one cycle,
// MAX_NODES entries, 16-bit ids and the member stream handshake.
//
// Interface: load_valid_i / load_weight_i (only while idle); start_i; member
// stream mem_valid_o / mem_id_o / mem_weight_o / mem_last_o (last member of
// the round) / mem_final_o (member of the final round) with mem_ready_i;
// round_id_o is the id the current round's result will get. done_o after the
// final round's last member is taken. total_o sums the weights of all nodes
// the tree creates (internal nodes and root).
module huffman_scheduler #(
  parameter int unsigned WAYS      = 64,
  parameter int unsigned MAX_NODES = 1024,
  parameter int unsigned W_W       = 32
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           load_valid_i,
  input  logic [W_W-1:0] load_weight_i,
  input  logic           start_i,
  output logic           mem_valid_o,
  output logic [15:0]    mem_id_o,
  output logic [W_W-1:0] mem_weight_o,
  output logic           mem_last_o,
  output logic           mem_final_o,
  input  logic           mem_ready_i,
  output logic [15:0]    round_id_o,
  output logic           done_o,
  output logic [W_W-1:0] total_o
);
  localparam int unsigned CW = $clog2(MAX_NODES+1);

  typedef struct packed {
    logic [W_W-1:0] w;
    logic [15:0]    id;
  } node_t;

  typedef enum logic [1:0] {LOAD, POP, INSERT, DONE} state_e;

  node_t         q_q [MAX_NODES];
  logic [CW-1:0] qn_q;
  state_e        state_q;
  logic [15:0]   next_id_q;
  logic [CW-1:0] left_q;          // members still to hand out in this round
  logic          final_q;
  logic [W_W-1:0] sum_q;

  // insertion point of a new node: after every entry of weight <= its weight
  logic           ins;
  node_t          ins_node;
  logic [CW-1:0]  pos;
  logic           pop;
  assign pop      = (state_q == POP) && mem_ready_i;
  assign ins      = (state_q == LOAD && load_valid_i) || (state_q == INSERT);
  assign ins_node = (state_q == LOAD) ? '{w: load_weight_i, id: next_id_q}
                                      : '{w: sum_q, id: next_id_q};
  always_comb begin
    pos = '0;
    for (int i = 0; i < MAX_NODES; i++)
      if (CW'(i) < qn_q && q_q[i].w <= ins_node.w) pos = pos + 1'b1;
  end

  for (genvar i = 0; i < MAX_NODES; i++) begin : g_q
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) q_q[i] <= '0;
      else if (pop) q_q[i] <= (i + 1 < MAX_NODES) ? q_q[(i + 1 < MAX_NODES) ? i + 1 : i] : '0;
      else if (ins) begin
        if (CW'(i) == pos)     q_q[i] <= ins_node;
        else if (CW'(i) > pos) q_q[i] <= q_q[(i > 0) ? i - 1 : 0];
      end
    end
  end

  assign mem_valid_o  = (state_q == POP);
  assign mem_id_o     = q_q[0].id;
  assign mem_weight_o = q_q[0].w;
  assign mem_last_o   = (left_q == CW'(1));
  assign mem_final_o  = final_q;
  assign round_id_o   = next_id_q;
  assign done_o       = (state_q == DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q   <= LOAD;
      qn_q      <= '0;
      next_id_q <= '0;
      left_q    <= '0;
      final_q   <= 1'b0;
      sum_q     <= '0;
      total_o   <= '0;
    end else begin
      case (state_q)
        LOAD: begin
          if (load_valid_i) begin
            qn_q      <= qn_q + 1'b1;
            next_id_q <= next_id_q + 1'b1;
          end else if (start_i && qn_q != '0) begin
            // Eq. 1: k_init = (n - 2) mod (ways - 1) + 2
            if (qn_q == CW'(1)) left_q <= CW'(1);
            else left_q <= CW'((int'(qn_q) - 2) % (WAYS - 1) + 2);
            final_q <= (qn_q <= CW'(WAYS)) ||
                       (CW'((int'(qn_q) - 2) % (WAYS - 1) + 2) == qn_q);
            sum_q   <= '0;
            state_q <= POP;
          end
        end
        POP: if (mem_ready_i) begin
          qn_q   <= qn_q - 1'b1;
          sum_q  <= sum_q + q_q[0].w;
          left_q <= left_q - 1'b1;
          if (left_q == CW'(1)) begin
            total_o <= total_o + sum_q + q_q[0].w;
            state_q <= final_q ? DONE : INSERT;
          end
        end
        INSERT: begin
          qn_q      <= qn_q + 1'b1;
          next_id_q <= next_id_q + 1'b1;
          left_q    <= CW'(WAYS);
          final_q   <= (qn_q + 1'b1 == CW'(WAYS));
          sum_q     <= '0;
          state_q   <= POP;
        end
        DONE: ;
        default: state_q <= LOAD;
      endcase
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                   ins |-> qn_q < CW'(MAX_NODES));
endmodule
