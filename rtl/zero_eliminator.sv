// zero_eliminator: compacts the valid elements of an N-lane vector to the low
// lanes, keeping their order, after the adder slice has emptied the lanes of
// elements it folded into a neighbour.
//
// How it works (the paper's Zero Eliminator): a prefix sum gives every lane
// the number of empty lanes before it (zero_count). Then log2(N) shifter
// layers follow; layer b moves each element, together with its zero_count,
// 2^b lanes towards lane 0 when bit b of that element's own zero_count is set.
// Unlike a barrel shifter every lane has its own shift control. Because the
// paper gives a latency of log N cycles for N inputs, each layer is registered
// here: the result appears log2(N) cycles after the input (one per layer).
// The prefix sum is computed combinationally in front of the first layer.
//
// Interface: in_i / in_valid_i (a strobe for the whole vector) -> out_o /
// out_valid_o, log2(N) cycles later, fully pipelined (one vector per cycle).
// An element moved onto a lane that another element also targets can only
// happen for an empty lane, so empty lanes never overwrite valid ones.
module zero_eliminator
  import sparch_pkg::*;
#(
  parameter int unsigned N = 16
) (
  input  logic  clk,
  input  logic  rst_n,
  input  lane_t [N-1:0] in_i ,
  input  logic  in_valid_i,
  output lane_t [N-1:0] out_o ,
  output logic  out_valid_o
);
  localparam int unsigned LG = $clog2(N);
  localparam int unsigned CW = $clog2(N) + 1;

  lane_t [N-1:0]         s0_d  ;
  logic [N-1:0][CW-1:0] s0_zc ;
  lane_t [N-1:0]         d_q   [LG];    // registered output of each layer
  logic [N-1:0][CW-1:0] zc_q  [LG];
  logic          v_q   [LG];

  // prefix count of empty lanes before each lane (combinational)
  assign s0_d = in_i;
  for (genvar k = 0; k < N; k++) begin : g_prefix
    always_comb begin
      logic [CW-1:0] acc;
      acc = '0;
      for (int m = 0; m < k; m++) acc = acc + CW'(!in_i[m].v);
      s0_zc[k] = acc;
    end
  end

  for (genvar b = 0; b < LG; b++) begin : g_layer
    lane_t [N-1:0]         cd  ;
    logic [N-1:0][CW-1:0] czc ;
    logic          cv;
    lane_t [N-1:0]         nd  ;
    logic [N-1:0][CW-1:0] nzc ;
    if (b == 0) begin : g_first
      assign cd  = s0_d;
      assign czc = s0_zc;
      assign cv  = in_valid_i;
    end else begin : g_next
      assign cd  = d_q[(b == 0) ? 0 : b-1];
      assign czc = zc_q[(b == 0) ? 0 : b-1];
      assign cv  = v_q[(b == 0) ? 0 : b-1];
    end
    // each lane keeps its element unless it moves 2^b lanes down, and takes
    // the element 2^b lanes above it if that one moves
    for (genvar k = 0; k < N; k++) begin : g_lane
      logic stay;
      assign stay = cd[k].v && !czc[k][b];
      if (k + (1 << b) < N) begin : g_up
        logic take;
        assign take = cd[k + (1 << b)].v && czc[k + (1 << b)][b];
        assign nd[k]  = stay ? cd[k]  : (take ? cd[k + (1 << b)]  : '0);
        assign nzc[k] = stay ? czc[k] : (take ? czc[k + (1 << b)] : '0);
      end else begin : g_top
        assign nd[k]  = stay ? cd[k]  : '0;
        assign nzc[k] = stay ? czc[k] : '0;
      end
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        v_q[b]  <= 1'b0;
        d_q[b]  <= '0;
        zc_q[b] <= '0;
      end else begin
        v_q[b]  <= cv;
        d_q[b]  <= nd;
        zc_q[b] <= nzc;
      end
    end
  end

  assign out_o       = d_q[LG-1];
  assign out_valid_o = v_q[LG-1];

endmodule
