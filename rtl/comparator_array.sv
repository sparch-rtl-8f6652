// comparator_array: merges two sorted lists of N elements into one sorted list
// of 2N elements in a single combinational step.
//
// How it works (the paper's comparator array): tile (i,j) compares left
// element i with top element j and holds '<' when left_i < top_j, else '>='.
// A dummy column of '<' is padded on the right and a dummy row of '>=' at the
// bottom. A tile is a boundary tile when it is the top-left tile, a '>=' tile
// of the first row, a '>=' tile whose upper neighbour is '<', or a '<' tile
// whose left neighbour is '>='. Tiles are grouped along anti-diagonals
// (group k = i + j); every group holds exactly one boundary tile, and that
// tile emits the smaller of its two inputs as merged element k: top_j for a
// '>=' tile, left_i for a '<' tile. Ties therefore emit the top element first.
// The rules for the first row and column are applied by treating the missing
// upper neighbour as '<' and the missing left neighbour as '>=', which makes
// rule 1 follow from rules 3 and 4.
//
// Interface: top_i / left_i are sorted ascending by key, valid entries first;
// invalid entries count as larger than any valid key. merged_o[k] is element
// k of the merged list, from_top_o[k] says which input it came from. Purely
// combinational; no clock.
module comparator_array
  import sparch_pkg::*;
#(
  parameter int unsigned N = 16
) (
  input  lane_t [N-1:0] top_i    ,
  input  lane_t [N-1:0] left_i   ,
  output lane_t [2*N-1:0] merged_o ,
  output logic [2*N-1:0]  from_top_o 
);

  // lt[i][j] = 1 means tile (i,j) holds '<'.
  logic [N:0][N:0] lt;
  logic [N:0][N:0] bnd;

  function automatic logic less(lane_t l, lane_t t);
    if (!l.v) return 1'b0;          // invalid left is +inf: never smaller
    if (!t.v) return 1'b1;          // valid left < invalid top
    return key_of(l.e) < key_of(t.e);
  endfunction

  for (genvar i = 0; i <= N; i++) begin : g_row
    for (genvar j = 0; j <= N; j++) begin : g_col
      if (i == N)      begin : g_drow assign lt[i][j] = 1'b0; end  // dummy row of '>='
      else if (j == N) begin : g_dcol assign lt[i][j] = 1'b1; end  // dummy column of '<'
      else             begin : g_cmp  assign lt[i][j] = less(left_i[i], top_i[j]); end
      if (i == N && j == N) begin : g_corner
        assign bnd[i][j] = 1'b0;                         // corner does not exist
      end else begin : g_bnd
        logic up_lt, left_ge;
        assign up_lt   = (i == 0) ? 1'b1 : lt[(i == 0) ? 0 : i-1][j];
        assign left_ge = (j == 0) ? 1'b1 : !lt[i][(j == 0) ? 0 : j-1];
        assign bnd[i][j] = lt[i][j] ? left_ge : up_lt;
      end
    end
  end

  // group k = i + j: exactly one boundary tile drives the output
  for (genvar k = 0; k < 2*N; k++) begin : g_grp
    localparam int I_LO = (k > N) ? k - N : 0;
    localparam int I_HI = (k < N) ? k : N;
    always_comb begin
      lane_t acc;
      logic  ft;
      acc = '0;
      ft  = 1'b0;
      for (int i = I_LO; i <= I_HI; i++) begin
        if (bnd[i][k-i]) begin
          acc = lt[i][k-i] ? ((i < N) ? left_i[(i < N) ? i : 0] : '0)
                           : ((k-i < N) ? top_i[(k-i < N) ? k-i : 0] : '0);
          ft  = !lt[i][k-i];
        end
      end
      merged_o[k]   = acc;
      from_top_o[k] = ft;
    end
  end

endmodule
