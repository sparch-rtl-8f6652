// multiplier_array: the outer-product multipliers. One beat multiplies one
// element a of the left matrix A (row i, condensed column c) with up to
// GROUPS*PER_GROUP elements (j, b) of row k of the right matrix B and emits the
// products (i, j, a*b) as a COO fragment for merge tree leaf c.
//
// The paper gives 2 groups of 8 double precision multipliers. Here both groups
// work on the same A element: group 0 takes B elements 0-7 of the beat and
// group 1 elements 8-15, so one beat yields up to 16 products for one leaf;
// that split, and the single output register, are this design's choice.
// B elements of a row are sorted by column, so a fragment is sorted by
// (row, column), and successive A elements of one condensed column come in
// row order: each leaf receives a sorted stream.
//
// Interface: in_valid_i, a_i, b_cnt_i (number of B elements), b_i (B elements;
// their row field is ignored). out_valid_o / out_leaf_o / out_cnt_o / out_o one
// cycle later. No back-pressure: the sender checks the leaf's free space.
module multiplier_array
  import sparch_pkg::*;
#(
  parameter int unsigned GROUPS    = 2,
  parameter int unsigned PER_GROUP = 8,
  parameter int unsigned LEAF_W    = 6
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  logic                                   in_valid_i,
  input  a_elem_t                                a_i,
  input  logic [$clog2(GROUPS*PER_GROUP+1)-1:0]  b_cnt_i,
  input  elem_t [GROUPS*PER_GROUP-1:0]           b_i,
  output logic                                   out_valid_o,
  output logic [LEAF_W-1:0]                      out_leaf_o,
  output logic [$clog2(GROUPS*PER_GROUP+1)-1:0]  out_cnt_o,
  output elem_t [GROUPS*PER_GROUP-1:0]           out_o,
  output logic [31:0]                            mul_count_o
);
  localparam int unsigned M  = GROUPS * PER_GROUP;
  localparam int unsigned CW = $clog2(M+1);

  elem_t [M-1:0] prod;
  for (genvar g = 0; g < GROUPS; g++) begin : g_group
    for (genvar k = 0; k < PER_GROUP; k++) begin : g_mul
      localparam int unsigned L = g * PER_GROUP + k;
      val_t p;
      fp64_mul u_mul (.a_i(a_i.val), .b_i(b_i[L].val), .p_o(p));
      assign prod[L] = '{row: a_i.row, col: b_i[L].col, val: p};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid_o <= 1'b0;
      out_leaf_o  <= '0;
      out_cnt_o   <= '0;
      out_o       <= '0;
      mul_count_o <= '0;
    end else begin
      out_valid_o <= in_valid_i && b_cnt_i != '0;
      out_leaf_o  <= LEAF_W'(a_i.ccol);
      out_cnt_o   <= b_cnt_i;
      out_o       <= prod;
      if (in_valid_i) mul_count_o <= mul_count_o + 32'(b_cnt_i);
    end
  end

  a_cnt_range: assert property (@(posedge clk) disable iff (!rst_n)
                 in_valid_i |-> b_cnt_i <= CW'(M));
endmodule
