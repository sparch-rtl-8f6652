// tb_multiplier_array: random A elements times random B fragments; every
// product, its coordinates, the leaf tag and the count must appear one cycle
// later, and the multiplication counter must count the products.
module tb_multiplier_array;
  import sparch_pkg::*;
  localparam int M = 16;
  logic clk = 0, rst_n = 0;
  logic in_valid, out_valid;
  a_elem_t a;
  logic [4:0] bcnt, out_cnt;
  elem_t [M-1:0] b, out_d;
  logic [5:0] out_leaf;
  logic [31:0] mcount;
  int checks = 0, failures = 0, expect_mults = 0;

  multiplier_array dut (.clk(clk), .rst_n(rst_n), .in_valid_i(in_valid), .a_i(a), .b_cnt_i(bcnt),
    .b_i(b), .out_valid_o(out_valid), .out_leaf_o(out_leaf), .out_cnt_o(out_cnt), .out_o(out_d),
    .mul_count_o(mcount));
  always #5 clk = ~clk;
  initial begin #1ms; $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    a_elem_t pa; elem_t [M-1:0] pb; logic [4:0] pc; logic pv;
    in_valid = 0; a = '0; b = '0; bcnt = 0; pv = 0; pa = '0; pb = '0; pc = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      checks++;
      if (out_valid !== pv) begin failures++; $display("t=%0d valid wrong", t); end
      if (pv) begin
        checks++;
        if (out_leaf !== pa.ccol[5:0] || out_cnt !== pc) begin failures++; $display("t=%0d leaf/count wrong", t); end
        for (int k = 0; k < pc; k++) begin
          checks++;
          if (out_d[k].row !== pa.row || out_d[k].col !== pb[k].col ||
              out_d[k].val !== $realtobits($bitstoreal(pa.val) * $bitstoreal(pb[k].val))) begin
            failures++; if (failures < 10) $display("t=%0d product %0d wrong", t, k);
          end
        end
      end
      in_valid = ($urandom_range(0, 3) != 0);
      a = '{row: $urandom, col: $urandom, ccol: 32'($urandom_range(0, 63)),
            val: $realtobits(real'($urandom_range(1, 99999)) / 37.0 - 500.0)};
      bcnt = 5'($urandom_range(1, M));
      for (int k = 0; k < M; k++)
        b[k] = '{row: $urandom, col: 32'(k * 3), val: $realtobits(real'($urandom_range(1, 99999)) / 13.0)};
      pv = in_valid; pa = a; pb = b; pc = bcnt;
      if (in_valid) expect_mults += bcnt;
    end
    @(negedge clk); in_valid = 0;
    repeat (2) @(negedge clk);
    checks++;
    if (mcount != 32'(expect_mults)) begin failures++; $display("mul count %0d want %0d", mcount, expect_mults); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
