// tb_comparator_array: checks the comparator array against a two-pointer
// merge. Random sorted lists with random numbers of valid entries (including
// equal keys across the two lists) are applied; every merged lane, its valid
// bit and its source flag must match the reference, which takes the top
// element first on equal keys, as the '>=' boundary tiles do.
module tb_comparator_array;
  import sparch_pkg::*;
  localparam int N = 16;
  lane_t [N-1:0]   top, left;
  lane_t [2*N-1:0] merged;
  logic  [2*N-1:0] from_top;
  int checks = 0, failures = 0;

  comparator_array #(.N(N)) dut (.top_i(top), .left_i(left), .merged_o(merged),
                                 .from_top_o(from_top));

  initial begin #10ms; $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // sorted list of n valid lanes with keys drawn from a small range
  task automatic make_list(output lane_t [N-1:0] l, input int n, input int step);
    key_t k;
    k = 64'($urandom_range(0, 3));
    for (int i = 0; i < N; i++) begin
      l[i].v     = (i < n);
      l[i].e.row = k[63:32];
      l[i].e.col = k[31:0];
      l[i].e.val = {32'($urandom), 32'($urandom)};
      k = k + 64'($urandom_range(1, step));
      if ($urandom_range(0, 7) == 0) k = k + 64'h1_0000_0000; // next row
    end
  endtask

  task automatic check_once();
    int ti, li;
    lane_t want;
    logic  wtop;
    #1;
    ti = 0; li = 0;
    for (int k = 0; k < 2*N; k++) begin
      if (ti < N && top[ti].v && (!(li < N && left[li].v) || key_of(top[ti].e) <= key_of(left[li].e))) begin
        want = top[ti]; wtop = 1'b1; ti++;
      end else if (li < N && left[li].v) begin
        want = left[li]; wtop = 1'b0; li++;
      end else begin
        want = '0; wtop = 1'b0;
      end
      checks++;
      if (merged[k].v !== want.v || (want.v && (merged[k].e !== want.e || from_top[k] !== wtop))) begin
        failures++;
        if (failures < 10) $display("lane %0d: got v=%0d key=%h from_top=%0d, want v=%0d key=%h from_top=%0d",
          k, merged[k].v, key_of(merged[k].e), from_top[k], want.v, key_of(want.e), wtop);
      end
    end
  endtask

  initial begin
    // a fixed case: interleaved keys, full lists
    for (int i = 0; i < N; i++) begin
      top[i]  = '{v: 1'b1, e: '{row: 0, col: 32'(2*i),   val: 64'(i)}};
      left[i] = '{v: 1'b1, e: '{row: 0, col: 32'(2*i+1), val: 64'(100+i)}};
    end
    check_once();
    for (int t = 0; t < 3000; t++) begin
      make_list(top,  $urandom_range(0, N), $urandom_range(1, 4));
      make_list(left, $urandom_range(0, N), $urandom_range(1, 4));
      check_once();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
