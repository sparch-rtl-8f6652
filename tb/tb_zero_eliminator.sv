// tb_zero_eliminator: random lane vectors with random holes go in every cycle;
// each must come out log2(N) cycles later with its valid lanes packed toward
// lane 0 in their original order and the remaining lanes invalid.
module tb_zero_eliminator;
  import sparch_pkg::*;
  localparam int N  = 16;
  localparam int LG = $clog2(N);
  logic clk = 0, rst_n = 0;
  lane_t [N-1:0] in_d, out_d;
  logic in_valid, out_valid;
  int checks = 0, failures = 0;
  lane_t [N-1:0] hist [$];
  logic          vhist [$];

  zero_eliminator #(.N(N)) dut (.clk(clk), .rst_n(rst_n), .in_i(in_d), .in_valid_i(in_valid),
                                .out_o(out_d), .out_valid_o(out_valid));
  always #5 clk = ~clk;
  initial begin #1ms; $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    in_d = '0; in_valid = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      // compare the vector sent LG cycles ago
      if (hist.size() == LG) begin
        lane_t [N-1:0] src; logic sv; int j;
        src = hist.pop_front(); sv = vhist.pop_front();
        checks++;
        if (out_valid !== sv) begin failures++; $display("t=%0d valid got %0d want %0d", t, out_valid, sv); end
        j = 0;
        for (int i = 0; i < N; i++) if (src[i].v) begin
          checks++;
          if (!out_d[j].v || out_d[j].e !== src[i].e) begin
            failures++; if (failures < 10) $display("t=%0d lane %0d wrong", t, j);
          end
          j++;
        end
        for (int i = j; i < N; i++) begin
          checks++;
          if (out_d[i].v) begin failures++; if (failures < 10) $display("t=%0d lane %0d should be empty", t, i); end
        end
      end
      for (int i = 0; i < N; i++) begin
        in_d[i].v = ($urandom_range(0, 2) != 0);
        in_d[i].e = '{row: $urandom, col: $urandom, val: {$urandom, $urandom}};
      end
      if (t % 97 == 0) in_d = '0;
      in_valid = ($urandom_range(0, 3) != 0);
      hist.push_back(in_d); vhist.push_back(in_valid);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
