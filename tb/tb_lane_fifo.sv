// tb_lane_fifo: random pushes and pops of up to N elements per cycle, kept
// within the free space and the stored count; a queue model checks count,
// free space and every visible head lane after each clock edge.
module tb_lane_fifo;
  import sparch_pkg::*;
  localparam int N = 16, DEPTH = 64;
  localparam int CW = $clog2(DEPTH+1), PW = $clog2(N+1);
  logic clk = 0, rst_n = 0;
  logic [PW-1:0] push_cnt, pop_cnt;
  elem_t [N-1:0] push_d;
  lane_t [N-1:0] head;
  logic [CW-1:0] count, free;
  int checks = 0, failures = 0;
  elem_t model [$];

  lane_fifo #(.N(N), .DEPTH(DEPTH)) dut (.clk(clk), .rst_n(rst_n), .push_cnt_i(push_cnt),
    .push_i(push_d), .pop_cnt_i(pop_cnt), .head_o(head), .count_o(count), .free_o(free));
  always #5 clk = ~clk;
  initial begin #1ms; $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    push_cnt = 0; pop_cnt = 0; push_d = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 5000; t++) begin
      int np, nq, bias;
      @(negedge clk);
      checks++;
      if (int'(count) != model.size() || int'(free) != DEPTH - model.size()) begin
        failures++; if (failures < 10) $display("t=%0d count %0d free %0d, model %0d", t, count, free, model.size());
      end
      for (int k = 0; k < N && k < model.size(); k++) begin
        checks++;
        if (!head[k].v || head[k].e !== model[k]) begin
          failures++; if (failures < 10) $display("t=%0d head %0d wrong", t, k);
        end
      end
      bias = (t / 500) % 2;  // alternate filling and draining phases
      np = $urandom_range(0, N);
      if (np > DEPTH - model.size()) np = DEPTH - model.size();
      if (bias == 1 && $urandom_range(0, 1) == 0) np = 0;
      nq = $urandom_range(0, N);
      if (nq > model.size()) nq = model.size();
      if (bias == 0 && $urandom_range(0, 1) == 0) nq = 0;
      push_cnt = PW'(np); pop_cnt = PW'(nq);
      for (int k = 0; k < N; k++) push_d[k] = '{row: $urandom, col: $urandom, val: {$urandom, $urandom}};
      for (int k = 0; k < nq; k++) void'(model.pop_front());
      for (int k = 0; k < np; k++) model.push_back(push_d[k]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
