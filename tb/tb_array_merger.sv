// tb_array_merger: two sorted streams with unique coordinates inside each and
// many shared coordinates between them go through the merger. The output must
// be the sorted union with values of shared coordinates added, N elements per
// firing while both inputs hold N or more, at the documented latency, and no
// firing may happen while an unfinished input holds fewer than N elements.
module tb_array_merger;
  import sparch_pkg::*;
  localparam int N = 16, LG = $clog2(N), PW = $clog2(N+1);
  logic clk = 0, rst_n = 0;
  lane_t [N-1:0] ah, bh, out_d;
  logic [7:0] acnt, bcnt;
  logic adone, bdone, en, ready, fire, out_valid;
  logic [PW-1:0] popa, popb, out_cnt;
  logic [5:0] tag, out_tag;
  int checks = 0, failures = 0;
  elem_t qa [$], qb [$], want [$], got [$];
  int fire_t [$], out_t [$];
  int fires = 0, full_fires = 0, sums = 0;

  array_merger #(.N(N)) dut (.clk(clk), .rst_n(rst_n),
    .a_head_i(ah), .a_cnt_i(acnt), .a_done_i(adone), .b_head_i(bh), .b_cnt_i(bcnt), .b_done_i(bdone),
    .en_i(en), .tag_i(tag), .ready_o(ready), .fire_o(fire), .pop_a_o(popa), .pop_b_o(popb),
    .out_o(out_d), .out_cnt_o(out_cnt), .out_valid_o(out_valid), .out_tag_o(out_tag));
  always #5 clk = ~clk;
  initial begin #2ms; $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // present the heads of the two queues; 'avail' limits what is visible
  int avail_a, avail_b;
  task automatic drive();
    int na, nb;
    na = (qa.size() < avail_a) ? qa.size() : avail_a;
    nb = (qb.size() < avail_b) ? qb.size() : avail_b;
    for (int k = 0; k < N; k++) begin
      ah[k] = (k < na) ? '{v: 1'b1, e: qa[k]} : '0;
      bh[k] = (k < nb) ? '{v: 1'b1, e: qb[k]} : '0;
    end
    acnt = 8'(na); bcnt = 8'(nb);
    adone = (avail_a >= qa.size()); bdone = (avail_b >= qb.size());
  endtask

  task automatic make_streams(int n);
    key_t k;
    qa.delete(); qb.delete(); want.delete();
    k = 0;
    for (int i = 0; i < n; i++) begin
      elem_t e, f;
      k = k + key_t'($urandom_range(1, 3));
      if ($urandom_range(0, 9) == 0) k = {k[63:32] + 32'd1, 32'd0};
      e = '{row: k[63:32], col: k[31:0], val: $realtobits(real'($urandom_range(1, 1000)) / 8.0)};
      f = '{row: k[63:32], col: k[31:0], val: $realtobits(real'($urandom_range(1, 1000)) / 16.0)};
      case ($urandom_range(0, 2))
        0: begin qa.push_back(e); want.push_back(e); end
        1: begin qb.push_back(f); want.push_back(f); end
        default: begin
          qa.push_back(e); qb.push_back(f);
          want.push_back('{row: e.row, col: e.col, val: $realtobits($bitstoreal(e.val) + $bitstoreal(f.val))});
        end
      endcase
    end
  endtask

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    en = 0; tag = 0; avail_a = 0; avail_b = 0;
    ah = '0; bh = '0; acnt = 0; bcnt = 0; adone = 0; bdone = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 20; run++) begin
      int guard;
      make_streams($urandom_range(1, 300));
      got.delete();
      avail_a = 0; avail_b = 0;
      guard = 0;
      while ((qa.size() > 0 || qb.size() > 0 || got.size() < want.size()) && guard < 5000) begin
        guard++;
        // data shows up gradually
        avail_a += $urandom_range(0, 8); avail_b += $urandom_range(0, 8);
        drive();
        en = ($urandom_range(0, 4) != 0);
        tag = 6'($urandom);
        #1;
        if (!adone && acnt < N && !bdone && bcnt < N) begin
          checks++; if (ready) begin failures++; $display("fired with too little data"); end
        end
        @(posedge clk);
        if (fire) begin
          fires++;
          if (int'(popa) + int'(popb) >= N - 1 && acnt >= N && bcnt >= N) full_fires++;
          if (acnt >= N && bcnt >= N) begin
            checks++;
            if (int'(popa) + int'(popb) < N - 1) begin failures++; $display("firing took only %0d", popa + popb); end
          end
          fire_t.push_back(cyc);
          for (int k = 0; k < popa; k++) void'(qa.pop_front());
          for (int k = 0; k < popb; k++) void'(qb.pop_front());
        end
        @(negedge clk);
        if (out_valid) begin
          int ft;
          ft = fire_t.pop_front();
          checks++;
          if (cyc - ft != 1 + LG) begin failures++; $display("latency %0d", cyc - ft); end
          for (int k = 0; k < out_cnt; k++) got.push_back(out_d[k].e);
        end
      end
      // drain pipeline
      en = 0;
      repeat (LG + 3) begin
        @(negedge clk);
        if (out_valid) begin void'(fire_t.pop_front()); for (int k = 0; k < out_cnt; k++) got.push_back(out_d[k].e); end
      end
      checks++;
      if (got.size() != want.size()) begin failures++; $display("run %0d: %0d elements out, %0d expected", run, got.size(), want.size()); end
      for (int i = 0; i < want.size() && i < got.size(); i++) begin
        checks++;
        if (got[i] !== want[i]) begin failures++;
          if (failures < 10) $display("run %0d elem %0d: got %h want %h", run, i, got[i], want[i]); end
      end
    end
    checks++;
    if (full_fires == 0) begin failures++; $display("no full-width firing seen"); end
    $display("firings %0d, full %0d", fires, full_fires);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
