// tb_mem: behavioural word memory for the testbenches, standing in for the
// HBM. RP in-order read ports and one write port share one array of 128-bit
// words. Each port accepts a request when its ready is high; ready is random
// so that the clients see back-pressure. Read data returns in order, 1 to 4
// cycles after the request. Testbenches fill and inspect 'mem' directly.
module tb_mem
  import sparch_pkg::*;
#(
  parameter int RP = 1,
  parameter int AW = 16
) (
  input  logic  clk,
  input  logic  rd_valid [RP],
  input  addr_t rd_addr  [RP],
  output logic  rd_ready [RP],
  output logic  rsp_valid [RP],
  output word_t rsp_data  [RP],
  input  logic  wr_valid,
  input  addr_t wr_addr,
  input  word_t wr_data,
  output logic  wr_ready
);
  word_t mem [2**AW];
  int    cyc = 0;
  int    writes = 0;
  addr_t pend_a [RP][$];
  int    pend_t [RP][$];

  initial begin
    foreach (mem[i]) mem[i] = '0;
    foreach (rd_ready[p]) begin rd_ready[p] = 0; rsp_valid[p] = 0; rsp_data[p] = '0; end
    wr_ready = 0;
  end

  always @(negedge clk) begin
    foreach (rd_ready[p]) rd_ready[p] <= ($urandom_range(0, 3) != 0);
    wr_ready <= ($urandom_range(0, 3) != 0);
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    for (int p = 0; p < RP; p++) begin
      if (pend_a[p].size() > 0 && pend_t[p][0] <= cyc) begin
        rsp_valid[p] <= 1'b1;
        rsp_data[p]  <= mem[AW'(pend_a[p].pop_front())];
        void'(pend_t[p].pop_front());
      end else begin
        rsp_valid[p] <= 1'b0;
      end
      if (rd_valid[p] && rd_ready[p]) begin
        if (rd_addr[p] >= 2**AW) $display("tb_mem: read address %h out of range", rd_addr[p]);
        pend_a[p].push_back(rd_addr[p]);
        pend_t[p].push_back(cyc + $urandom_range(0, 3));
      end
    end
    if (wr_valid && wr_ready) begin
      if (wr_addr >= 2**AW) $display("tb_mem: write address %h out of range", wr_addr);
      mem[AW'(wr_addr)] <= wr_data;
      writes <= writes + 1;
    end
  end
endmodule
