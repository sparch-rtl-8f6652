// tb_fp64_mul: products of random normal doubles must equal the simulator's
// double multiplication bit for bit (round to nearest even); also checks
// signs, zeros, and that infinities give a NaN and overflow gives infinity.
module tb_fp64_mul;
  logic [63:0] a, b, p;
  int checks = 0, failures = 0;
  fp64_mul dut (.a_i(a), .b_i(b), .p_o(p));
  initial begin #10ms; $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic logic [63:0] rnd(int emin, int emax);
    return {1'($urandom), 11'(1023 + $urandom_range(0, emax - emin) + emin), 20'($urandom), 32'($urandom)};
  endfunction
  task automatic check(logic [63:0] x, logic [63:0] y, logic [63:0] want);
    a = x; b = y; #1; checks++;
    if (p !== want) begin failures++;
      if (failures < 10) $display("%h * %h: got %h want %h", x, y, p, want); end
  endtask
  initial begin
    for (int t = 0; t < 20000; t++) begin
      logic [63:0] x, y;
      x = rnd(-300, 300); y = rnd(-300, 300);
      check(x, y, $realtobits($bitstoreal(x) * $bitstoreal(y)));
    end
    check($realtobits(1.5), $realtobits(-2.0), $realtobits(-3.0));
    check($realtobits(0.0), $realtobits(7.25), $realtobits(0.0));
    check(64'h7fe0_0000_0000_0000, 64'h7fe0_0000_0000_0000, 64'h7ff0_0000_0000_0000);
    a = 64'h7ff0_0000_0000_0000; b = $realtobits(1.0); #1; checks++;
    if (p[62:52] !== 11'h7ff || p[51:0] == 0) begin failures++; $display("inf input did not give NaN"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
