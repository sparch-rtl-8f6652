// tb_fp64_add: sums of random normal doubles (close and far exponents, both
// signs, exact cancellation) must equal the simulator's double addition bit
// for bit (round to nearest even).
module tb_fp64_add;
  logic [63:0] a, b, s;
  int checks = 0, failures = 0;
  fp64_add dut (.a_i(a), .b_i(b), .s_o(s));
  initial begin #10ms; $display("watchdog expired"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic logic [63:0] rnd(int emin, int emax);
    return {1'($urandom), 11'(1023 + $urandom_range(0, emax - emin) + emin), 20'($urandom), 32'($urandom)};
  endfunction
  task automatic check(logic [63:0] x, logic [63:0] y);
    logic [63:0] want;
    want = $realtobits($bitstoreal(x) + $bitstoreal(y));
    a = x; b = y; #1; checks++;
    if (s !== want) begin failures++;
      if (failures < 10) $display("%h + %h: got %h want %h", x, y, s, want); end
  endtask
  initial begin
    for (int t = 0; t < 20000; t++) begin
      logic [63:0] x, y;
      x = rnd(-20, 20);
      case (t % 4)
        0: y = rnd(-20, 20);
        1: y = {~x[63], x[62:4], 4'($urandom)};               // near cancellation
        2: y = {1'($urandom), x[62:52], 20'($urandom), 32'($urandom)}; // equal exponents
        default: y = rnd(-80, 80);
      endcase
      check(x, y);
    end
    check($realtobits(2.5), $realtobits(-2.5));
    check($realtobits(0.0), $realtobits(-3.0));
    check($realtobits(1.0), $realtobits(1.0));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
