// tb_fp64_mul: checks the double-precision multiplier against the
// simulator's own IEEE arithmetic on real numbers, for directed and random
// operands within the normal range (signs, exact products, rounding cases).
module tb_fp64_mul;
  logic [63:0] a, b, y;
  int checks = 0, failures = 0;

  fp64_mul dut (.a(a), .b(b), .y(y));

  function automatic logic [63:0] rnd_double(input int unsigned emax);
    logic [63:0] v;
    v[63]    = $urandom_range(0, 1);
    v[62:52] = 11'(1023 - emax + $urandom_range(0, 2 * emax));
    v[51:32] = 20'($urandom);
    v[31:0]  = $urandom;
    return v;
  endfunction

  task automatic check(input logic [63:0] aa, input logic [63:0] bb);
    logic [63:0] exp_y;
    a = aa; b = bb;
    #1;
    exp_y = $realtobits($bitstoreal(aa) * $bitstoreal(bb));
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10)
        $display("MISMATCH %h * %h = %h expected %h", aa, bb, y, exp_y);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check($realtobits(2.0), $realtobits(3.0));
    check($realtobits(-1.5), $realtobits(2.25));
    check($realtobits(0.0), $realtobits(7.0));
    check($realtobits(1.0/3.0), $realtobits(3.0));
    check($realtobits(0.1), $realtobits(0.7));
    for (int i = 0; i < 5000; i++) check(rnd_double(200), rnd_double(200));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
