// tb_fp64_add: checks the double-precision adder against the simulator's
// own IEEE arithmetic on real numbers: directed cases (cancellation, carry
// out, zero operands) and random operands with near and far exponents.
module tb_fp64_add;
  logic [63:0] a, b, y;
  int checks = 0, failures = 0;

  fp64_add dut (.a(a), .b(b), .y(y));

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
    exp_y = $realtobits($bitstoreal(aa) + $bitstoreal(bb));
    if (exp_y == 64'h8000_0000_0000_0000) exp_y = 64'd0;  // -0 is returned as +0
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10)
        $display("MISMATCH %h + %h = %h expected %h", aa, bb, y, exp_y);
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
    logic [63:0] r;
    check($realtobits(2.0), $realtobits(3.0));
    check($realtobits(-1.5), $realtobits(1.5));
    check($realtobits(0.0), $realtobits(7.0));
    check($realtobits(7.0), $realtobits(0.0));
    check($realtobits(1.0), $realtobits(-0.9999999));
    check($realtobits(1.0e20), $realtobits(1.0));
    check($realtobits(0.1), $realtobits(0.2));
    for (int i = 0; i < 4000; i++) check(rnd_double(3), rnd_double(3));
    for (int i = 0; i < 4000; i++) check(rnd_double(80), rnd_double(80));
    for (int i = 0; i < 2000; i++) begin
      r = rnd_double(10);
      check(r, {~r[63], r[62:52], r[51:0] ^ 52'($urandom_range(0, 15))});
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
