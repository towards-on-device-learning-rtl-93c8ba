// tb_fp64_mul: checks the double multiplier bit for bit against the
// simulator's double arithmetic on random normal operands and simple values.
module tb_fp64_mul;
  import oselm_pkg::*;
  fp64_t a, b, y;
  int    checks = 0, failures = 0;

  fp64_mul dut (.a, .b, .y);

  function automatic fp64_t rnd_fp(input int emin, input int emax);
    fp64_t v;
    v[63]    = $urandom_range(0, 1);
    v[62:52] = 11'($urandom_range(emin, emax));
    v[51:32] = 20'($urandom);
    v[31:0]  = $urandom;
    return v;
  endfunction

  task automatic check(input fp64_t ta, input fp64_t tb_);
    fp64_t exp_y;
    a = ta; b = tb_;
    #1;
    exp_y = $realtobits($bitstoreal(ta) * $bitstoreal(tb_));
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10) $display("FAIL %h * %h = %h, expected %h", ta, tb_, y, exp_y);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 10000; n++) check(rnd_fp(700, 1300), rnd_fp(700, 1300));
    for (int n = 0; n < 2000; n++) check(rnd_fp(1020, 1026), {1'b0, 11'd1023, 52'($urandom_range(0, 15)) << 48});
    check($realtobits(1.5), $realtobits(-2.0));
    check($realtobits(0.1), $realtobits(10.0));
    check($realtobits(3.0), $realtobits(1.0 / 3.0));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
