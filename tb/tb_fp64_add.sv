// tb_fp64_add: checks the double adder bit for bit against the simulator's
// own double arithmetic on random normal operands, near-cancelling pairs,
// wide exponent gaps, zeros and subtraction.
module tb_fp64_add;
  import oselm_pkg::*;
  import tb_ref_pkg::*;
  fp64_t a, b, y;
  logic  sub;
  int    checks = 0, failures = 0;

  fp64_add dut (.a, .b, .sub, .y);

  function automatic fp64_t rnd_fp(input int emin, input int emax);
    fp64_t v;
    v[63]    = $urandom_range(0, 1);
    v[62:52] = 11'($urandom_range(emin, emax));
    v[51:32] = 20'($urandom);
    v[31:0]  = $urandom;
    return v;
  endfunction

  task automatic check(input fp64_t ta, input fp64_t tb_, input logic ts);
    real   r;
    fp64_t exp_y;
    a = ta; b = tb_; sub = ts;
    #1;
    r = ts ? ($bitstoreal(ta) - $bitstoreal(tb_)) : ($bitstoreal(ta) + $bitstoreal(tb_));
    exp_y = $realtobits(r);
    if (exp_y == 64'h8000_0000_0000_0000) exp_y = 64'd0;   // exact zero is +0
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10)
        $display("FAIL %h %s %h = %h, expected %h", ta, ts ? "-" : "+", tb_, y, exp_y);
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
    fp64_t t;
    for (int n = 0; n < 4000; n++) check(rnd_fp(900, 1100), rnd_fp(900, 1100), n[0]);
    for (int n = 0; n < 4000; n++) check(rnd_fp(1000, 1030), rnd_fp(1000, 1030), n[0]);
    // near cancellation: same exponent, nearby significands
    for (int n = 0; n < 2000; n++) begin
      t = rnd_fp(1000, 1040);
      check(t, {t[63:8], 8'($urandom)}, 1'b1);
      check(t, {~t[63], t[62:3], 3'($urandom)}, 1'b0);
      check(t, t + 64'h0010_0000_0000_0000, 1'b1);   // exponent +1
    end
    check($realtobits(1.0), $realtobits(0.0), 1'b0);
    check($realtobits(0.0), $realtobits(-2.5), 1'b0);
    check($realtobits(3.0), $realtobits(3.0), 1'b1);
    check($realtobits(1.0), $realtobits(1.0e-30), 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
