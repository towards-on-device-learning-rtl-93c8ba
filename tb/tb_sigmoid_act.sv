// tb_sigmoid_act: checks the activation bit for bit against the
// piecewise-linear reference, and that it stays within 0.02 of the true
// sigmoid 1/(1+exp(-x)).
module tb_sigmoid_act;
  import oselm_pkg::*;
  import tb_ref_pkg::*;
  fp64_t x, y;
  int    checks = 0, failures = 0;

  sigmoid_act dut (.x, .y);

  task automatic check(input real xr);
    real ref_y, true_y, d;
    x = $realtobits(xr);
    #1;
    ref_y  = sig_ref(xr);
    true_y = 1.0 / (1.0 + $exp(-xr));
    d      = $bitstoreal(y) - true_y;
    checks++;
    if (y !== $realtobits(ref_y) || d > 0.02 || d < -0.02) begin
      failures++;
      if (failures < 10) $display("FAIL x=%f y=%f ref=%f true=%f", xr, $bitstoreal(y), ref_y, true_y);
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
    for (int n = 0; n < 5000; n++) check(rnd_real(8.0));
    for (int n = 0; n < 1000; n++) check(rnd_real(1.2));
    check(0.0); check(1.0); check(-1.0); check(2.375); check(-2.375);
    check(5.0); check(-5.0); check(20.0); check(-20.0); check(1.0e-3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
