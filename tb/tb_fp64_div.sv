// tb_fp64_div: checks the sequential divider bit for bit against the
// simulator's double division and checks its latency of 56 clocks from the
// start clock to done.
module tb_fp64_div;
  import oselm_pkg::*;
  logic  clk = 0, rst_n = 0, start = 0, busy, done;
  fp64_t a, b, y;
  int    checks = 0, failures = 0;

  fp64_div dut (.clk, .rst_n, .start, .a, .b, .busy, .done, .y);
  always #5 clk = ~clk;

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
    int    cyc;
    @(negedge clk);
    a = ta; b = tb_; start = 1;
    @(posedge clk);
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done) begin
      @(posedge clk); @(negedge clk);
      cyc++;
    end
    exp_y = $realtobits($bitstoreal(ta) / $bitstoreal(tb_));
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10) $display("FAIL %h / %h = %h, expected %h", ta, tb_, y, exp_y);
    end
    checks++;
    if (cyc != 56) begin
      failures++;
      if (failures < 10) $display("FAIL latency %0d, expected 56", cyc);
    end
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) check(rnd_fp(800, 1250), rnd_fp(800, 1250));
    // the training use: 1 / (1 + s) with s >= 0
    for (int n = 0; n < 1000; n++) check(FP_ONE, {1'b0, rnd_fp(1023, 1040)});
    check($realtobits(1.0), $realtobits(3.0));
    check($realtobits(7.0), $realtobits(7.0));
    check($realtobits(-1.0), $realtobits(10.0));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
