// tb_hidden_mvm: drives the hidden-layer unit with random W, b and x held in
// testbench memories (one clock read latency), compares every h_j bit for
// bit with a reference in `real` arithmetic using the same summation order,
// and checks that done arrives n_hid*(n_in+2) clocks after start.
module tb_hidden_mvm;
  import oselm_pkg::*;
  import tb_ref_pkg::*;
  localparam int MAX_IN = 8, MAX_L = 6;
  localparam int WAW = $clog2(MAX_IN * MAX_L), LAW = $clog2(MAX_L), IAW = $clog2(MAX_IN);

  logic clk = 0, rst_n = 0, start = 0, busy, done, h_we;
  logic [15:0] n_in, n_hid;
  logic [WAW-1:0] w_addr;
  logic [LAW-1:0] b_addr, h_addr;
  logic [IAW-1:0] x_addr;
  fp64_t w_data, b_data, x_data, h_data;
  fp64_t w_m [MAX_IN*MAX_L];
  fp64_t b_m [MAX_L];
  fp64_t x_m [MAX_IN];
  fp64_t h_m [MAX_L];
  int checks = 0, failures = 0;

  hidden_mvm #(.MAX_IN(MAX_IN), .MAX_L(MAX_L)) dut (.*);
  always #5 clk = ~clk;
  always_ff @(posedge clk) begin
    w_data <= w_m[w_addr];
    b_data <= b_m[b_addr];
    x_data <= x_m[x_addr];
    if (h_we) h_m[h_addr] <= h_data;
  end

  task automatic run(input int ni, input int nh);
    real acc;
    int  cyc;
    for (int j = 0; j < MAX_L; j++) begin
      b_m[j] = $realtobits(rnd_real(1.0));
      h_m[j] = FP_ZERO;
      for (int k = 0; k < MAX_IN; k++) w_m[j*MAX_IN+k] = $realtobits(rnd_real(1.0));
    end
    for (int k = 0; k < MAX_IN; k++) x_m[k] = $realtobits(rnd_real(2.0));
    @(negedge clk);
    n_in = 16'(ni); n_hid = 16'(nh); start = 1;
    @(posedge clk); @(negedge clk);
    start = 0; cyc = 1;
    while (!done) begin @(posedge clk); @(negedge clk); cyc++; end
    // cyc counts the edge that samples start as 1
    checks++;
    if (cyc != nh * (ni + 2) + 1) begin
      failures++;
      $display("FAIL cycles %0d expected %0d", cyc, nh * (ni + 2) + 1);
    end
    @(posedge clk); @(negedge clk);
    for (int j = 0; j < nh; j++) begin
      acc = $bitstoreal(b_m[j]);
      for (int k = 0; k < ni; k++)
        acc = acc + $bitstoreal(w_m[j*MAX_IN+k]) * $bitstoreal(x_m[k]);
      checks++;
      if (h_m[j] !== $realtobits(sig_ref(acc))) begin
        failures++;
        $display("FAIL h[%0d]=%f expected %f", j, $bitstoreal(h_m[j]), sig_ref(acc));
      end
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(MAX_IN, MAX_L);
    run(3, 4);
    run(1, 1);
    for (int n = 0; n < 20; n++) run($urandom_range(1, MAX_IN), $urandom_range(1, MAX_L));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
