// tb_wb_bram: writes random W and b words, then reads them back through both
// read ports at different addresses in the same clock and checks the data
// and its one-clock latency.
module tb_wb_bram;
  import oselm_pkg::*;
  localparam int MAX_IN = 8, MAX_L = 5;
  localparam int WAW = $clog2(MAX_IN * MAX_L), LAW = $clog2(MAX_L);
  logic clk = 0, w_we = 0, b_we = 0;
  logic [WAW-1:0] w_waddr, w_raddr0, w_raddr1;
  logic [LAW-1:0] b_waddr, b_raddr0, b_raddr1;
  fp64_t wdata, w_rdata0, b_rdata0, w_rdata1, b_rdata1;
  fp64_t wr [MAX_IN*MAX_L];
  fp64_t br [MAX_L];
  int checks = 0, failures = 0;

  wb_bram #(.MAX_IN(MAX_IN), .MAX_L(MAX_L)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < MAX_IN*MAX_L; a++) begin
      @(negedge clk);
      wr[a] = {$urandom, $urandom};
      w_we = 1; w_waddr = WAW'(a); wdata = wr[a];
    end
    for (int a = 0; a < MAX_L; a++) begin
      @(negedge clk);
      w_we = 0;
      br[a] = {$urandom, $urandom};
      b_we = 1; b_waddr = LAW'(a); wdata = br[a];
    end
    @(negedge clk);
    b_we = 0;
    for (int n = 0; n < 200; n++) begin
      int a0, a1, c0, c1;
      a0 = $urandom_range(0, MAX_IN*MAX_L-1); a1 = $urandom_range(0, MAX_IN*MAX_L-1);
      c0 = $urandom_range(0, MAX_L-1);        c1 = $urandom_range(0, MAX_L-1);
      w_raddr0 = WAW'(a0); w_raddr1 = WAW'(a1); b_raddr0 = LAW'(c0); b_raddr1 = LAW'(c1);
      @(posedge clk); #1;
      w_raddr0 = '0; w_raddr1 = '0; b_raddr0 = '0; b_raddr1 = '0;   // data must not follow
      checks += 4;
      if (w_rdata0 !== wr[a0]) failures++;
      if (w_rdata1 !== wr[a1]) failures++;
      if (b_rdata0 !== br[c0]) failures++;
      if (b_rdata1 !== br[c1]) failures++;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
