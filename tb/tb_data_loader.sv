// tb_data_loader: the data loading module against a behavioural DMA/DDR
// model. W (n_hid x n_in, row-major) and b are placed in DDR; after done,
// every BRAM word written must equal its DDR source at the address
// j*MAX_IN + k (W) or j (b), and exactly n_hid*n_in + n_hid words must have
// been written. Also checks the clock count for the model's timing.
module tb_data_loader;
  import oselm_pkg::*;
  localparam int MAX_IN = 8, MAX_L = 5;
  localparam int WAW = $clog2(MAX_IN * MAX_L), LAW = $clog2(MAX_L);
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  cfg_t cfg;
  dma_cmd_t dma_cmd;
  logic dma_ready, dma_rd_valid, dma_done, w_we, b_we, wr_ready_unused;
  fp64_t dma_rd_data, wdata;
  logic [WAW-1:0] w_waddr;
  logic [LAW-1:0] b_waddr;
  fp64_t wm [MAX_IN*MAX_L];
  fp64_t bm [MAX_L];
  int n_wr = 0, checks = 0, failures = 0;

  data_loader #(.MAX_IN(MAX_IN), .MAX_L(MAX_L)) dut (.*);
  dma_model #(.WORDS(1024)) mdl (.clk, .cmd(dma_cmd), .ready(dma_ready), .rd_valid(dma_rd_valid),
    .rd_data(dma_rd_data), .wr_data(FP_ZERO), .wr_valid(1'b0), .wr_ready(wr_ready_unused), .done(dma_done));
  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (w_we) begin wm[w_waddr] <= wdata; n_wr <= n_wr + 1; end
    if (b_we) begin bm[b_waddr] <= wdata; n_wr <= n_wr + 1; end
  end

  task automatic run(input int ni, input int nh);
    int cyc, wbase, bbase;
    wbase = 32; bbase = 600;
    for (int n = 0; n < 1024; n++) mdl.mem[n] = {$urandom, $urandom};
    cfg = '0;
    cfg.n_in = 16'(ni); cfg.n_hid = 16'(nh);
    cfg.addr_w = 32'(wbase * 8); cfg.addr_b = 32'(bbase * 8);
    @(negedge clk);
    n_wr = 0;
    start = 1;
    @(posedge clk); @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(posedge clk); @(negedge clk); cyc++; end
    // per transfer: command clock, model's first-word clock, one per word;
    // cyc counts the edge that samples start as 1
    checks++;
    if (cyc != 1 + (2 + ni*nh) + (2 + nh)) begin
      failures++; $display("FAIL cycles %0d expected %0d", cyc, 1 + (2 + ni*nh) + (2 + nh));
    end
    @(negedge clk);
    checks++;
    if (n_wr != ni*nh + nh) begin failures++; $display("FAIL %0d words written", n_wr); end
    for (int j = 0; j < nh; j++) begin
      for (int k = 0; k < ni; k++) begin
        checks++;
        if (wm[j*MAX_IN+k] !== mdl.mem[wbase + j*ni + k]) begin
          failures++; $display("FAIL W[%0d][%0d]", j, k);
        end
      end
      checks++;
      if (bm[j] !== mdl.mem[bbase + j]) begin failures++; $display("FAIL b[%0d]", j); end
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(MAX_IN, MAX_L);
    run(3, 2);
    run(1, 1);
    run(7, 4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
