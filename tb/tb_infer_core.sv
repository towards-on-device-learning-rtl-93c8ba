// tb_infer_core: the inference module against a behavioural DMA/DDR model,
// a testbench W/b memory and a testbench eta memory. For random models and
// test vectors, every y_hat written back to DDR must equal, bit for bit, the
// software model; the clock count must match the module's schedule.
module tb_infer_core;
  import oselm_pkg::*;
  import tb_ref_pkg::*;
  localparam int MAX_IN = 8, MAX_L = 6, MAX_ON = 2;
  localparam int WAW = $clog2(MAX_IN * MAX_L), LAW = $clog2(MAX_L), EAW = $clog2(MAX_L * MAX_ON);
  localparam int X_W = 0, YH_W = 512;

  logic clk = 0, rst_n = 0, start = 0, busy, done;
  cfg_t cfg;
  dma_cmd_t dma_cmd;
  logic dma_ready, dma_rd_valid, dma_done, dma_wr_valid, dma_wr_ready;
  fp64_t dma_rd_data, dma_wr_data, w_rdata, b_rdata, eta_rdata;
  logic [WAW-1:0] w_raddr;
  logic [LAW-1:0] b_raddr;
  logic [EAW-1:0] eta_raddr;
  fp64_t wm [MAX_IN*MAX_L];
  fp64_t bm [MAX_L];
  fp64_t em [MAX_L*MAX_ON];
  int checks = 0, failures = 0;
  oselm_ref r;

  infer_core #(.MAX_IN(MAX_IN), .MAX_L(MAX_L), .MAX_ON(MAX_ON)) dut (.*);
  dma_model #(.WORDS(1024)) mdl (.clk, .cmd(dma_cmd), .ready(dma_ready), .rd_valid(dma_rd_valid),
    .rd_data(dma_rd_data), .wr_data(dma_wr_data), .wr_valid(dma_wr_valid), .wr_ready(dma_wr_ready),
    .done(dma_done));
  always #5 clk = ~clk;
  always_ff @(posedge clk) begin
    w_rdata <= wm[w_raddr];
    b_rdata <= bm[b_raddr];
  end
  assign eta_rdata = em[eta_raddr];

  task automatic run(input int ni, input int nh, input int no, input int ns);
    int cyc, exp_cyc;
    r = new(ni, nh, no);
    for (int j = 0; j < nh; j++) begin
      for (int k = 0; k < ni; k++) begin
        r.w[j*ni+k] = rnd_real(1.0); wm[j*MAX_IN+k] = $realtobits(r.w[j*ni+k]);
      end
      r.b[j] = rnd_real(0.5); bm[j] = $realtobits(r.b[j]);
      for (int k = 0; k < no; k++) begin
        r.eta[j*no+k] = rnd_real(3.0); em[j*MAX_ON+k] = $realtobits(r.eta[j*no+k]);
      end
    end
    for (int n = 0; n < ns*ni; n++) mdl.mem[X_W + n] = $realtobits(rnd_real(2.0));
    for (int n = 0; n < ns*no; n++) mdl.mem[YH_W + n] = FP_ZERO;
    cfg = '0;
    cfg.mode = MODE_INFER;
    cfg.n_in = 16'(ni); cfg.n_hid = 16'(nh); cfg.n_out = 16'(no); cfg.n_samples = ns;
    cfg.addr_x = X_W * 8; cfg.addr_yhat = YH_W * 8;
    @(negedge clk);
    start = 1;
    @(posedge clk); @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(posedge clk); @(negedge clk); cyc++; end
    exp_cyc = 1 + ns * ((ni + 2) + nh*(ni + 2) + 2 + nh*no + (no + 2) + 1);
    checks++;
    if (cyc != exp_cyc) begin failures++; $display("FAIL cycles %0d expected %0d", cyc, exp_cyc); end
    for (int s = 0; s < ns; s++) begin
      for (int k = 0; k < ni; k++) r.x[k] = $bitstoreal(mdl.mem[X_W + s*ni + k]);
      r.infer();
      for (int k = 0; k < no; k++) begin
        checks++;
        if (mdl.mem[YH_W + s*no + k] !== $realtobits(r.yhat[k])) begin
          failures++;
          $display("FAIL sample %0d y_hat[%0d] = %g expected %g", s, k,
                   $bitstoreal(mdl.mem[YH_W + s*no + k]), r.yhat[k]);
        end
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
    run(5, 4, 2, 3);
    run(MAX_IN, MAX_L, MAX_ON, 5);
    run(2, 3, 1, 4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
