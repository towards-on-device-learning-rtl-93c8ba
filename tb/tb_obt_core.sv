// tb_obt_core: the training module against a behavioural DMA/DDR model and a
// testbench W/b memory. P0 (identity plus a small symmetric perturbation),
// eta0, W, b and the training samples are random. After each run, eta (read
// through the inference read port) and P must equal, bit for bit, a software
// model in `real` arithmetic that performs the same operations in the same
// order; the clock count must match the module's schedule. A second run
// without init continues from the kept P and eta.
module tb_obt_core;
  import oselm_pkg::*;
  import tb_ref_pkg::*;
  localparam int MAX_IN = 8, MAX_L = 6, MAX_ON = 2;
  localparam int WAW = $clog2(MAX_IN * MAX_L), LAW = $clog2(MAX_L), EAW = $clog2(MAX_L * MAX_ON);
  localparam int P_W = 0, E_W = 64, X_W = 128, Y_W = 512;   // DDR word offsets

  logic clk = 0, rst_n = 0, start = 0, busy, done;
  cfg_t cfg;
  dma_cmd_t dma_cmd;
  logic dma_ready, dma_rd_valid, dma_done, wr_ready_unused;
  fp64_t dma_rd_data, w_rdata, b_rdata, eta_rdata;
  logic [WAW-1:0] w_raddr;
  logic [LAW-1:0] b_raddr;
  logic [EAW-1:0] eta_raddr;
  fp64_t wm [MAX_IN*MAX_L];
  fp64_t bm [MAX_L];
  int checks = 0, failures = 0;
  oselm_ref mdl_ref;

  obt_core #(.MAX_IN(MAX_IN), .MAX_L(MAX_L), .MAX_ON(MAX_ON)) dut (.*);
  dma_model #(.WORDS(1024)) mdl (.clk, .cmd(dma_cmd), .ready(dma_ready), .rd_valid(dma_rd_valid),
    .rd_data(dma_rd_data), .wr_data(FP_ZERO), .wr_valid(1'b0), .wr_ready(wr_ready_unused), .done(dma_done));
  always #5 clk = ~clk;
  always_ff @(posedge clk) begin
    w_rdata <= wm[w_raddr];
    b_rdata <= bm[b_raddr];
  end

  // fresh model: W, b, P0, eta0 into the memories and the reference
  task automatic setup(input int ni, input int nh, input int no);
    real v;
    mdl_ref = new(ni, nh, no);
    for (int j = 0; j < nh; j++) begin
      for (int k = 0; k < ni; k++) begin
        mdl_ref.w[j*ni+k] = rnd_real(1.0);
        wm[j*MAX_IN+k] = $realtobits(mdl_ref.w[j*ni+k]);
      end
      mdl_ref.b[j] = rnd_real(0.5);
      bm[j] = $realtobits(mdl_ref.b[j]);
    end
    for (int i = 0; i < nh; i++)
      for (int j = i; j < nh; j++) begin
        v = rnd_real(0.1) + ((i == j) ? 1.0 : 0.0);
        mdl_ref.p[i*nh+j] = v; mdl_ref.p[j*nh+i] = v;
      end
    for (int n = 0; n < nh*nh; n++) mdl.mem[P_W + n] = $realtobits(mdl_ref.p[n]);
    for (int n = 0; n < nh*no; n++) begin
      mdl_ref.eta[n] = rnd_real(1.0);
      mdl.mem[E_W + n] = $realtobits(mdl_ref.eta[n]);
    end
  endtask

  task automatic run(input int ni, input int nh, input int no, input int ns, input logic init);
    int cyc, exp_cyc, per;
    for (int n = 0; n < ns*ni; n++) mdl.mem[X_W + n] = $realtobits(rnd_real(2.0));
    for (int n = 0; n < ns*no; n++) mdl.mem[Y_W + n] = $realtobits(rnd_real(1.0));
    cfg = '0;
    cfg.mode = MODE_TRAIN; cfg.init = init;
    cfg.n_in = 16'(ni); cfg.n_hid = 16'(nh); cfg.n_out = 16'(no); cfg.n_samples = ns;
    cfg.addr_p = P_W * 8; cfg.addr_eta = E_W * 8; cfg.addr_x = X_W * 8; cfg.addr_y = Y_W * 8;
    @(negedge clk);
    start = 1;
    @(posedge clk); @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(posedge clk); @(negedge clk); cyc++; end
    // reference
    for (int s = 0; s < ns; s++) begin
      for (int k = 0; k < ni; k++) mdl_ref.x[k] = $bitstoreal(mdl.mem[X_W + s*ni + k]);
      for (int k = 0; k < no; k++) mdl_ref.y[k] = $bitstoreal(mdl.mem[Y_W + s*no + k]);
      mdl_ref.train();
    end
    // schedule: cyc counts the edge that samples start as 1
    per = (ni + 2) + (no + 2) + nh*(ni + 2) + 3*nh*nh + 2*nh + 2*nh*no + 60;
    exp_cyc = 1 + (init ? (nh*nh + 2) + (nh*no + 2) : 0) + ns * per;
    checks++;
    if (cyc != exp_cyc) begin failures++; $display("FAIL cycles %0d expected %0d", cyc, exp_cyc); end
    for (int j = 0; j < nh; j++)
      for (int k = 0; k < no; k++) begin
        eta_raddr = EAW'(j*MAX_ON + k);
        #1;
        checks++;
        if (eta_rdata !== $realtobits(mdl_ref.eta[j*no+k])) begin
          failures++;
          if (failures < 10) $display("FAIL eta[%0d][%0d] = %g expected %g", j, k,
                                      $bitstoreal(eta_rdata), mdl_ref.eta[j*no+k]);
        end
      end
    for (int i = 0; i < nh; i++)
      for (int j = 0; j < nh; j++) begin
        checks++;
        if (dut.p_mem[i*MAX_L+j] !== $realtobits(mdl_ref.p[i*nh+j])) begin
          failures++;
          if (failures < 10) $display("FAIL P[%0d][%0d]", i, j);
        end
      end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    setup(5, 4, 2);
    run(5, 4, 2, 3, 1'b1);
    run(5, 4, 2, 2, 1'b0);     // continue from the kept P and eta
    setup(MAX_IN, MAX_L, MAX_ON);
    run(MAX_IN, MAX_L, MAX_ON, 4, 1'b1);
    setup(3, 5, 1);
    run(3, 5, 1, 3, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
