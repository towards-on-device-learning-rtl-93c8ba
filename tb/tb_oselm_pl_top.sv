// tb_oselm_pl_top: end-to-end test of the programmable-logic top. The
// testbench plays the processor: it writes the configuration over
// AXI4-Lite, places W, b, P0, eta0 and the samples in a behavioural DDR
// (random AXI back-pressure), and runs the working modes in turn: load W/b
// (mode 0), train with P0/eta0 loading (mode 1, init), infer (mode 2), train
// again continuing from the kept state, infer again. Every y_hat written
// back must equal, bit for bit, a software model in `real` arithmetic.
// Each mechanism must occur at least once: every working mode, the P0/eta0
// load, continued training, burst splitting at MAX_BURST and at a 4 KiB
// boundary, AXI back-pressure, AXI writes, busy seen in STATUS.
module tb_oselm_pl_top;
  import oselm_pkg::*;
  import tb_ref_pkg::*;
  localparam logic [31:0] BASE = 32'h4000_0000;
  // run-time topology and DDR layout (word offsets from BASE)
  localparam int NI = 10, NH = 8, NO = 2;
  localparam int W_W = 500, B_W = 1000, P_W = 1100, E_W = 1300, X_W = 1400, Y_W = 1700, YH_W = 1800;
  localparam int POLL_LIMIT = 2000;
  localparam int DDR_WORDS = 4096;

  logic clk = 0, rst_n = 0;
  logic [31:0] s_axil_awaddr = 0, s_axil_wdata = 0, s_axil_araddr = 0, s_axil_rdata;
  logic [3:0]  s_axil_wstrb = 4'hF;
  logic s_axil_awvalid = 0, s_axil_awready, s_axil_wvalid = 0, s_axil_wready;
  logic s_axil_bvalid, s_axil_bready = 0, s_axil_arvalid = 0, s_axil_arready;
  logic s_axil_rvalid, s_axil_rready = 0;
  logic [1:0] s_axil_bresp, s_axil_rresp;
  logic [31:0] m_axi_awaddr, m_axi_araddr;
  logic [7:0]  m_axi_awlen, m_axi_arlen, m_axi_wstrb;
  logic [2:0]  m_axi_awsize, m_axi_arsize;
  logic [1:0]  m_axi_awburst, m_axi_arburst, m_axi_bresp, m_axi_rresp;
  logic m_axi_awvalid, m_axi_awready, m_axi_wlast, m_axi_wvalid, m_axi_wready;
  logic m_axi_bvalid, m_axi_bready, m_axi_arvalid, m_axi_arready, m_axi_rlast;
  logic m_axi_rvalid, m_axi_rready;
  logic [63:0] m_axi_wdata, m_axi_rdata;

  int checks = 0, failures = 0;
  int n_mode[3] = '{0, 0, 0}, n_init = 0, n_continue = 0, n_busy_seen = 0;
  int n_full_burst = 0, n_4k_split = 0;
  oselm_ref r;

  oselm_pl_top #(.MAX_IN(16), .MAX_L(12), .MAX_ON(2)) dut (.*);

  axi_ddr_model #(.WORDS(DDR_WORDS), .BASE(BASE), .STALL(30)) ddr (
    .clk, .rst_n, .awaddr(m_axi_awaddr), .awlen(m_axi_awlen), .awvalid(m_axi_awvalid),
    .awready(m_axi_awready), .wdata(m_axi_wdata), .wlast(m_axi_wlast), .wvalid(m_axi_wvalid),
    .wready(m_axi_wready), .bresp(m_axi_bresp), .bvalid(m_axi_bvalid), .bready(m_axi_bready),
    .araddr(m_axi_araddr), .arlen(m_axi_arlen), .arvalid(m_axi_arvalid), .arready(m_axi_arready),
    .rdata(m_axi_rdata), .rresp(m_axi_rresp), .rlast(m_axi_rlast), .rvalid(m_axi_rvalid),
    .rready(m_axi_rready));

  always #5 clk = ~clk;

  // burst monitor
  logic [31:0] next_ar = 0;
  always @(posedge clk) if (m_axi_arvalid && m_axi_arready) begin
    if (m_axi_arlen == 8'd15) n_full_burst++;
    if (m_axi_araddr == next_ar && m_axi_araddr[11:0] == 12'h000) n_4k_split++;
    next_ar <= m_axi_araddr + (32'(m_axi_arlen) + 1) * 8;
  end

  // ---- processor side: AXI4-Lite accesses, checked at the falling edge
  task automatic axil_write(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk);
    s_axil_awaddr = {24'd0, a}; s_axil_awvalid = 1; s_axil_wdata = d; s_axil_wvalid = 1;
    while (!(s_axil_awready && s_axil_wready)) @(negedge clk);
    @(posedge clk); @(negedge clk);
    s_axil_awvalid = 0; s_axil_wvalid = 0; s_axil_bready = 1;
    while (!s_axil_bvalid) @(negedge clk);
    @(posedge clk); @(negedge clk); s_axil_bready = 0;
  endtask

  task automatic axil_read(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    s_axil_araddr = {24'd0, a}; s_axil_arvalid = 1;
    while (!s_axil_arready) @(negedge clk);
    @(posedge clk); @(negedge clk); s_axil_arvalid = 0; s_axil_rready = 1;
    while (!s_axil_rvalid) @(negedge clk);
    d = s_axil_rdata;
    @(posedge clk); @(negedge clk); s_axil_rready = 0;
  endtask

  // start a module in a working mode and poll STATUS until done
  task automatic run_mode(input work_mode_e m, input int ns, input logic init);
    logic [31:0] st;
    int polls;
    axil_write(REG_MODE, 32'(m));
    axil_write(REG_N_SAMPLES, 32'(ns));
    axil_write(REG_CTRL, {30'd0, init, 1'b1});
    n_mode[m]++;
    polls = 0;
    do begin
      polls++;
      if (polls > POLL_LIMIT) begin
        failures++;
        $display("FAIL mode %0d did not finish", m);
        return;
      end
      repeat (20) @(posedge clk);
      axil_read(REG_STATUS, st);
      if (st[0]) n_busy_seen++;
    end while (!st[1]);
  endtask

  task automatic check_yhat(input int ns, input int x0);
    for (int s = 0; s < ns; s++) begin
      for (int k = 0; k < NI; k++) r.x[k] = $bitstoreal(ddr.mem[X_W + (x0 + s)*NI + k]);
      r.infer();
      for (int k = 0; k < NO; k++) begin
        checks++;
        if (ddr.mem[YH_W + s*NO + k] !== $realtobits(r.yhat[k])) begin
          failures++;
          $display("FAIL sample %0d y_hat[%0d] = %g expected %g", s, k,
                   $bitstoreal(ddr.mem[YH_W + s*NO + k]), r.yhat[k]);
        end
      end
    end
  endtask

  task automatic ref_train(input int ns, input int x0);
    for (int s = 0; s < ns; s++) begin
      for (int k = 0; k < NI; k++) r.x[k] = $bitstoreal(ddr.mem[X_W + (x0 + s)*NI + k]);
      for (int k = 0; k < NO; k++) r.y[k] = $bitstoreal(ddr.mem[Y_W + (x0 + s)*NO + k]);
      r.train();
    end
  endtask

  task automatic check_count(input string what, input int n);
    checks++;
    if (n == 0) begin failures++; $display("FAIL mechanism never happened: %s", what); end
    else $display("%s: %0d", what, n);
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real v;
    r = new(NI, NH, NO);
    for (int n = 0; n < NI*NH; n++) begin r.w[n] = rnd_real(1.0); ddr.mem[W_W + n] = $realtobits(r.w[n]); end
    for (int n = 0; n < NH; n++)    begin r.b[n] = rnd_real(0.5); ddr.mem[B_W + n] = $realtobits(r.b[n]); end
    for (int i = 0; i < NH; i++)
      for (int j = i; j < NH; j++) begin
        v = rnd_real(0.1) + ((i == j) ? 1.0 : 0.0);
        r.p[i*NH+j] = v; r.p[j*NH+i] = v;
      end
    for (int n = 0; n < NH*NH; n++) ddr.mem[P_W + n] = $realtobits(r.p[n]);
    for (int n = 0; n < NH*NO; n++) begin r.eta[n] = rnd_real(1.0); ddr.mem[E_W + n] = $realtobits(r.eta[n]); end
    for (int n = 0; n < 20*NI; n++) ddr.mem[X_W + n] = $realtobits(rnd_real(2.0));
    for (int n = 0; n < 20*NO; n++) ddr.mem[Y_W + n] = $realtobits(rnd_real(1.0));

    repeat (3) @(posedge clk);
    rst_n = 1;
    axil_write(REG_N_IN, NI);
    axil_write(REG_N_HID, NH);
    axil_write(REG_N_OUT, NO);
    axil_write(REG_ADDR_W, BASE + W_W*8);
    axil_write(REG_ADDR_B, BASE + B_W*8);
    axil_write(REG_ADDR_P, BASE + P_W*8);
    axil_write(REG_ADDR_ETA, BASE + E_W*8);
    axil_write(REG_ADDR_Y, BASE + Y_W*8);
    axil_write(REG_ADDR_YHAT, BASE + YH_W*8);

    run_mode(MODE_LOAD, 1, 1'b0);
    // training, samples 0..3, starting from P0/eta0
    axil_write(REG_ADDR_X, BASE + X_W*8);
    run_mode(MODE_TRAIN, 4, 1'b1);
    n_init++;
    ref_train(4, 0);
    // inference on samples 10..12
    axil_write(REG_ADDR_X, BASE + (X_W + 10*NI)*8);
    run_mode(MODE_INFER, 3, 1'b0);
    check_yhat(3, 10);
    // continue training on samples 4..6 (y labels follow x offsets)
    axil_write(REG_ADDR_X, BASE + (X_W + 4*NI)*8);
    axil_write(REG_ADDR_Y, BASE + (Y_W + 4*NO)*8);
    run_mode(MODE_TRAIN, 3, 1'b0);
    n_continue++;
    ref_train(3, 4);
    axil_write(REG_ADDR_X, BASE + (X_W + 10*NI)*8);
    run_mode(MODE_INFER, 4, 1'b0);
    check_yhat(4, 10);

    check_count("mode 0 (load) runs", n_mode[0]);
    check_count("mode 1 (train) runs", n_mode[1]);
    check_count("mode 2 (infer) runs", n_mode[2]);
    check_count("P0/eta0 loads", n_init);
    check_count("continued training runs", n_continue);
    check_count("full-length read bursts", n_full_burst);
    check_count("4 KiB burst splits", n_4k_split);
    check_count("AXI back-pressure clocks", ddr.n_stall);
    check_count("AXI write bursts", ddr.n_aw);
    check_count("busy seen in STATUS", n_busy_seen);
    checks++;
    if (ddr.n_err != 0) begin failures++; $display("FAIL %0d AXI protocol errors", ddr.n_err); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
