// tb_axil_cfg: writes every configuration register over AXI4-Lite with the
// address and data channels presented in different orders, reads them back,
// and checks the start pulse, the init bit and the busy/done status bits.
module tb_axil_cfg;
  import oselm_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [31:0] s_awaddr = 0, s_wdata = 0, s_araddr = 0, s_rdata;
  logic [3:0]  s_wstrb = 4'hF;
  logic s_awvalid = 0, s_awready, s_wvalid = 0, s_wready, s_bvalid, s_bready = 0;
  logic s_arvalid = 0, s_arready, s_rvalid, s_rready = 0;
  logic [1:0] s_bresp, s_rresp;
  cfg_t cfg;
  logic start, busy = 0, done_evt = 0;
  int checks = 0, failures = 0, starts = 0;

  axil_cfg dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && start) starts++;

  // Handshakes are checked at the falling edge, before the rising edge
  // that completes them. order 0: address and data together, 1: address
  // first, 2: data first.
  task automatic axil_write(input logic [7:0] a, input logic [31:0] d, input int order);
    @(negedge clk);
    if (order != 2) begin s_awaddr = {24'd0, a}; s_awvalid = 1; end
    if (order != 1) begin s_wdata = d; s_wvalid = 1; end
    while (!((s_awvalid && s_awready) || (s_wvalid && s_wready))) @(negedge clk);
    @(posedge clk); @(negedge clk);
    if (order == 0) begin
      s_awvalid = 0; s_wvalid = 0;
    end else if (order == 1) begin
      s_awvalid = 0; s_wdata = d; s_wvalid = 1;
      while (!s_wready) @(negedge clk);
      @(posedge clk); @(negedge clk); s_wvalid = 0;
    end else begin
      s_wvalid = 0; s_awaddr = {24'd0, a}; s_awvalid = 1;
      while (!s_awready) @(negedge clk);
      @(posedge clk); @(negedge clk); s_awvalid = 0;
    end
    s_bready = 1;
    while (!s_bvalid) @(negedge clk);
    @(posedge clk); @(negedge clk); s_bready = 0;
  endtask

  task automatic axil_read(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    s_araddr = {24'd0, a}; s_arvalid = 1;
    while (!s_arready) @(negedge clk);
    @(posedge clk); @(negedge clk); s_arvalid = 0;
    repeat (2) @(negedge clk);   // hold off rready: rvalid must stay
    s_rready = 1;
    while (!s_rvalid) @(negedge clk);
    d = s_rdata;
    @(posedge clk); @(negedge clk); s_rready = 0;
  endtask

  task automatic expect32(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s = %h, expected %h", what, got, exp);
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
    logic [31:0] d, v [14];
    logic [7:0]  regs [12];
    regs = '{REG_N_IN, REG_N_HID, REG_N_OUT, REG_N_SAMPLES, REG_ADDR_W, REG_ADDR_B,
             REG_ADDR_P, REG_ADDR_ETA, REG_ADDR_X, REG_ADDR_Y, REG_ADDR_YHAT, REG_MODE};
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 12; r++) begin
      v[r] = (r < 3) ? 32'($urandom_range(1, 300)) : (r == 11 ? 32'd2 : $urandom);
      axil_write(regs[r], v[r], r % 3);
    end
    for (int r = 0; r < 12; r++) begin
      axil_read(regs[r], d);
      expect32($sformatf("reg %h", regs[r]), d, v[r]);
    end
    expect32("cfg.n_hid", 32'(cfg.n_hid), v[1]);
    expect32("cfg.addr_yhat", cfg.addr_yhat, v[10]);
    expect32("cfg.mode", 32'(cfg.mode), 32'd2);
    // start with init
    axil_write(REG_CTRL, 32'h3, 0);
    expect32("start pulses", 32'(starts), 1);
    expect32("cfg.init", 32'(cfg.init), 1);
    busy = 1;
    axil_read(REG_STATUS, d);
    expect32("status busy", d, 32'h1);
    @(negedge clk); busy = 0; done_evt = 1;
    @(negedge clk); done_evt = 0;
    axil_read(REG_STATUS, d);
    expect32("status done", d, 32'h2);
    axil_write(REG_CTRL, 32'h1, 1);
    expect32("start pulses", 32'(starts), 2);
    expect32("cfg.init", 32'(cfg.init), 0);
    axil_read(REG_STATUS, d);
    expect32("done cleared", d, 32'h0);
    axil_write(REG_CTRL, 32'h0, 2);
    expect32("no start", 32'(starts), 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
