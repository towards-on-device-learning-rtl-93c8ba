// tb_axi_hp_master: the AXI master against the DDR model with random
// back-pressure. Reads of several lengths, one crossing a 4 KiB boundary and
// one longer than a burst, must return the DDR words in order; writes must
// land in DDR; the model must see no protocol error; burst counts must match
// the splitting rule (at most MAX_BURST beats, no 4 KiB crossing).
module tb_axi_hp_master;
  import oselm_pkg::*;
  localparam logic [31:0] BASE = 32'h4000_0000;
  localparam int MAXB = 16;
  logic clk = 0, rst_n = 0;
  dma_cmd_t cmd = '0;
  logic cmd_ready, rd_valid, wr_valid = 0, wr_ready, done;
  fp64_t rd_data, wr_data;
  logic [31:0] awaddr, araddr;
  logic [7:0] awlen, arlen, wstrb;
  logic [2:0] awsize, arsize;
  logic [1:0] awburst, arburst, bresp, rresp;
  logic awvalid, awready, wlast, wvalid, wready, bvalid, bready;
  logic arvalid, arready, rlast, rvalid, rready;
  logic [63:0] wdata, rdata;
  int checks = 0, failures = 0;

  axi_hp_master #(.MAX_BURST(MAXB)) dut (
    .clk, .rst_n, .cmd, .cmd_ready, .rd_valid, .rd_data, .wr_data, .wr_valid, .wr_ready, .done,
    .m_awaddr(awaddr), .m_awlen(awlen), .m_awsize(awsize), .m_awburst(awburst),
    .m_awvalid(awvalid), .m_awready(awready), .m_wdata(wdata), .m_wstrb(wstrb),
    .m_wlast(wlast), .m_wvalid(wvalid), .m_wready(wready), .m_bresp(bresp),
    .m_bvalid(bvalid), .m_bready(bready), .m_araddr(araddr), .m_arlen(arlen),
    .m_arsize(arsize), .m_arburst(arburst), .m_arvalid(arvalid), .m_arready(arready),
    .m_rdata(rdata), .m_rresp(rresp), .m_rlast(rlast), .m_rvalid(rvalid), .m_rready(rready));

  axi_ddr_model #(.WORDS(2048), .BASE(BASE), .STALL(30)) ddr (
    .clk, .rst_n, .awaddr, .awlen, .awvalid, .awready, .wdata, .wlast, .wvalid, .wready,
    .bresp, .bvalid, .bready, .araddr, .arlen, .arvalid, .arready, .rdata, .rresp,
    .rlast, .rvalid, .rready);

  always #5 clk = ~clk;

  // expected bursts for a command
  function automatic int n_bursts(input int word, input int len);
    int n = 0, a = word * 8, left = len, b, to4k;
    while (left > 0) begin
      to4k = (4096 - (a % 4096)) / 8;
      b = left; if (b > MAXB) b = MAXB; if (b > to4k) b = to4k;
      a += b * 8; left -= b; n++;
    end
    return n;
  endfunction

  task automatic do_read(input int word, input int len);
    int got = 0, ar0;
    ar0 = ddr.n_ar;
    @(negedge clk);
    cmd = '{valid: 1'b1, write: 1'b0, addr: BASE + 32'(word * 8), len: 24'(len)};
    while (!cmd_ready) @(negedge clk);
    @(posedge clk); @(negedge clk); cmd = '0;
    forever begin
      @(negedge clk);   // sample what the next rising edge will take
      if (rd_valid) begin
        checks++;
        if (rd_data !== ddr.mem[word + got]) begin
          failures++;
          $display("FAIL read word %0d: %h vs %h", word + got, rd_data, ddr.mem[word + got]);
        end
        got++;
      end
      if (done) break;
    end
    checks++;
    if (got != len) begin failures++; $display("FAIL read %0d words, expected %0d", got, len); end
    checks++;
    if (ddr.n_ar - ar0 != n_bursts(word, len)) begin
      failures++; $display("FAIL %0d read bursts, expected %0d", ddr.n_ar - ar0, n_bursts(word, len));
    end
  endtask

  logic [63:0] src [512];
  int          wsent;
  assign wr_data = src[wsent];

  task automatic do_write(input int word, input int len);
    int aw0;
    aw0 = ddr.n_aw;
    for (int n = 0; n < len; n++) src[n] = {$urandom, $urandom};
    wsent = 0;
    @(negedge clk);
    cmd = '{valid: 1'b1, write: 1'b1, addr: BASE + 32'(word * 8), len: 24'(len)};
    while (!cmd_ready) @(negedge clk);
    @(posedge clk); @(negedge clk); cmd = '0;
    wr_valid = 1;
    forever begin
      @(negedge clk);
      if (done) break;
      if (wr_ready) begin @(posedge clk); wsent <= wsent + 1; end
    end
    wr_valid = 0;
    repeat (2) @(posedge clk);
    for (int n = 0; n < len; n++) begin
      checks++;
      if (ddr.mem[word + n] !== src[n]) begin failures++; $display("FAIL write word %0d", word + n); end
    end
    checks++;
    if (ddr.n_aw - aw0 != n_bursts(word, len)) begin
      failures++; $display("FAIL %0d write bursts, expected %0d", ddr.n_aw - aw0, n_bursts(word, len));
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
    for (int n = 0; n < 2048; n++) ddr.mem[n] = {$urandom, $urandom};
    repeat (3) @(posedge clk);
    rst_n = 1;
    do_read(0, 1);
    do_read(3, 5);
    do_read(500, 40);      // crosses the 4 KiB boundary at word 512
    do_read(0, 300);
    do_write(1000, 3);
    do_write(1020, 37);    // crosses the boundary at word 1024
    do_read(1020, 37);
    for (int n = 0; n < 10; n++) do_read($urandom_range(0, 1700), $urandom_range(1, 300));
    for (int n = 0; n < 5; n++) do_write($urandom_range(0, 1500), $urandom_range(1, 200));
    checks++;
    if (ddr.n_err != 0) begin failures++; $display("FAIL %0d AXI protocol errors", ddr.n_err); end
    checks++;
    if (ddr.n_stall == 0) begin failures++; $display("FAIL no back-pressure seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
