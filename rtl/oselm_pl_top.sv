// oselm_pl_top: programmable-logic part of an online-sequential extreme
// learning machine (OS-ELM) trainer and predictor. The processor runs the
// initial training (two pseudo-inverses by one-sided Jacobi SVD) and leaves
// P_N0 and eta_N0 in DDR; this block then learns from further samples one at
// a time and answers inference requests, all in binary64.
// Structure: an AXI4-Lite slave (32-bit general-purpose port) holds the
// working mode and configuration; a multiplexer steered by the working mode
// starts one of three modules and connects it to a 64-bit AXI4 master (high-
// performance port): mode 0 the data loading module (W, b into the W/b
// BRAM), mode 1 the training module (P and eta updates), mode 2 the
// inference module (y_hat = Phi(W x + b) eta). Start a module by writing
// CTRL; poll STATUS for done. Topology is set at run time up to MAX_IN,
// MAX_L and MAX_ON. The three-module split, the working-mode codes and the
// port widths follow the source; register map, DMA scheme and schedules are
// this design's own.
// Lint notes that rst_n feeds both asynchronous resets and, through the
// disable iff of the sub-blocks' handshake assertions, sampled logic; registers
// themselves use only the asynchronous reset.
module oselm_pl_top
  import oselm_pkg::*;
#(
  parameter int unsigned MAX_IN    = 256,
  parameter int unsigned MAX_L     = 150,
  parameter int unsigned MAX_ON    = 2,
  parameter int unsigned MAX_BURST = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite slave, configuration (GP port, 32 bits)
  input  logic [31:0] s_axil_awaddr,
  input  logic        s_axil_awvalid,
  output logic        s_axil_awready,
  input  logic [31:0] s_axil_wdata,
  input  logic [3:0]  s_axil_wstrb,
  input  logic        s_axil_wvalid,
  output logic        s_axil_wready,
  output logic [1:0]  s_axil_bresp,
  output logic        s_axil_bvalid,
  input  logic        s_axil_bready,
  input  logic [31:0] s_axil_araddr,
  input  logic        s_axil_arvalid,
  output logic        s_axil_arready,
  output logic [31:0] s_axil_rdata,
  output logic [1:0]  s_axil_rresp,
  output logic        s_axil_rvalid,
  input  logic        s_axil_rready,
  // AXI4 master, data (HP port, 64 bits)
  output logic [31:0] m_axi_awaddr,
  output logic [7:0]  m_axi_awlen,
  output logic [2:0]  m_axi_awsize,
  output logic [1:0]  m_axi_awburst,
  output logic        m_axi_awvalid,
  input  logic        m_axi_awready,
  output logic [63:0] m_axi_wdata,
  output logic [7:0]  m_axi_wstrb,
  output logic        m_axi_wlast,
  output logic        m_axi_wvalid,
  input  logic        m_axi_wready,
  input  logic [1:0]  m_axi_bresp,
  input  logic        m_axi_bvalid,
  output logic        m_axi_bready,
  output logic [31:0] m_axi_araddr,
  output logic [7:0]  m_axi_arlen,
  output logic [2:0]  m_axi_arsize,
  output logic [1:0]  m_axi_arburst,
  output logic        m_axi_arvalid,
  input  logic        m_axi_arready,
  input  logic [63:0] m_axi_rdata,
  input  logic [1:0]  m_axi_rresp,
  input  logic        m_axi_rlast,
  input  logic        m_axi_rvalid,
  output logic        m_axi_rready
);
  localparam int unsigned WAW = $clog2(MAX_IN * MAX_L);
  localparam int unsigned LAW = $clog2(MAX_L);
  localparam int unsigned EAW = $clog2(MAX_L * MAX_ON);

  cfg_t  cfg;
  logic  start, busy, done_evt;

  // ---- configuration registers
  axil_cfg u_cfg (
    .clk, .rst_n,
    .s_awaddr(s_axil_awaddr), .s_awvalid(s_axil_awvalid), .s_awready(s_axil_awready),
    .s_wdata(s_axil_wdata), .s_wstrb(s_axil_wstrb), .s_wvalid(s_axil_wvalid),
    .s_wready(s_axil_wready), .s_bresp(s_axil_bresp), .s_bvalid(s_axil_bvalid),
    .s_bready(s_axil_bready), .s_araddr(s_axil_araddr), .s_arvalid(s_axil_arvalid),
    .s_arready(s_axil_arready), .s_rdata(s_axil_rdata), .s_rresp(s_axil_rresp),
    .s_rvalid(s_axil_rvalid), .s_rready(s_axil_rready),
    .cfg, .start, .busy, .done_evt
  );

  // ---- working-mode multiplexer
  work_mode_e sel;      // module owning the AXI master
  logic ld_busy, ld_done, tr_busy, tr_done, in_busy, in_done;
  logic ld_start, tr_start, in_start;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                 sel <= MODE_LOAD;
    else if (start && !busy)    sel <= cfg.mode;
  end
  assign ld_start = start && !busy && (cfg.mode == MODE_LOAD);
  assign tr_start = start && !busy && (cfg.mode == MODE_TRAIN);
  assign in_start = start && !busy && (cfg.mode == MODE_INFER);
  assign busy     = ld_busy | tr_busy | in_busy;
  assign done_evt = ld_done | tr_done | in_done;

  dma_cmd_t ld_cmd, tr_cmd, in_cmd, cmd;
  logic     dma_ready, dma_rd_valid, dma_wr_ready, dma_done, in_wr_valid;
  fp64_t    dma_rd_data, in_wr_data;

  always_comb begin
    case (sel)
      MODE_TRAIN: cmd = tr_cmd;
      MODE_INFER: cmd = in_cmd;
      default:    cmd = ld_cmd;
    endcase
  end

  axi_hp_master #(.MAX_BURST(MAX_BURST)) u_axi (
    .clk, .rst_n,
    .cmd, .cmd_ready(dma_ready), .rd_valid(dma_rd_valid), .rd_data(dma_rd_data),
    .wr_data(in_wr_data), .wr_valid(in_wr_valid && sel == MODE_INFER),
    .wr_ready(dma_wr_ready), .done(dma_done),
    .m_awaddr(m_axi_awaddr), .m_awlen(m_axi_awlen), .m_awsize(m_axi_awsize),
    .m_awburst(m_axi_awburst), .m_awvalid(m_axi_awvalid), .m_awready(m_axi_awready),
    .m_wdata(m_axi_wdata), .m_wstrb(m_axi_wstrb), .m_wlast(m_axi_wlast),
    .m_wvalid(m_axi_wvalid), .m_wready(m_axi_wready), .m_bresp(m_axi_bresp),
    .m_bvalid(m_axi_bvalid), .m_bready(m_axi_bready), .m_araddr(m_axi_araddr),
    .m_arlen(m_axi_arlen), .m_arsize(m_axi_arsize), .m_arburst(m_axi_arburst),
    .m_arvalid(m_axi_arvalid), .m_arready(m_axi_arready), .m_rdata(m_axi_rdata),
    .m_rresp(m_axi_rresp), .m_rlast(m_axi_rlast), .m_rvalid(m_axi_rvalid),
    .m_rready(m_axi_rready)
  );

  // ---- W/b BRAM
  logic           w_we, b_we;
  logic [WAW-1:0] w_waddr, tr_w_raddr, in_w_raddr;
  logic [LAW-1:0] b_waddr, tr_b_raddr, in_b_raddr;
  fp64_t          wb_wdata, tr_w_rdata, tr_b_rdata, in_w_rdata, in_b_rdata;

  wb_bram #(.MAX_IN(MAX_IN), .MAX_L(MAX_L)) u_wb (
    .clk, .w_we, .w_waddr, .b_we, .b_waddr, .wdata(wb_wdata),
    .w_raddr0(tr_w_raddr), .b_raddr0(tr_b_raddr), .w_rdata0(tr_w_rdata), .b_rdata0(tr_b_rdata),
    .w_raddr1(in_w_raddr), .b_raddr1(in_b_raddr), .w_rdata1(in_w_rdata), .b_rdata1(in_b_rdata)
  );

  // ---- the three modules
  data_loader #(.MAX_IN(MAX_IN), .MAX_L(MAX_L)) u_loader (
    .clk, .rst_n, .start(ld_start), .cfg, .busy(ld_busy), .done(ld_done),
    .dma_cmd(ld_cmd), .dma_ready(dma_ready && sel == MODE_LOAD),
    .dma_rd_valid(dma_rd_valid && sel == MODE_LOAD), .dma_rd_data,
    .dma_done(dma_done && sel == MODE_LOAD),
    .w_we, .w_waddr, .b_we, .b_waddr, .wdata(wb_wdata)
  );

  logic [EAW-1:0] eta_raddr;
  fp64_t          eta_rdata;

  obt_core #(.MAX_IN(MAX_IN), .MAX_L(MAX_L), .MAX_ON(MAX_ON)) u_obt (
    .clk, .rst_n, .start(tr_start), .cfg, .busy(tr_busy), .done(tr_done),
    .dma_cmd(tr_cmd), .dma_ready(dma_ready && sel == MODE_TRAIN),
    .dma_rd_valid(dma_rd_valid && sel == MODE_TRAIN), .dma_rd_data,
    .dma_done(dma_done && sel == MODE_TRAIN),
    .w_raddr(tr_w_raddr), .b_raddr(tr_b_raddr), .w_rdata(tr_w_rdata), .b_rdata(tr_b_rdata),
    .eta_raddr, .eta_rdata
  );

  infer_core #(.MAX_IN(MAX_IN), .MAX_L(MAX_L), .MAX_ON(MAX_ON)) u_infer (
    .clk, .rst_n, .start(in_start), .cfg, .busy(in_busy), .done(in_done),
    .dma_cmd(in_cmd), .dma_ready(dma_ready && sel == MODE_INFER),
    .dma_rd_valid(dma_rd_valid && sel == MODE_INFER), .dma_rd_data,
    .dma_wr_data(in_wr_data), .dma_wr_valid(in_wr_valid),
    .dma_wr_ready(dma_wr_ready && sel == MODE_INFER),
    .dma_done(dma_done && sel == MODE_INFER),
    .w_raddr(in_w_raddr), .b_raddr(in_b_raddr), .w_rdata(in_w_rdata), .b_rdata(in_b_rdata),
    .eta_raddr, .eta_rdata
  );
endmodule
