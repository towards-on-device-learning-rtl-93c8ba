// axi_ddr_model: behavioural AXI4 slave standing in for the processor's DDR
// behind the high-performance port. 64-bit words, INCR bursts, one read and
// one write burst at a time. Each ready/valid it drives is raised at random
// with probability (100-STALL)% per clock to exercise back-pressure. It
// counts bursts, stalls and protocol errors (4 KiB crossings, wrong WLAST,
// addresses outside its window). Word index = (byte address - BASE) / 8.
module axi_ddr_model #(
  parameter int unsigned WORDS = 65536,
  parameter logic [31:0] BASE  = 32'h4000_0000,
  parameter int unsigned STALL = 30
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] awaddr,
  input  logic [7:0]  awlen,
  input  logic        awvalid,
  output logic        awready,
  input  logic [63:0] wdata,
  input  logic        wlast,
  input  logic        wvalid,
  output logic        wready,
  output logic [1:0]  bresp,
  output logic        bvalid,
  input  logic        bready,
  input  logic [31:0] araddr,
  input  logic [7:0]  arlen,
  input  logic        arvalid,
  output logic        arready,
  output logic [63:0] rdata,
  output logic [1:0]  rresp,
  output logic        rlast,
  output logic        rvalid,
  input  logic        rready
);
  logic [63:0] mem [WORDS];
  logic        rd_busy, wr_busy;
  int unsigned rword, rlen, rbeat, wword, wlen, wbeat;
  int unsigned n_ar = 0, n_aw = 0, n_stall = 0, n_err = 0, n_multi = 0;

  assign bresp = 2'b00;
  assign rresp = 2'b00;

  function automatic logic go();
    return $urandom_range(0, 99) >= STALL;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_busy <= 0; wr_busy <= 0; arready <= 0; awready <= 0; wready <= 0;
      rvalid <= 0; rlast <= 0; bvalid <= 0; rdata <= '0;
      rword <= 0; rlen <= 0; rbeat <= 0; wword <= 0; wlen <= 0; wbeat <= 0;
    end else begin
      // ---- read address
      if (!rd_busy) begin
        if (arvalid && arready) begin
          rd_busy <= 1; arready <= 0;
          rword <= (araddr - BASE) >> 3; rlen <= arlen; rbeat <= 0;
          n_ar <= n_ar + 1;
          if (arlen != 0) n_multi <= n_multi + 1;
          if ((araddr & 32'hFFF) + (32'(arlen) + 1) * 8 > 32'h1000) n_err <= n_err + 1;
          if (araddr < BASE || ((araddr - BASE) >> 3) + arlen >= WORDS) n_err <= n_err + 1;
        end else begin
          arready <= go();
          if (arvalid) n_stall <= n_stall + 1;
        end
      end
      // ---- read data
      if (rd_busy && (!rvalid || rready)) begin
        automatic int unsigned nb = rbeat + ((rvalid && rready) ? 1 : 0);
        if (rvalid && rready && rlast) begin
          rd_busy <= 0; rvalid <= 0; rlast <= 0;
        end else if (go()) begin
          rvalid <= 1; rdata <= mem[rword + nb]; rlast <= (nb == rlen); rbeat <= nb;
        end else begin
          rvalid <= 0; rbeat <= nb;
          if (rready) n_stall <= n_stall + 1;
        end
      end
      // ---- write address
      if (!wr_busy) begin
        if (awvalid && awready) begin
          wr_busy <= 1; awready <= 0;
          wword <= (awaddr - BASE) >> 3; wlen <= awlen; wbeat <= 0;
          n_aw <= n_aw + 1;
          if ((awaddr & 32'hFFF) + (32'(awlen) + 1) * 8 > 32'h1000) n_err <= n_err + 1;
          if (awaddr < BASE || ((awaddr - BASE) >> 3) + awlen >= WORDS) n_err <= n_err + 1;
        end else begin
          awready <= go();
        end
      end
      // ---- write data and response
      if (wr_busy && !bvalid) begin
        if (wvalid && wready) begin
          mem[wword + wbeat] <= wdata;
          if (wlast != (wbeat == wlen)) n_err <= n_err + 1;
          wbeat <= wbeat + 1;
          wready <= 0;
          if (wbeat == wlen) bvalid <= 1;
        end else begin
          wready <= go();
        end
      end
      if (bvalid && bready) begin
        bvalid <= 0; wr_busy <= 0;
      end
    end
  end
endmodule
