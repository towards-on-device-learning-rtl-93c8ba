// axi_hp_master: 64-bit AXI4 master on the high-performance port, through
// which the IP cores fetch W, b, P0, eta0, training and test vectors from the
// processor's DDR and return inference results. A client issues one command
// (read or write, byte address, length in 64-bit words) and the master splits
// it into INCR bursts of at most MAX_BURST beats that never cross a 4 KiB
// boundary, with one burst outstanding. Read data is handed to the client
// one word per accepted R beat (rd_valid; the client must always take it).
// Write data is taken from the client with a valid/ready pair (wr_valid,
// wr_ready) and driven on W. done pulses once the last R beat or the last B
// response of the command has arrived. The 64-bit width is from the source;
// burst length and the command interface are this design's own choices.
// Lint notes that rst_n feeds both asynchronous resets and, through the
// disable iff of the handshake assertions, sampled logic; the registers
// themselves use only the asynchronous reset.
module axi_hp_master
  import oselm_pkg::*;
#(
  parameter int unsigned MAX_BURST = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  // client side
  input  dma_cmd_t    cmd,
  output logic        cmd_ready,
  output logic        rd_valid,
  output fp64_t       rd_data,
  input  fp64_t       wr_data,
  input  logic        wr_valid,
  output logic        wr_ready,
  output logic        done,
  // AXI4 master
  output logic [31:0] m_awaddr,
  output logic [7:0]  m_awlen,
  output logic [2:0]  m_awsize,
  output logic [1:0]  m_awburst,
  output logic        m_awvalid,
  input  logic        m_awready,
  output logic [63:0] m_wdata,
  output logic [7:0]  m_wstrb,
  output logic        m_wlast,
  output logic        m_wvalid,
  input  logic        m_wready,
  input  logic [1:0]  m_bresp,
  input  logic        m_bvalid,
  output logic        m_bready,
  output logic [31:0] m_araddr,
  output logic [7:0]  m_arlen,
  output logic [2:0]  m_arsize,
  output logic [1:0]  m_arburst,
  output logic        m_arvalid,
  input  logic        m_arready,
  input  logic [63:0] m_rdata,
  input  logic [1:0]  m_rresp,
  input  logic        m_rlast,
  input  logic        m_rvalid,
  output logic        m_rready
);
  typedef enum logic [2:0] {M_IDLE, M_AR, M_R, M_AW, M_W, M_B} mstate_e;
  mstate_e     st;
  logic [31:0] addr;
  logic [23:0] remain;
  logic [8:0]  blen, beat;
  logic [9:0]  to4k;
  logic [23:0] nb;

  // beats of the next burst
  always_comb begin
    to4k = 10'((13'h1000 - {1'b0, addr[11:0]}) >> 3);
    nb   = remain;
    if (nb > 24'(MAX_BURST)) nb = 24'(MAX_BURST);
    if (nb > 24'(to4k))      nb = 24'(to4k);
  end

  assign cmd_ready = (st == M_IDLE);
  assign m_awaddr  = addr;
  assign m_araddr  = addr;
  assign m_awlen   = 8'(nb - 24'd1);
  assign m_arlen   = 8'(nb - 24'd1);
  assign m_awsize  = 3'd3;
  assign m_arsize  = 3'd3;
  assign m_awburst = 2'b01;
  assign m_arburst = 2'b01;
  assign m_awvalid = (st == M_AW);
  assign m_arvalid = (st == M_AR);
  assign m_wvalid  = (st == M_W) && wr_valid;
  assign m_wdata   = wr_data;
  assign m_wstrb   = 8'hFF;
  assign m_wlast   = (beat == blen - 9'd1);
  assign wr_ready  = (st == M_W) && m_wready;
  assign m_bready  = (st == M_B);
  assign m_rready  = (st == M_R);
  assign rd_valid  = (st == M_R) && m_rvalid;
  assign rd_data   = m_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st     <= M_IDLE;
      addr   <= '0;
      remain <= '0;
      blen   <= '0;
      beat   <= '0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      case (st)
        M_IDLE: if (cmd.valid && cmd.len != 24'd0) begin
          addr   <= {cmd.addr[31:3], 3'b000};
          remain <= cmd.len;
          st     <= cmd.write ? M_AW : M_AR;
        end
        M_AR: if (m_arready) begin
          blen <= 9'(nb);
          st   <= M_R;
        end
        M_AW: if (m_awready) begin
          blen <= 9'(nb);
          beat <= '0;
          st   <= M_W;
        end
        M_R: if (m_rvalid) begin
          addr   <= addr + 32'd8;
          remain <= remain - 24'd1;
          if (m_rlast) begin
            if (remain == 24'd1) begin
              done <= 1'b1;
              st   <= M_IDLE;
            end else begin
              st <= M_AR;
            end
          end
        end
        M_W: if (wr_valid && m_wready) begin
          addr   <= addr + 32'd8;
          remain <= remain - 24'd1;
          beat   <= beat + 9'd1;
          if (m_wlast) st <= M_B;
        end
        M_B: if (m_bvalid) begin
          if (remain == 24'd0) begin
            done <= 1'b1;
            st   <= M_IDLE;
          end else begin
            st <= M_AW;
          end
        end
        default: st <= M_IDLE;
      endcase
    end
  end

  // AXI rules: address valid and its payload hold until ready
  a_ar_hold: assert property (@(posedge clk) disable iff (!rst_n)
                              m_arvalid && !m_arready |=> m_arvalid && $stable(m_araddr) && $stable(m_arlen));
  a_aw_hold: assert property (@(posedge clk) disable iff (!rst_n)
                              m_awvalid && !m_awready |=> m_awvalid && $stable(m_awaddr) && $stable(m_awlen));
  a_no_4k:   assert property (@(posedge clk) disable iff (!rst_n)
                              m_arvalid |-> (13'(m_araddr[11:0]) + 13'(({5'd0, m_arlen} + 13'd1) << 3)) <= 13'h1000);
endmodule
