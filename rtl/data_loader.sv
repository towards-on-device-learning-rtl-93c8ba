// data_loader: the data loading module, active in working mode 0. It copies
// the random input-layer weights W (n_hid x n_in doubles, row-major by hidden
// node in DDR) and the biases b (n_hid doubles) from DDR into the W/b BRAM
// through the AXI master, W first, then b. W[j][k] lands at word address
// j*MAX_IN + k. Interface: pulse start; busy stays high until done pulses,
// one clock after the AXI master reports the end of the b transfer. Loading
// W and b into on-chip memory before training is from the source; the
// two-command sequence and the BRAM layout are this design's own.
module data_loader
  import oselm_pkg::*;
#(
  parameter int unsigned MAX_IN = 256,
  parameter int unsigned MAX_L  = 150,
  localparam int unsigned WAW = $clog2(MAX_IN * MAX_L),
  localparam int unsigned LAW = $clog2(MAX_L)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  cfg_t           cfg,
  output logic           busy,
  output logic           done,
  // AXI master client
  output dma_cmd_t       dma_cmd,
  input  logic           dma_ready,
  input  logic           dma_rd_valid,
  input  fp64_t          dma_rd_data,
  input  logic           dma_done,
  // W/b BRAM write port
  output logic           w_we,
  output logic [WAW-1:0] w_waddr,
  output logic           b_we,
  output logic [LAW-1:0] b_waddr,
  output fp64_t          wdata
);
  typedef enum logic [2:0] {L_IDLE, L_W_CMD, L_W_DATA, L_B_CMD, L_B_DATA} lstate_e;
  lstate_e        st;
  logic [15:0]    j, k;
  logic [WAW-1:0] row;

  assign busy    = (st != L_IDLE);
  assign wdata   = dma_rd_data;
  assign w_we    = (st == L_W_DATA) && dma_rd_valid;
  assign w_waddr = row + WAW'(k);
  assign b_we    = (st == L_B_DATA) && dma_rd_valid;
  assign b_waddr = LAW'(j);

  always_comb begin
    dma_cmd       = '0;
    dma_cmd.write = 1'b0;
    if (st == L_W_CMD) begin
      dma_cmd.valid = 1'b1;
      dma_cmd.addr  = cfg.addr_w;
      dma_cmd.len   = 24'(32'(cfg.n_hid) * 32'(cfg.n_in));
    end else if (st == L_B_CMD) begin
      dma_cmd.valid = 1'b1;
      dma_cmd.addr  = cfg.addr_b;
      dma_cmd.len   = 24'(cfg.n_hid);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st   <= L_IDLE;
      j    <= '0;
      k    <= '0;
      row  <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (st)
        L_IDLE: if (start) begin
          j   <= '0;
          k   <= '0;
          row <= '0;
          st  <= L_W_CMD;
        end
        L_W_CMD: if (dma_ready) st <= L_W_DATA;
        L_W_DATA: begin
          if (dma_rd_valid) begin
            if (k == cfg.n_in - 16'd1) begin
              k   <= '0;
              j   <= j + 16'd1;
              row <= row + WAW'(MAX_IN);
            end else begin
              k <= k + 16'd1;
            end
          end
          if (dma_done) begin
            j  <= '0;
            st <= L_B_CMD;
          end
        end
        L_B_CMD: if (dma_ready) st <= L_B_DATA;
        L_B_DATA: begin
          if (dma_rd_valid) j <= j + 16'd1;
          if (dma_done) begin
            done <= 1'b1;
            st   <= L_IDLE;
          end
        end
        default: st <= L_IDLE;
      endcase
    end
  end
endmodule
