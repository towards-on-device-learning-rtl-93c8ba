// infer_core: the inference module, active in working mode 2. For each of
// n_samples test vectors it fetches x (n_in words at addr_x + s*n_in*8),
// computes h = Phi(W x + b) with its own hidden_mvm instance, forms
// y_hat = h eta with one multiply-add per clock, reading eta from the
// training module's memory, and writes y_hat (n_out words) to
// addr_yhat + s*n_out*8. Per sample the compute takes
// 1 + n_hid*(n_in+2) + n_hid*n_out clocks besides the two transfers. Separate
// logic for inference and training, so that both could run at once, follows
// the source; the schedule is this design's own.
module infer_core
  import oselm_pkg::*;
#(
  parameter int unsigned MAX_IN = 256,
  parameter int unsigned MAX_L  = 150,
  parameter int unsigned MAX_ON = 2,
  localparam int unsigned WAW = $clog2(MAX_IN * MAX_L),
  localparam int unsigned LAW = $clog2(MAX_L),
  localparam int unsigned IAW = $clog2(MAX_IN),
  localparam int unsigned EAW = $clog2(MAX_L * MAX_ON)
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
  output fp64_t          dma_wr_data,
  output logic           dma_wr_valid,
  input  logic           dma_wr_ready,
  input  logic           dma_done,
  // W/b BRAM read port
  output logic [WAW-1:0] w_raddr,
  output logic [LAW-1:0] b_raddr,
  input  fp64_t          w_rdata,
  input  fp64_t          b_rdata,
  // eta read port (training module)
  output logic [EAW-1:0] eta_raddr,
  input  fp64_t          eta_rdata
);
  typedef enum logic [3:0] {
    I_IDLE, I_X_CMD, I_X_DATA, I_HID_GO, I_HID, I_OUT, I_W_CMD, I_W_DATA, I_NEXT
  } istate_e;

  istate_e     st;
  logic [15:0] i, j;
  // i and j cut to the index width of the arrays they address
  localparam int unsigned OAW = (MAX_ON > 1) ? $clog2(MAX_ON) : 1;
  logic [LAW-1:0] jl;
  logic [OAW-1:0] io, jo;
  assign jl = LAW'(j);
  assign io = OAW'(i);
  assign jo = OAW'(j);
  logic [31:0] s, xptr, yptr;

  fp64_t x_mem    [MAX_IN];
  fp64_t h_mem    [MAX_L];
  fp64_t yhat_mem [MAX_ON];
  fp64_t x_q, acc, prod, sum;

  logic           hid_busy, hid_done, h_we;
  logic [IAW-1:0] x_raddr;
  logic [LAW-1:0] h_waddr;
  fp64_t          h_wdata;

  hidden_mvm #(.MAX_IN(MAX_IN), .MAX_L(MAX_L)) u_hidden (
    .clk, .rst_n, .start(st == I_HID_GO), .n_in(cfg.n_in), .n_hid(cfg.n_hid),
    .busy(hid_busy), .done(hid_done),
    .w_addr(w_raddr), .w_data(w_rdata), .b_addr(b_raddr), .b_data(b_rdata),
    .x_addr(x_raddr), .x_data(x_q),
    .h_we, .h_addr(h_waddr), .h_data(h_wdata)
  );

  // y_hat_i = sum_j h_j eta[j][i]
  assign eta_raddr = EAW'(32'(j) * MAX_ON + 32'(i));
  fp64_mul u_mul (.a(h_mem[jl]), .b(eta_rdata), .y(prod));
  fp64_add u_add (.a(j == 16'd0 ? FP_ZERO : acc), .b(prod), .sub(1'b0), .y(sum));

  assign busy         = (st != I_IDLE);
  assign dma_wr_valid = (st == I_W_DATA) && (j < cfg.n_out);
  assign dma_wr_data  = yhat_mem[jo];

  always_comb begin
    dma_cmd = '0;
    if (st == I_X_CMD) begin
      dma_cmd.valid = 1'b1; dma_cmd.addr = xptr; dma_cmd.len = 24'(cfg.n_in);
    end else if (st == I_W_CMD) begin
      dma_cmd.valid = 1'b1; dma_cmd.write = 1'b1; dma_cmd.addr = yptr;
      dma_cmd.len = 24'(cfg.n_out);
    end
  end

  always_ff @(posedge clk) begin
    x_q <= x_mem[x_raddr];
    if (h_we) h_mem[h_waddr] <= h_wdata;
    if (st == I_X_DATA && dma_rd_valid) x_mem[IAW'(j)] <= dma_rd_data;
    if (st == I_OUT && j == cfg.n_hid - 16'd1) yhat_mem[io] <= sum;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st   <= I_IDLE;
      i    <= '0;
      j    <= '0;
      s    <= '0;
      xptr <= '0;
      yptr <= '0;
      acc  <= FP_ZERO;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (st)
        I_IDLE: if (start) begin
          i <= '0; j <= '0; s <= '0;
          xptr <= cfg.addr_x;
          yptr <= cfg.addr_yhat;
          st   <= I_X_CMD;
        end
        I_X_CMD: if (dma_ready) st <= I_X_DATA;
        I_X_DATA: begin
          if (dma_rd_valid) j <= j + 16'd1;
          if (dma_done) begin j <= '0; st <= I_HID_GO; end
        end
        I_HID_GO: st <= I_HID;
        I_HID: if (hid_done) begin i <= '0; j <= '0; st <= I_OUT; end
        I_OUT: begin
          acc <= sum;
          if (j == cfg.n_hid - 16'd1) begin
            j <= '0;
            if (i == cfg.n_out - 16'd1) begin i <= '0; st <= I_W_CMD; end
            else                        i <= i + 16'd1;
          end else j <= j + 16'd1;
        end
        I_W_CMD: if (dma_ready) st <= I_W_DATA;
        I_W_DATA: begin
          if (dma_wr_valid && dma_wr_ready) j <= j + 16'd1;
          if (dma_done) begin j <= '0; st <= I_NEXT; end
        end
        I_NEXT: begin
          s    <= s + 32'd1;
          xptr <= xptr + 32'(cfg.n_in) * 32'd8;
          yptr <= yptr + 32'(cfg.n_out) * 32'd8;
          if (s == cfg.n_samples - 32'd1) begin
            done <= 1'b1;
            st   <= I_IDLE;
          end else st <= I_X_CMD;
        end
        default: st <= I_IDLE;
      endcase
    end
  end
endmodule
