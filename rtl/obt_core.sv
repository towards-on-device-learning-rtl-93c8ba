// obt_core: the training (one-batch training, OBT) module, active in working
// mode 1. For every training sample (x_i, y_i), batch size 1, it performs the
// recursive least-squares update of the online-sequential ELM:
//   h   = Phi(W x_i + b)                  (own hidden_mvm instance)
//   c   = P h^T,  d = h P                 (two MAC lanes in parallel)
//   a   = 1 / (1 + h c)                   (scalar division, fp64_div)
//   P   = P - (c a) d                     (rank-1 update, P is L x L)
//   e_y = y_i - h eta                     (#ON values)
//   eta = eta + (P h^T) e_y               (with the updated P)
// It starts from P_N0 and eta_N0, which initial training computes elsewhere
// and leaves in DDR; with init set they are loaded first, otherwise the
// matrices of the previous run are kept so training can continue. eta is
// held here and read by the inference module through eta_raddr/eta_rdata.
// Every sample is fetched from DDR (x: n_in words at addr_x + s*n_in*8,
// y: n_out words at addr_y + s*n_out*8). Arithmetic is binary64 as in the
// source. Each phase issues one multiply-add per clock; per sample the
// compute takes n_hid*(n_in+2) + 3*n_hid^2 + 2*n_hid*n_out + 2*n_hid + 60
// clocks beyond the DMA transfers. The equations and their order are the
// source's; the phase schedule, one MAC per lane and the asynchronously read
// P, eta and vector memories are this design's own choices.
module obt_core
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
  // AXI master client (reads only)
  output dma_cmd_t       dma_cmd,
  input  logic           dma_ready,
  input  logic           dma_rd_valid,
  input  fp64_t          dma_rd_data,
  input  logic           dma_done,
  // W/b BRAM read port
  output logic [WAW-1:0] w_raddr,
  output logic [LAW-1:0] b_raddr,
  input  fp64_t          w_rdata,
  input  fp64_t          b_rdata,
  // eta read port for the inference module
  input  logic [EAW-1:0] eta_raddr,
  output fp64_t          eta_rdata
);
  typedef enum logic [4:0] {
    T_IDLE, T_P_CMD, T_P_DATA, T_E_CMD, T_E_DATA, T_X_CMD, T_X_DATA,
    T_Y_CMD, T_Y_DATA, T_HID_GO, T_HID, T_CD, T_HC, T_DEN, T_DIV, T_CA,
    T_UPD, T_HE, T_E, T_EU, T_NEXT
  } tstate_e;

  tstate_e     st;
  logic [15:0] i, j;
  // i and j cut to the index width of the arrays they address
  localparam int unsigned OAW = (MAX_ON > 1) ? $clog2(MAX_ON) : 1;
  localparam int unsigned PAW = $clog2(MAX_L * MAX_L);
  logic [LAW-1:0] il, jl;
  logic [OAW-1:0] io, jo;
  assign il = LAW'(i);
  assign jl = LAW'(j);
  assign io = OAW'(i);
  assign jo = OAW'(j);
  logic [31:0] s;
  logic [31:0] xptr, yptr;

  // memories
  fp64_t p_mem   [MAX_L*MAX_L];
  fp64_t eta_mem [MAX_L*MAX_ON];
  fp64_t x_mem   [MAX_IN];
  fp64_t y_mem   [MAX_ON];
  fp64_t ye_mem  [MAX_ON];
  fp64_t h_mem   [MAX_L];
  fp64_t c_mem   [MAX_L];
  fp64_t d_mem   [MAX_L];
  fp64_t ca_mem  [MAX_L];
  fp64_t e_mem   [MAX_L];

  fp64_t acc_a, acc_b, a_reg, x_q;

  // hidden layer
  logic           hid_start, hid_done, hid_busy, h_we;
  logic [IAW-1:0] x_raddr;
  logic [LAW-1:0] h_waddr;
  fp64_t          h_wdata;

  hidden_mvm #(.MAX_IN(MAX_IN), .MAX_L(MAX_L)) u_hidden (
    .clk, .rst_n, .start(hid_start), .n_in(cfg.n_in), .n_hid(cfg.n_hid),
    .busy(hid_busy), .done(hid_done),
    .w_addr(w_raddr), .w_data(w_rdata), .b_addr(b_raddr), .b_data(b_rdata),
    .x_addr(x_raddr), .x_data(x_q),
    .h_we, .h_addr(h_waddr), .h_data(h_wdata)
  );
  assign hid_start = (st == T_HID_GO);

  // scalar divider
  logic  div_start, div_busy, div_done;
  fp64_t div_y, den;
  fp64_div u_div (.clk, .rst_n, .start(div_start), .a(FP_ONE), .b(den),
                  .busy(div_busy), .done(div_done), .y(div_y));
  assign div_start = (st == T_DEN);

  // arithmetic lanes
  fp64_t ma_a, ma_b, pa, aa_a, aa_b, sa;
  logic  aa_sub;
  fp64_t mb_a, mb_b, pb, sb;
  fp64_t ac_a, ac_b, sc;
  logic  ac_sub;
  fp64_mul u_mul_a (.a(ma_a), .b(ma_b), .y(pa));
  fp64_add u_add_a (.a(aa_a), .b(aa_b), .sub(aa_sub), .y(sa));
  fp64_mul u_mul_b (.a(mb_a), .b(mb_b), .y(pb));
  fp64_add u_add_b (.a(j == 16'd0 ? FP_ZERO : acc_b), .b(pb), .sub(1'b0), .y(sb));
  fp64_add u_add_c (.a(ac_a), .b(ac_b), .sub(ac_sub), .y(sc));

  logic last_j;
  logic [PAW-1:0] pij, pji;
  logic [EAW-1:0] eij, eji;
  assign last_j = (j == cfg.n_hid - 16'd1);
  assign pij    = PAW'(32'(i) * MAX_L + 32'(j));
  assign pji    = PAW'(32'(j) * MAX_L + 32'(i));
  assign eij    = EAW'(32'(j) * MAX_ON + 32'(i));
  assign eji    = EAW'(32'(i) * MAX_ON + 32'(j));

  always_comb begin
    ma_a = FP_ZERO; ma_b = FP_ZERO;
    aa_a = FP_ZERO; aa_b = pa; aa_sub = 1'b0;
    mb_a = FP_ZERO; mb_b = FP_ZERO;
    ac_a = FP_ONE;  ac_b = acc_a; ac_sub = 1'b0;
    case (st)
      T_CD: begin   // c_i += P[i][j] h_j ; d_i += h_j P[j][i]
        ma_a = p_mem[pij]; ma_b = h_mem[jl];
        aa_a = (j == 16'd0) ? FP_ZERO : acc_a;
        mb_a = h_mem[jl];   mb_b = p_mem[pji];
      end
      T_HC: begin   // h c
        ma_a = h_mem[jl]; ma_b = c_mem[jl];
        aa_a = (j == 16'd0) ? FP_ZERO : acc_a;
      end
      T_CA: begin   // c_j * a
        ma_a = c_mem[jl]; ma_b = a_reg;
      end
      T_UPD: begin  // P[i][j] - ca_i d_j
        ma_a = ca_mem[il]; ma_b = d_mem[jl];
        aa_a = p_mem[pij]; aa_sub = 1'b1;
      end
      T_HE: begin   // (h eta)_i, i = output index; e_y = y - h eta
        ma_a = h_mem[jl]; ma_b = eta_mem[eij];
        aa_a = (j == 16'd0) ? FP_ZERO : acc_a;
        ac_a = y_mem[io]; ac_b = sa; ac_sub = 1'b1;
      end
      T_E: begin    // e_i += P[i][j] h_j
        ma_a = p_mem[pij]; ma_b = h_mem[jl];
        aa_a = (j == 16'd0) ? FP_ZERO : acc_a;
      end
      T_EU: begin   // eta[j][i] += e_j e_y[i]
        ma_a = e_mem[jl]; ma_b = ye_mem[io];
        aa_a = eta_mem[eij];
      end
      default: ;
    endcase
  end
  assign den       = sc;   // 1 + h c in T_DEN
  assign eta_rdata = eta_mem[eta_raddr];
  assign busy      = (st != T_IDLE);

  always_comb begin
    dma_cmd = '0;
    case (st)
      T_P_CMD: begin dma_cmd.valid = 1'b1; dma_cmd.addr = cfg.addr_p;
                     dma_cmd.len = 24'(32'(cfg.n_hid) * 32'(cfg.n_hid)); end
      T_E_CMD: begin dma_cmd.valid = 1'b1; dma_cmd.addr = cfg.addr_eta;
                     dma_cmd.len = 24'(32'(cfg.n_hid) * 32'(cfg.n_out)); end
      T_X_CMD: begin dma_cmd.valid = 1'b1; dma_cmd.addr = xptr;
                     dma_cmd.len = 24'(cfg.n_in); end
      T_Y_CMD: begin dma_cmd.valid = 1'b1; dma_cmd.addr = yptr;
                     dma_cmd.len = 24'(cfg.n_out); end
      default: ;
    endcase
  end

  // memories without reset
  always_ff @(posedge clk) begin
    x_q <= x_mem[x_raddr];
    if (h_we) h_mem[h_waddr] <= h_wdata;
    case (st)
      T_P_DATA: if (dma_rd_valid) p_mem[pij] <= dma_rd_data;
      T_E_DATA: if (dma_rd_valid) eta_mem[eji] <= dma_rd_data;
      T_X_DATA: if (dma_rd_valid) x_mem[IAW'(j)] <= dma_rd_data;
      T_Y_DATA: if (dma_rd_valid) y_mem[jo] <= dma_rd_data;
      T_CD:     if (last_j) begin c_mem[il] <= sa; d_mem[il] <= sb; end
      T_CA:     ca_mem[jl] <= pa;
      T_UPD:    p_mem[pij] <= sa;
      T_HE:     if (last_j) ye_mem[io] <= sc;
      T_E:      if (last_j) e_mem[il] <= sa;
      T_EU:     eta_mem[eij] <= sa;
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st    <= T_IDLE;
      i     <= '0;
      j     <= '0;
      s     <= '0;
      xptr  <= '0;
      yptr  <= '0;
      acc_a <= FP_ZERO;
      acc_b <= FP_ZERO;
      a_reg <= FP_ZERO;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      case (st)
        T_IDLE: if (start) begin
          i    <= '0;
          j    <= '0;
          s    <= '0;
          xptr <= cfg.addr_x;
          yptr <= cfg.addr_y;
          st   <= cfg.init ? T_P_CMD : T_X_CMD;
        end
        // ---- P0 and eta0 from initial training
        T_P_CMD: if (dma_ready) st <= T_P_DATA;
        T_P_DATA: begin
          if (dma_rd_valid) begin
            if (last_j) begin j <= '0; i <= i + 16'd1; end
            else        j <= j + 16'd1;
          end
          if (dma_done) begin i <= '0; j <= '0; st <= T_E_CMD; end
        end
        T_E_CMD: if (dma_ready) st <= T_E_DATA;
        T_E_DATA: begin
          if (dma_rd_valid) begin
            if (j == cfg.n_out - 16'd1) begin j <= '0; i <= i + 16'd1; end
            else                        j <= j + 16'd1;
          end
          if (dma_done) begin i <= '0; j <= '0; st <= T_X_CMD; end
        end
        // ---- one training sample
        T_X_CMD: if (dma_ready) st <= T_X_DATA;
        T_X_DATA: begin
          if (dma_rd_valid) j <= j + 16'd1;
          if (dma_done) begin j <= '0; st <= T_Y_CMD; end
        end
        T_Y_CMD: if (dma_ready) st <= T_Y_DATA;
        T_Y_DATA: begin
          if (dma_rd_valid) j <= j + 16'd1;
          if (dma_done) begin j <= '0; st <= T_HID_GO; end
        end
        T_HID_GO: st <= T_HID;
        T_HID: if (hid_done) begin i <= '0; j <= '0; st <= T_CD; end
        T_CD: begin
          acc_a <= sa;
          acc_b <= sb;
          if (last_j) begin
            j <= '0;
            if (i == cfg.n_hid - 16'd1) begin i <= '0; st <= T_HC; end
            else                        i <= i + 16'd1;
          end else j <= j + 16'd1;
        end
        T_HC: begin
          acc_a <= sa;
          if (last_j) begin j <= '0; st <= T_DEN; end
          else        j <= j + 16'd1;
        end
        T_DEN: st <= T_DIV;
        T_DIV: if (div_done) begin a_reg <= div_y; st <= T_CA; end
        T_CA: begin
          if (last_j) begin j <= '0; st <= T_UPD; end
          else        j <= j + 16'd1;
        end
        T_UPD: begin
          if (last_j) begin
            j <= '0;
            if (i == cfg.n_hid - 16'd1) begin i <= '0; st <= T_HE; end
            else                        i <= i + 16'd1;
          end else j <= j + 16'd1;
        end
        T_HE: begin
          acc_a <= sa;
          if (last_j) begin
            j <= '0;
            if (i == cfg.n_out - 16'd1) begin i <= '0; st <= T_E; end
            else                        i <= i + 16'd1;
          end else j <= j + 16'd1;
        end
        T_E: begin
          acc_a <= sa;
          if (last_j) begin
            j <= '0;
            if (i == cfg.n_hid - 16'd1) begin i <= '0; st <= T_EU; end
            else                        i <= i + 16'd1;
          end else j <= j + 16'd1;
        end
        T_EU: begin   // i: output index, j: hidden index
          if (last_j) begin
            j <= '0;
            if (i == cfg.n_out - 16'd1) begin i <= '0; st <= T_NEXT; end
            else                        i <= i + 16'd1;
          end else j <= j + 16'd1;
        end
        T_NEXT: begin
          s    <= s + 32'd1;
          xptr <= xptr + 32'(cfg.n_in) * 32'd8;
          yptr <= yptr + 32'(cfg.n_out) * 32'd8;
          if (s == cfg.n_samples - 32'd1) begin
            done <= 1'b1;
            st   <= T_IDLE;
          end else begin
            st <= T_X_CMD;
          end
        end
        default: st <= T_IDLE;
      endcase
    end
  end
endmodule
