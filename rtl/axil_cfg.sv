// axil_cfg: AXI4-Lite slave (32-bit data, general-purpose port of the
// processor) holding the configuration of the IP cores: the working mode that
// steers the multiplexer in front of the three modules, the topology
// (#IN, L, #ON), the sample count and the DDR addresses of the matrices.
// Writing CTRL bit 0 raises start for one clock; CTRL bit 1 asks the
// training module to load P0 and eta0 first. STATUS reads busy (bit 0) and a
// sticky done (bit 1), cleared by the next start. Register offsets are in
// oselm_pkg. A write completes when both its address and data have been
// taken; the response follows one clock later. A read answers one clock
// after its address. Working mode values 0/1/2 and a 32-bit port are from the
// source; the register map is this design's own.
// Lint notes that rst_n feeds both asynchronous resets and, through the
// disable iff of the handshake assertions, sampled logic; the registers
// themselves use only the asynchronous reset.
module axil_cfg
  import oselm_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite slave
  input  logic [31:0] s_awaddr,
  input  logic        s_awvalid,
  output logic        s_awready,
  input  logic [31:0] s_wdata,
  input  logic [3:0]  s_wstrb,
  input  logic        s_wvalid,
  output logic        s_wready,
  output logic [1:0]  s_bresp,
  output logic        s_bvalid,
  input  logic        s_bready,
  input  logic [31:0] s_araddr,
  input  logic        s_arvalid,
  output logic        s_arready,
  output logic [31:0] s_rdata,
  output logic [1:0]  s_rresp,
  output logic        s_rvalid,
  input  logic        s_rready,
  // to the IP cores
  output cfg_t        cfg,
  output logic        start,
  input  logic        busy,
  input  logic        done_evt
);
  logic        aw_full, w_full, done_st;
  logic [7:0]  aw_q;
  logic [31:0] w_q;

  assign s_awready = !aw_full && !s_bvalid;
  assign s_wready  = !w_full && !s_bvalid;
  assign s_bresp   = 2'b00;
  assign s_rresp   = 2'b00;
  assign s_arready = !s_rvalid;

  function automatic logic [31:0] rd_reg(input logic [7:0] a);
    case (a)
      REG_MODE:      return {30'd0, cfg.mode};
      REG_STATUS:    return {30'd0, done_st, busy};
      REG_N_IN:      return {16'd0, cfg.n_in};
      REG_N_HID:     return {16'd0, cfg.n_hid};
      REG_N_OUT:     return {16'd0, cfg.n_out};
      REG_N_SAMPLES: return cfg.n_samples;
      REG_ADDR_W:    return cfg.addr_w;
      REG_ADDR_B:    return cfg.addr_b;
      REG_ADDR_P:    return cfg.addr_p;
      REG_ADDR_ETA:  return cfg.addr_eta;
      REG_ADDR_X:    return cfg.addr_x;
      REG_ADDR_Y:    return cfg.addr_y;
      REG_ADDR_YHAT: return cfg.addr_yhat;
      default:       return 32'd0;
    endcase
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      aw_full  <= 1'b0;
      w_full   <= 1'b0;
      aw_q     <= '0;
      w_q      <= '0;
      s_bvalid <= 1'b0;
      s_rvalid <= 1'b0;
      s_rdata  <= '0;
      start    <= 1'b0;
      done_st  <= 1'b0;
      cfg      <= '{mode: MODE_LOAD, init: 1'b0, n_in: 16'd1, n_hid: 16'd1,
                    n_out: 16'd1, n_samples: 32'd1, default: '0};
    end else begin
      start <= 1'b0;
      if (done_evt) done_st <= 1'b1;
      if (s_awvalid && s_awready) begin
        aw_full <= 1'b1;
        aw_q    <= s_awaddr[7:0];
      end
      if (s_wvalid && s_wready) begin
        w_full <= 1'b1;
        w_q    <= s_wdata;
      end
      if (aw_full && w_full) begin
        aw_full  <= 1'b0;
        w_full   <= 1'b0;
        s_bvalid <= 1'b1;
        case (aw_q)
          REG_CTRL: begin
            start    <= w_q[0];
            cfg.init <= w_q[1];
            if (w_q[0]) done_st <= 1'b0;
          end
          REG_MODE:      cfg.mode      <= work_mode_e'(w_q[1:0]);
          REG_N_IN:      cfg.n_in      <= w_q[15:0];
          REG_N_HID:     cfg.n_hid     <= w_q[15:0];
          REG_N_OUT:     cfg.n_out     <= w_q[15:0];
          REG_N_SAMPLES: cfg.n_samples <= w_q;
          REG_ADDR_W:    cfg.addr_w    <= w_q;
          REG_ADDR_B:    cfg.addr_b    <= w_q;
          REG_ADDR_P:    cfg.addr_p    <= w_q;
          REG_ADDR_ETA:  cfg.addr_eta  <= w_q;
          REG_ADDR_X:    cfg.addr_x    <= w_q;
          REG_ADDR_Y:    cfg.addr_y    <= w_q;
          REG_ADDR_YHAT: cfg.addr_yhat <= w_q;
          default: ;
        endcase
      end
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      if (s_arvalid && s_arready) begin
        s_rvalid <= 1'b1;
        s_rdata  <= rd_reg(s_araddr[7:0]);
      end else if (s_rvalid && s_rready) begin
        s_rvalid <= 1'b0;
      end
    end
  end

  // AXI rule: a response, once valid, stays valid until taken
  a_bvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
                                  s_bvalid && !s_bready |=> s_bvalid);
  a_rvalid_hold: assert property (@(posedge clk) disable iff (!rst_n)
                                  s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata));
endmodule
