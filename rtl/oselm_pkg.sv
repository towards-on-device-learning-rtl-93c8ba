// oselm_pkg: types and constants shared by the OS-ELM programmable-logic
// blocks. All arithmetic is IEEE-754 binary64 (double), the number format of
// the original hardware. Working modes follow the three IP cores: 0 loads W
// and b, 1 runs one-batch training, 2 runs inference. The register map, the
// DMA command bundle and the double-precision constants are this design's own.
package oselm_pkg;

  typedef logic [63:0] fp64_t;

  localparam fp64_t FP_ZERO = 64'h0000_0000_0000_0000;
  localparam fp64_t FP_ONE  = 64'h3FF0_0000_0000_0000;

  typedef enum logic [1:0] {
    MODE_LOAD  = 2'd0,  // data loading module: W and b into BRAM
    MODE_TRAIN = 2'd1,  // OBT module: sequential training
    MODE_INFER = 2'd2   // inference module
  } work_mode_e;

  // AXI-lite register byte offsets (32-bit registers)
  localparam logic [7:0] REG_CTRL      = 8'h00; // W: bit0 start, bit1 load P0/eta0 first
  localparam logic [7:0] REG_MODE      = 8'h04; // RW: working mode
  localparam logic [7:0] REG_STATUS    = 8'h08; // RO: bit0 busy, bit1 done
  localparam logic [7:0] REG_N_IN      = 8'h0C; // RW: #IN
  localparam logic [7:0] REG_N_HID     = 8'h10; // RW: L
  localparam logic [7:0] REG_N_OUT     = 8'h14; // RW: #ON
  localparam logic [7:0] REG_N_SAMPLES = 8'h18; // RW: samples per start
  localparam logic [7:0] REG_ADDR_W    = 8'h1C; // RW: DDR byte address of W
  localparam logic [7:0] REG_ADDR_B    = 8'h20; // RW: b
  localparam logic [7:0] REG_ADDR_P    = 8'h24; // RW: P_N0
  localparam logic [7:0] REG_ADDR_ETA  = 8'h28; // RW: eta_N0
  localparam logic [7:0] REG_ADDR_X    = 8'h2C; // RW: input vectors
  localparam logic [7:0] REG_ADDR_Y    = 8'h30; // RW: labels
  localparam logic [7:0] REG_ADDR_YHAT = 8'h34; // RW: inference results

  // Configuration seen by the IP cores
  typedef struct packed {
    work_mode_e  mode;
    logic        init;       // training: load P0 and eta0 before the first sample
    logic [15:0] n_in;
    logic [15:0] n_hid;
    logic [15:0] n_out;
    logic [31:0] n_samples;
    logic [31:0] addr_w;
    logic [31:0] addr_b;
    logic [31:0] addr_p;
    logic [31:0] addr_eta;
    logic [31:0] addr_x;
    logic [31:0] addr_y;
    logic [31:0] addr_yhat;
  } cfg_t;

  // Command from an IP core to the AXI master: move len 64-bit words
  // starting at byte address addr (8-byte aligned).
  typedef struct packed {
    logic        valid;
    logic        write;      // 1: PL -> DDR, 0: DDR -> PL
    logic [31:0] addr;
    logic [23:0] len;
  } dma_cmd_t;

endpackage
