// dma_model: behavioural stand-in for the AXI master and DDR, seen from an
// IP core's command interface. Memory words are 64 bits, word address =
// byte address / 8. A command is taken when ready is high (idle); a read
// then returns one word per clock, a write takes one word per clock while
// wr_valid is high; done pulses the clock after the last word.
module dma_model
  import oselm_pkg::*;
#(
  parameter int unsigned WORDS = 4096
) (
  input  logic     clk,
  input  dma_cmd_t cmd,
  output logic     ready,
  output logic     rd_valid,
  output fp64_t    rd_data,
  input  fp64_t    wr_data,
  input  logic     wr_valid,
  output logic     wr_ready,
  output logic     done
);
  logic [63:0] mem [WORDS];
  logic        active = 1'b0, wr = 1'b0;
  int unsigned ptr = 0, left = 0;
  int unsigned n_cmds = 0;

  assign ready    = !active;
  assign wr_ready = active && wr && left != 0;

  always_ff @(posedge clk) begin
    rd_valid <= 1'b0;
    done     <= 1'b0;
    if (!active) begin
      if (cmd.valid && cmd.len != 0) begin
        active <= 1'b1;
        wr     <= cmd.write;
        ptr    <= cmd.addr >> 3;
        left   <= cmd.len;
        n_cmds <= n_cmds + 1;
      end
    end else if (!wr) begin
      if (left != 0) begin
        rd_valid <= 1'b1;
        rd_data  <= mem[ptr];
        ptr      <= ptr + 1;
        left     <= left - 1;
      end else begin
        // last beat was delivered in the previous clock
      end
      if (left == 1) begin
        active <= 1'b0;
        done   <= 1'b1;
      end
    end else begin
      if (wr_valid && left != 0) begin
        mem[ptr] <= wr_data;
        ptr      <= ptr + 1;
        left     <= left - 1;
        if (left == 1) begin
          active <= 1'b0;
          done   <= 1'b1;
        end
      end
    end
  end
endmodule
