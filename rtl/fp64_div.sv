// fp64_div: sequential IEEE-754 binary64 divider, y = a / b, for the one
// scalar division of each training step, a = 1 / (1 + h P h^T). Restoring
// long division produces one quotient bit per clock: 53 significand bits and
// a guard bit, with the remainder as sticky bit, then rounds to
// nearest-even. Interface: pulse start with a and b valid; done pulses with
// y valid DIV_CYCLES = 56 clocks later (1 setup, 54 bit steps, 1 rounding);
// busy is high meanwhile. This design's own choices: bit-serial radix 2,
// subnormals read as zero and flushed to zero, x/0 gives infinity, 0/x zero.
module fp64_div
  import oselm_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  fp64_t a,
  input  fp64_t b,
  output logic  busy,
  output logic  done,
  output fp64_t y
);
  typedef enum logic [1:0] {D_IDLE, D_STEP, D_ROUND} dstate_e;
  dstate_e            st;
  logic [54:0]        rem;       // partial remainder, < 2*divisor
  logic [52:0]        dvs;
  logic [53:0]        q;         // 53 significand bits + guard
  logic [5:0]         cnt;
  logic signed [13:0] e;
  logic               s, special;
  fp64_t              special_y;

  logic [52:0]        qm;
  logic               rup;
  logic [53:0]        rnd;
  logic signed [13:0] er;
  logic [54:0]        rem_sub;

  assign busy = (st != D_IDLE);
  assign rem_sub = rem - {2'b00, dvs};

  always_comb begin
    qm  = q[53:1];
    rup = q[0] & ((rem != '0) | qm[0]);
    rnd = {1'b0, qm} + 54'(rup);
    er  = e;
    if (rnd[53]) begin
      rnd = rnd >> 1;
      er  = e + 14'sd1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= D_IDLE;
      done      <= 1'b0;
      y         <= FP_ZERO;
      rem       <= '0;
      dvs       <= '0;
      q         <= '0;
      cnt       <= '0;
      e         <= '0;
      s         <= 1'b0;
      special   <= 1'b0;
      special_y <= FP_ZERO;
    end else begin
      done <= 1'b0;
      case (st)
        D_IDLE: if (start) begin
          s   <= a[63] ^ b[63];
          dvs <= {1'b1, b[51:0]};
          q   <= '0;
          cnt <= 6'd54;
          special   <= 1'b0;
          special_y <= FP_ZERO;
          if (b[62:52] == 11'd0 || a[62:52] == 11'h7FF) begin
            special   <= 1'b1;
            special_y <= {a[63] ^ b[63], 11'h7FF, 52'd0};
          end else if (a[62:52] == 11'd0 || b[62:52] == 11'h7FF) begin
            special   <= 1'b1;
            special_y <= {a[63] ^ b[63], 63'd0};
          end
          // pre-normalise so that the first quotient bit is 1
          if (a[51:0] >= b[51:0]) begin
            rem <= {2'b00, 1'b1, a[51:0]};
            e   <= 14'(a[62:52]) - 14'(b[62:52]) + 14'sd1023;
          end else begin
            rem <= {1'b0, 1'b1, a[51:0], 1'b0};
            e   <= 14'(a[62:52]) - 14'(b[62:52]) + 14'sd1022;
          end
          st <= D_STEP;
        end
        D_STEP: begin
          if (rem >= {2'b00, dvs}) begin
            q   <= {q[52:0], 1'b1};
            rem <= {rem_sub[53:0], 1'b0};
          end else begin
            q   <= {q[52:0], 1'b0};
            rem <= {rem[53:0], 1'b0};
          end
          cnt <= cnt - 6'd1;
          if (cnt == 6'd1) st <= D_ROUND;
        end
        D_ROUND: begin
          if (special)            y <= special_y;
          else if (er >= 14'sd2047) y <= {s, 11'h7FF, 52'd0};
          else if (er <= 14'sd0)    y <= {s, 63'd0};
          else                      y <= {s, er[10:0], rnd[51:0]};
          done <= 1'b1;
          st   <= D_IDLE;
        end
        default: st <= D_IDLE;
      endcase
    end
  end
endmodule
