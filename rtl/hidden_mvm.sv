// hidden_mvm: hidden-layer unit, h = Phi(W x + b), for one input vector.
// It runs the two nested loops of the source design: the outer loop over
// the n_hid hidden nodes j, the inner loop over the n_in inputs k, with one
// double multiply-accumulate per clock (acc = b_j + sum_k W[j][k] x[k]), then
// the sigmoid of the sum is written to the h buffer. The training and the
// inference module each own an instance, as the source keeps their logic
// apart. Memories: W at word address j*MAX_IN + k, b at j, x at k, all read
// with one clock of latency. Timing: done pulses n_hid*(n_in+2) clocks after
// the start clock (n_in issue clocks, one drain, one activation per node).
// The single multiply-accumulate lane is this design's own choice.
module hidden_mvm
  import oselm_pkg::*;
#(
  parameter int unsigned MAX_IN = 256,
  parameter int unsigned MAX_L  = 150,
  localparam int unsigned WAW = $clog2(MAX_IN * MAX_L),
  localparam int unsigned LAW = $clog2(MAX_L),
  localparam int unsigned IAW = $clog2(MAX_IN)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [15:0]    n_in,
  input  logic [15:0]    n_hid,
  output logic           busy,
  output logic           done,
  // W and b memory read port
  output logic [WAW-1:0] w_addr,
  input  fp64_t          w_data,
  output logic [LAW-1:0] b_addr,
  input  fp64_t          b_data,
  // x buffer read port
  output logic [IAW-1:0] x_addr,
  input  fp64_t          x_data,
  // h buffer write port
  output logic           h_we,
  output logic [LAW-1:0] h_addr,
  output fp64_t          h_data
);
  typedef enum logic [1:0] {H_IDLE, H_ISSUE, H_DRAIN, H_ACT} hstate_e;
  hstate_e        st;
  logic [15:0]    j, k;
  logic [WAW-1:0] row;
  logic           v_d, first_d;
  fp64_t          acc, prod, sum, act;

  fp64_mul    u_mul (.a(w_data), .b(x_data), .y(prod));
  fp64_add    u_add (.a(first_d ? b_data : acc), .b(prod), .sub(1'b0), .y(sum));
  sigmoid_act u_act (.x(acc), .y(act));

  assign busy   = (st != H_IDLE);
  assign w_addr = row + WAW'(k);
  assign x_addr = IAW'(k);
  assign b_addr = LAW'(j);
  assign h_we   = (st == H_ACT);
  assign h_addr = LAW'(j);
  assign h_data = act;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st      <= H_IDLE;
      j       <= '0;
      k       <= '0;
      row     <= '0;
      v_d     <= 1'b0;
      first_d <= 1'b0;
      acc     <= FP_ZERO;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      v_d  <= 1'b0;
      if (v_d) acc <= sum;
      case (st)
        H_IDLE: if (start) begin
          j   <= '0;
          k   <= '0;
          row <= '0;
          st  <= H_ISSUE;
        end
        H_ISSUE: begin
          v_d     <= 1'b1;
          first_d <= (k == 16'd0);
          if (k == n_in - 16'd1) st <= H_DRAIN;
          else                   k  <= k + 16'd1;
        end
        H_DRAIN: st <= H_ACT;
        H_ACT: begin
          k   <= '0;
          j   <= j + 16'd1;
          row <= row + WAW'(MAX_IN);
          if (j == n_hid - 16'd1) begin
            done <= 1'b1;
            st   <= H_IDLE;
          end else begin
            st   <= H_ISSUE;
          end
        end
        default: st <= H_IDLE;
      endcase
    end
  end
endmodule
