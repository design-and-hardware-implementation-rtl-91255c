// mont_mul -- bit-serial radix-2 Montgomery multiplier, a = x*y*R^-1 mod n
// with R = 2^W.
//
// This is the multiplier inside the exponentiation core.  Its ports follow
// the core's block diagram (operands x and y, modulus n, result a, start and
// done).  The internal structure is this design's own choice, the simplest
// one that works: one bit of x is consumed per clock,
//     t = acc + x_i*y ;  if t is odd, t = t + n ;  acc = t / 2
// which keeps acc < 2n, followed by one conditional subtraction of n.
//
// Interface: pulse start for one cycle with x, y, n valid (they are
// captured on that edge).  Requirements: n odd, x < n, y < n.
// Timing: done is a one-cycle pulse W+2 cycles after the cycle in which
// start is high (W+1 clock edges after the one that samples start), with a
// valid from then until the next start.  start is ignored while busy.
module mont_mul #(
  parameter int unsigned W = 24
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] x,
  input  logic [W-1:0] y,
  input  logic [W-1:0] n,
  output logic [W-1:0] a,
  output logic         done,
  output logic         busy
);

  localparam int unsigned CW = $clog2(W + 1);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_FIN} state_e;
  state_e state;

  logic [W-1:0]  xr, yr, nr;
  logic [W+1:0]  acc;
  logic [CW-1:0] cnt;
  logic [W+1:0]  t_add, t_red;

  always_comb begin
    t_add = acc + (xr[0] ? {2'b00, yr} : '0);
    t_red = t_add[0] ? t_add + {2'b00, nr} : t_add;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      xr    <= '0;
      yr    <= '0;
      nr    <= '0;
      acc   <= '0;
      cnt   <= '0;
      a     <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          xr    <= x;
          yr    <= y;
          nr    <= n;
          acc   <= '0;
          cnt   <= '0;
          state <= S_RUN;
        end
        S_RUN: begin
          acc <= t_red >> 1;
          xr  <= xr >> 1;
          cnt <= cnt + 1'b1;
          if (cnt == CW'(W - 1)) state <= S_FIN;
        end
        S_FIN: begin
          a     <= (acc >= {2'b00, nr}) ? W'(acc - {2'b00, nr}) : acc[W-1:0];
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  // After the loop the accumulator is below 2n, so one subtraction suffices.
  a_acc_bound: assert property (@(posedge clk) disable iff (!rst_n)
                                (state == S_FIN) |-> (acc < {1'b0, nr, 1'b0}));

endmodule
