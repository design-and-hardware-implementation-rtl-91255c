// dec_lfunc -- tail of Paillier decryption: m = L(u) * mu mod n.
//
// Given u = C^lambda mod n^2 from the exponentiation core, the decryption
// equation M = L(C^lambda mod n^2) / L(g^lambda mod n^2) mod n, with
// L(x) = (x-1)/n, is evaluated as
//     L  = (u - 1) / n               (division 1, quotient)
//     m  = (L * mu) mod n            (division 2, remainder)
// where mu = L(g^lambda mod n^2)^-1 mod n is precomputed with the private
// key.  Replacing the division by the inverse mu, and sharing one
// sequential divider (seq_div) between both steps, are this design's
// choices; the paper gives only the equation.
//
// Interface: pulse start with u, n, mu valid (captured).  u = 1 mod n is
// expected (true for any valid ciphertext).
// Timing: done is high 2*MOD_W + 5 cycles after the cycle in which start
// is high.
module dec_lfunc
  import stego_pkg::*;
#(
  parameter int unsigned NB = NBITS,
  parameter int unsigned MW = MOD_W
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [MW-1:0] u,
  input  logic [NB-1:0] n,
  input  logic [NB-1:0] mu,
  output logic [NB-1:0] m,
  output logic          done
);

  typedef enum logic [2:0] {S_IDLE, S_DIV1, S_WAIT1, S_DIV2, S_WAIT2} state_e;
  state_e state;

  logic [MW-1:0] u_r;
  logic [NB-1:0] n_r, mu_r;
  logic [MW-1:0] prod;

  logic          dv_start, dv_done;
  logic [MW-1:0] dv_num, dv_quo;
  logic [NB-1:0] dv_rem;

  // L < n, so the low NB quotient bits hold it; the product L*mu fits MW bits.
  assign prod     = MW'(dv_quo[NB-1:0]) * MW'(mu_r);
  assign dv_start = (state == S_DIV1) || (state == S_DIV2);
  assign dv_num   = (state == S_DIV1) ? u_r - 1'b1 : prod;

  seq_div #(.DW(MW), .VW(NB)) u_div (
    .clk, .rst_n,
    .start(dv_start), .num(dv_num), .den(n_r),
    .quo(dv_quo), .rem(dv_rem), .done(dv_done)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      u_r   <= '0;
      n_r   <= '0;
      mu_r  <= '0;
      m     <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE:  if (start) begin
          u_r   <= u;
          n_r   <= n;
          mu_r  <= mu;
          state <= S_DIV1;
        end
        S_DIV1:  state <= S_WAIT1;
        S_WAIT1: if (dv_done) state <= S_DIV2;
        S_DIV2:  state <= S_WAIT2;
        S_WAIT2: if (dv_done) begin
          m     <= dv_rem;
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
