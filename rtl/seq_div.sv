// seq_div -- sequential restoring divider, quo = num / den, rem = num % den.
//
// One quotient bit per clock, most significant first: the partial remainder
// is shifted left by one numerator bit and den is subtracted when it fits.
// Helper of the decryption tail (dec_lfunc); its structure is this design's
// own choice.
//
// Interface: pulse start with num and den valid (captured); den must be
// non-zero.  done is high DW+1 cycles after the cycle in which start is
// high; quo and rem hold
// until the next start.
module seq_div #(
  parameter int unsigned DW = 24,   // numerator / quotient width
  parameter int unsigned VW = 12    // denominator / remainder width
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [DW-1:0] num,
  input  logic [VW-1:0] den,
  output logic [DW-1:0] quo,
  output logic [VW-1:0] rem,
  output logic          done
);

  localparam int unsigned CW = $clog2(DW + 1);

  logic          running;
  logic [CW-1:0] cnt;
  logic [DW-1:0] q_sh;      // numerator bits shifting out, quotient bits shifting in
  logic [VW-1:0] den_r;
  logic [VW:0]   part;      // partial remainder, one bit wider than den
  logic [VW:0]   trial;

  assign part  = {rem, q_sh[DW-1]};
  assign trial = part - {1'b0, den_r};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0;
      cnt     <= '0;
      q_sh    <= '0;
      den_r   <= '0;
      rem     <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!running) begin
        if (start) begin
          q_sh    <= num;
          den_r   <= den;
          rem     <= '0;
          cnt     <= '0;
          running <= 1'b1;
        end
      end else begin
        if (part >= {1'b0, den_r}) begin
          rem  <= trial[VW-1:0];
          q_sh <= {q_sh[DW-2:0], 1'b1};
        end else begin
          rem  <= part[VW-1:0];
          q_sh <= {q_sh[DW-2:0], 1'b0};
        end
        cnt <= cnt + 1'b1;
        if (cnt == CW'(DW - 1)) begin
          running <= 1'b0;
          done    <= 1'b1;
        end
      end
    end
  end

  // quo mirrors the shift register once the division has finished
  always_comb quo = q_sh;

endmodule
