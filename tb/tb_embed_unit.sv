// tb_embed_unit -- checks the ordering rule for every combination of bit
// and pair order, including equal pairs, on random ciphertexts.
module tb_embed_unit;
  localparam int unsigned MOD_W = 24;
  logic bit_in, swapped;
  logic [MOD_W-1:0] em1, em2, out1, out2;
  int checks = 0, failures = 0;

  embed_unit #(.MOD_W(MOD_W)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      logic exp_swap;
      bit_in = 1'($urandom);
      em1 = MOD_W'($urandom);
      em2 = (t % 10 == 0) ? em1 : MOD_W'($urandom);
      #1;
      exp_swap = (bit_in && em1 < em2) || (!bit_in && em1 > em2);
      checks += 3;
      if (swapped != exp_swap) begin failures++; $display("FAIL swap flag"); end
      if (out1 != (exp_swap ? em2 : em1) || out2 != (exp_swap ? em1 : em2)) begin
        failures++; $display("FAIL pair");
      end
      // the stored order must encode the bit (unless equal)
      if (out1 != out2 && (out1 > out2) != bit_in) begin failures++; $display("FAIL order"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
