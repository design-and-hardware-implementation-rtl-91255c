// tb_extract_unit -- checks that the extracted bit is (E1 > E2).
module tb_extract_unit;
  localparam int unsigned MOD_W = 24;
  logic [MOD_W-1:0] em1, em2;
  logic bit_out;
  int checks = 0, failures = 0;

  extract_unit #(.MOD_W(MOD_W)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      em1 = MOD_W'($urandom);
      em2 = (t % 10 == 0) ? em1 : (t % 10 == 1) ? em1 + 1 : MOD_W'($urandom);
      #1;
      checks++;
      if (bit_out != (em1 > em2)) begin failures++; $display("FAIL %0d %0d", em1, em2); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
