// tb_bram_sp -- random writes and reads against a model; checks the
// one-cycle read latency and read-first behaviour.
module tb_bram_sp;
  localparam int unsigned DEPTH = 256, WIDTH = 48;
  logic clk = 0, we = 0;
  logic [7:0] addr;
  logic [WIDTH-1:0] wdata, rdata, exp_q;
  logic [WIDTH-1:0] model [DEPTH];
  int checks = 0, failures = 0;
  bit have_exp = 0;

  bram_sp #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    addr = 0; wdata = 0;
    // initialise every word
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); we = 1; addr = 8'(i); wdata = {16'($urandom), 32'($urandom)};
      model[i] = wdata;
    end
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      if (have_exp) begin
        checks++;
        if (rdata !== exp_q) begin failures++; $display("FAIL read %h expected %h", rdata, exp_q); end
      end
      we = ($urandom % 3 == 0);
      addr = 8'($urandom);
      wdata = {16'($urandom), 32'($urandom)};
      exp_q = model[addr];                 // read-first: old value
      have_exp = 1;
      if (we) model[addr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
