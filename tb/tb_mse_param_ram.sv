// tb_mse_param_ram -- writes the four slots of the exponentiation core's
// parameter memory and reads them back through both read ports.
module tb_mse_param_ram;
  localparam int unsigned W = 24;
  logic clk = 0, rst_n = 0, we = 0;
  logic [1:0] waddr, raddr_x, raddr_y;
  logic [W-1:0] wdata, rdata_x, rdata_y;
  logic [W-1:0] model [4];
  int checks = 0, failures = 0;

  mse_param_ram #(.W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    waddr = 0; raddr_x = 0; raddr_y = 0; wdata = 0;
    foreach (model[i]) model[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      we = ($urandom % 2 == 0);
      waddr = 2'($urandom); wdata = W'($urandom);
      raddr_x = 2'($urandom); raddr_y = 2'($urandom);
      #1;
      checks += 2;
      if (rdata_x != model[raddr_x]) begin failures++; $display("FAIL x slot %0d", raddr_x); end
      if (rdata_y != model[raddr_y]) begin failures++; $display("FAIL y slot %0d", raddr_y); end
      @(posedge clk);
      if (we) model[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
