// mse_param_ram -- the small "RAM-based memory" of the exponentiation core.
//
// Four words: slot 0 holds g0' (Montgomery form of g0), slot 1 g1', slot 2
// g01' = MontP(g0', g1') and slot 3 the running accumulator A.  The core
// writes the result of every Montgomery product into one slot and reads two
// slots as the next operands.  The four stored values are the paper's; the
// organisation (one synchronous write port, two asynchronous read ports,
// cleared by reset) is this design's choice.
module mse_param_ram #(
  parameter int unsigned W = 24
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         we,
  input  logic [1:0]   waddr,
  input  logic [W-1:0] wdata,
  input  logic [1:0]   raddr_x,
  input  logic [1:0]   raddr_y,
  output logic [W-1:0] rdata_x,
  output logic [W-1:0] rdata_y
);

  logic [W-1:0] mem [4];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 4; i++) mem[i] <= '0;
    end else if (we) begin
      mem[waddr] <= wdata;
    end
  end

  assign rdata_x = mem[raddr_x];
  assign rdata_y = mem[raddr_y];

endmodule
