// bram_sp -- single-port synchronous block RAM (read-first).
//
// Holds the image (one ciphertext pair, or one plain pixel, per address)
// and the secret bits.  The pixel engines read a word, process it and
// write the result back at the same address.  Written so that FPGA tools
// infer block RAM; its contents are not reset.
// Timing: rdata shows the word at addr one cycle after the edge that
// samples addr; a write on that edge does not affect rdata (read-first).
module bram_sp #(
  parameter int unsigned DEPTH = 65536,
  parameter int unsigned WIDTH = 48,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[addr] <= wdata;
    rdata <= mem[addr];
  end

endmodule
