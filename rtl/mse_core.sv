// mse_core -- Montgomery Simultaneous Exponentiation, a = g0^e0 * g1^e1 mod n.
//
// Implements the simultaneous left-to-right binary exponentiation of the
// paper's Algorithm 2 with one Montgomery multiplier (mont_mul), a four-word
// parameter memory (mse_param_ram) and the finite-state machine below.
// Sequence of Montgomery products (MontP):
//   PRE_G0   g0'  = MontP(g0, e_2k)          (e_2k = R^2 mod n)
//   PRE_G1   g1'  = MontP(g1, e_2k)
//   PRE_G01  g01' = MontP(g0', g1')
//   PRE_A    A    = MontP(e_2k, 1)           (Montgomery form of 1)
//   for i = EXP_W-1 downto 0:
//     SQR    A = MontP(A, A)
//     MUL    A = MontP(A, g0' | g1' | g01') for (e0[i],e1[i]) = 10 | 01 | 11
//   POST     a = MontP(A, 1)                 (back to the natural domain)
// A plain exponentiation g0^e0 (used for decryption) is the same run with
// e1 = 0.  The paper's listing pairs case "0,1" with g0' and "1,0" with g1';
// here the pairing is the one that yields g0^e0*g1^e1.  The paper also
// writes e_2k = 2^k mod n in Algorithm 2 but 2^2k mod n in Algorithm 1; the
// latter (R^2 mod n) is the value that makes the algorithm correct and is
// the one expected on e_2k.
//
// Interface: pulse start with all inputs valid (captured on that edge);
// n odd, g0 < n, g1 < n.  done pulses once when a is valid.
// Timing: each MontP takes W+3 cycles (issue, W+1 in the multiplier, hand-
// back), so from the start edge to done a run takes
// (5 + EXP_W + ones(e0 OR e1)) * (W+3) + 1 cycles from the start cycle to
// the done cycle; with W = 24, EXP_W = 12
// that is 460 to 784 cycles.
module mse_core #(
  parameter int unsigned W     = 24,
  parameter int unsigned EXP_W = 12
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [W-1:0]     g0,
  input  logic [W-1:0]     g1,
  input  logic [EXP_W-1:0] e0,
  input  logic [EXP_W-1:0] e1,
  input  logic [W-1:0]     n,
  input  logic [W-1:0]     e_2k,
  output logic [W-1:0]     a,
  output logic             done,
  output logic             busy
);

  localparam logic [1:0] SLOT_G0 = 2'd0, SLOT_G1 = 2'd1, SLOT_G01 = 2'd2, SLOT_A = 2'd3;
  localparam int unsigned IW = (EXP_W > 1) ? $clog2(EXP_W) : 1;

  typedef enum logic [3:0] {
    S_IDLE, S_PRE_G0, S_PRE_G1, S_PRE_G01, S_PRE_A, S_SQR, S_MUL, S_POST
  } state_e;

  state_e           state;
  logic             waiting;      // MontP issued, waiting for its done
  logic [IW-1:0]    bit_i;        // current exponent bit
  logic [W-1:0]     g0_r, g1_r, n_r, e2k_r;
  logic [EXP_W-1:0] e0_r, e1_r;

  // Multiplier and parameter-memory connections
  logic         mm_start, mm_done, mm_busy;
  logic [W-1:0] mm_x, mm_y, mm_a;
  logic [1:0]   rx_addr, ry_addr;
  logic [W-1:0] rx_data, ry_data;
  logic         ram_we;
  logic [1:0]   ram_waddr;
  logic [1:0]   pair;             // {e0[i], e1[i]}

  assign pair = {e0_r[bit_i], e1_r[bit_i]};

  // Operand selection per state
  always_comb begin
    rx_addr   = SLOT_A;
    ry_addr   = SLOT_A;
    mm_x      = rx_data;
    mm_y      = ry_data;
    ram_waddr = SLOT_A;
    unique case (state)
      S_PRE_G0:  begin mm_x = g0_r;  mm_y = e2k_r; ram_waddr = SLOT_G0; end
      S_PRE_G1:  begin mm_x = g1_r;  mm_y = e2k_r; ram_waddr = SLOT_G1; end
      S_PRE_G01: begin rx_addr = SLOT_G0; ry_addr = SLOT_G1; ram_waddr = SLOT_G01; end
      S_PRE_A:   begin mm_x = e2k_r; mm_y = W'(1); end
      S_SQR:     ;
      S_MUL: begin
        unique case (pair)
          2'b10:   ry_addr = SLOT_G0;
          2'b01:   ry_addr = SLOT_G1;
          default: ry_addr = SLOT_G01;
        endcase
      end
      S_POST:    mm_y = W'(1);
      default:   ;
    endcase
  end

  assign mm_start = (state != S_IDLE) && !waiting;
  assign ram_we   = waiting && mm_done && (state != S_POST);

  mont_mul #(.W(W)) u_mm (
    .clk, .rst_n,
    .start(mm_start), .x(mm_x), .y(mm_y), .n(n_r),
    .a(mm_a), .done(mm_done), .busy(mm_busy)
  );

  mse_param_ram #(.W(W)) u_ram (
    .clk, .rst_n,
    .we(ram_we), .waddr(ram_waddr), .wdata(mm_a),
    .raddr_x(rx_addr), .raddr_y(ry_addr),
    .rdata_x(rx_data), .rdata_y(ry_data)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      waiting <= 1'b0;
      bit_i   <= '0;
      g0_r    <= '0;
      g1_r    <= '0;
      n_r     <= '0;
      e2k_r   <= '0;
      e0_r    <= '0;
      e1_r    <= '0;
      a       <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      if (state == S_IDLE) begin
        if (start) begin
          g0_r    <= g0;
          g1_r    <= g1;
          e0_r    <= e0;
          e1_r    <= e1;
          n_r     <= n;
          e2k_r   <= e_2k;
          bit_i   <= IW'(EXP_W - 1);
          waiting <= 1'b0;
          state   <= S_PRE_G0;
        end
      end else if (!waiting) begin
        waiting <= 1'b1;                 // mm_start is high this cycle
      end else if (mm_done) begin
        waiting <= 1'b0;
        unique case (state)
          S_PRE_G0:  state <= S_PRE_G1;
          S_PRE_G1:  state <= S_PRE_G01;
          S_PRE_G01: state <= S_PRE_A;
          S_PRE_A:   state <= S_SQR;
          S_SQR: begin
            if (pair != 2'b00)      state <= S_MUL;
            else if (bit_i == '0)   state <= S_POST;
            else begin
              bit_i <= bit_i - 1'b1;
              state <= S_SQR;
            end
          end
          S_MUL: begin
            if (bit_i == '0) state <= S_POST;
            else begin
              bit_i <= bit_i - 1'b1;
              state <= S_SQR;
            end
          end
          S_POST: begin
            a     <= mm_a;
            done  <= 1'b1;
            state <= S_IDLE;
          end
          default: state <= S_IDLE;
        endcase
      end
    end
  end

  assign busy = (state != S_IDLE);

  // The multiplier must be idle whenever the controller issues a product.
  a_issue_idle: assert property (@(posedge clk) disable iff (!rst_n)
                                 mm_start |-> !mm_busy);

endmodule
