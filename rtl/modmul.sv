// modmul: 256-bit modular multiplier, y = a * b mod m, for moduli close to 2^W.
//
// Both secp256k1 moduli have the form m = 2^W - c with a small c (c < 2^CW):
// c = 2^32 + 977 for the field prime p, and a 129-bit c for the group order
// n. Since 2^W = c (mod m), the high half H of a value H*2^W + L can be
// folded down as H*c + L without changing it mod m. The unit computes
//   stage 1: P  = a * b                          (2W bits)
//   stage 2: F1 = P[2W-1:W]  * c + P[W-1:0]      (< 2^(W+CW+1))
//   stage 3: F2 = F1[..:W]   * c + F1[W-1:0]     (< 2^(2CW+2))
//   stage 4: F3 = F2[..:W]   * c + F2[W-1:0]     (< 2^W + 2^(CW+6))
//            y  = F3 >= m ? F3 - m : F3
// One conditional subtraction suffices because F3 < 2m. c is derived from m
// (two's complement), so the same unit serves p and n; m must lie above
// 2^W - 2^CW, which an assertion checks at start. Operands may be any W-bit
// values.
//
// Interface: `start` (while not busy) latches a, b and m; `done` pulses for
// one cycle with y valid three cycles after start; y holds until the next result.
// One product is in flight at a time.
//
// The signer and pre-computer arithmetic is not described beyond the curve;
// the reduction method and the one-stage-per-cycle schedule are this
// design's own. Each stage holds a wide product (W x W, W x CW) in one
// register stage; on an FPGA these map onto DSP cascades and would be
// pipelined further to reach 230 MHz.
module modmul #(
  parameter int unsigned W  = 256,
  parameter int unsigned CW = 130     // width bound of c = 2^W - m
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic [W-1:0] m,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] y
);
  localparam int unsigned F1W = W + CW + 1;
  localparam int unsigned F2W = 2 * CW + 2;
  localparam int unsigned F3W = W + 1;

  logic [W-1:0]   m_q;
  logic [CW-1:0]  c_q;
  logic [2*W-1:0] p_q;
  logic [F1W-1:0] f1_q;
  logic [F2W-1:0] f2_q;
  logic [2:0]     stage_q;    // one-hot: p_q, f1_q or f2_q holds the product in flight
  logic [W-1:0]   c_full;
  logic [F1W-1:0] f1_n;
  logic [F2W-1:0] f2_n;
  logic [F3W-1:0] f3_n;

  assign c_full = ~m + 1'b1;   // 2^W - m
  assign busy   = |stage_q;

  always_comb begin
    f1_n = F1W'(p_q[2*W-1:W]) * F1W'(c_q) + F1W'(p_q[W-1:0]);
    f2_n = F2W'(F2W'(f1_q[F1W-1:W]) * F2W'(c_q)) + F2W'(f1_q[W-1:0]);
    f3_n = F3W'(F3W'(f2_q[F2W-1:W]) * F3W'(c_q)) + F3W'(f2_q[W-1:0]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_q <= '0; c_q <= '0; p_q <= '0; f1_q <= '0; f2_q <= '0;
      stage_q <= '0; done <= 1'b0; y <= '0;
    end else begin
      done    <= 1'b0;
      stage_q <= {stage_q[1:0], 1'b0};
      if (start && !busy) begin
        m_q        <= m;
        c_q        <= c_full[CW-1:0];
        p_q        <= (2*W)'(a) * (2*W)'(b);
        stage_q[0] <= 1'b1;
      end
      if (stage_q[0]) f1_q <= f1_n;
      if (stage_q[1]) f2_q <= f2_n;
      if (stage_q[2]) begin
        y    <= (f3_n >= F3W'(m_q)) ? W'(f3_n - F3W'(m_q)) : f3_n[W-1:0];
        done <= 1'b1;
      end
    end
  end

  a_modulus: assert property (@(posedge clk) disable iff (!rst_n)
    start && !busy |-> (c_full >> CW) == '0);
endmodule
