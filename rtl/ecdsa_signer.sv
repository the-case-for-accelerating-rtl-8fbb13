// ecdsa_signer: secp256k1 ECDSA signing with a precomputed nonce.
//
// ECDSA splits into a message-independent part, r = (kG).x mod n and k^-1 mod
// n, which the pre-computer produces ahead of time, and a short message-
// dependent part done here once the 256-bit hash z arrives:
//     s = k^-1 * (z + r * d) mod n
// with d the switch's private key. The signer takes a hash only when a
// precomputed pair is on offer and consumes one pair per signature. It uses
// one modular multiplier twice (r*d, then k^-1 * (...)), so a signature takes
// about 11 cycles from hash acceptance to sig_valid (two 4-cycle products
// plus control), well inside the ~171 cycles (745 ns at 230 MHz) the paper
// reports. One signature is in flight at a time, so the burst rate is one
// signature per ~11 cycles (about 21M/s); the paper's 57M signatures/s would
// need several signatures in flight, which is not built.
//
// Interface: hash valid/ready, precomputed pair valid/ready, signature
// valid/ready; priv_key is static configuration (installed by the control
// plane). s = 0, an event of probability ~2^-256, is not retried.
module ecdsa_signer
  import aom_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic [255:0]      priv_key,
  input  logic              hash_valid,
  output logic              hash_ready,
  input  logic [HASH_W-1:0] hash,
  input  logic              pre_valid,
  output logic              pre_ready,
  input  precomp_t          pre,
  output logic              sig_valid,
  input  logic              sig_ready,
  output sig_t              sig
);
  typedef enum logic [2:0] {S_IDLE, S_M1, S_W1, S_M2, S_W2, S_OUT} state_t;
  state_t st_q;

  logic [255:0] z_q, r_q, kinv_q, t_q;
  logic         mm_start, mm_busy, mm_done;
  logic [255:0] mm_a, mm_b, mm_y;

  modmul #(.W(256)) u_mm (
    .clk, .rst_n, .start(mm_start), .a(mm_a), .b(mm_b), .m(SECP_N),
    .busy(mm_busy), .done(mm_done), .y(mm_y)
  );

  assign hash_ready = (st_q == S_IDLE) && pre_valid;
  assign pre_ready  = (st_q == S_IDLE) && hash_valid;
  assign sig_valid  = (st_q == S_OUT);

  always_comb begin
    mm_start = (st_q == S_M1) || (st_q == S_M2);
    mm_a     = (st_q == S_M1) ? r_q : kinv_q;
    mm_b     = (st_q == S_M1) ? priv_key : t_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= S_IDLE; z_q <= '0; r_q <= '0; kinv_q <= '0; t_q <= '0; sig <= '0;
    end else begin
      case (st_q)
        S_IDLE: if (hash_valid && pre_valid) begin
          z_q    <= (hash >= SECP_N) ? hash - SECP_N : hash;
          r_q    <= pre.r;
          kinv_q <= pre.kinv;
          st_q   <= S_M1;
        end
        S_M1: st_q <= S_W1;
        S_W1: if (mm_done) begin t_q <= mod_add(mm_y, z_q, SECP_N); st_q <= S_M2; end
        S_M2: st_q <= S_W2;
        S_W2: if (mm_done) begin sig.r <= r_q; sig.s <= mm_y; st_q <= S_OUT; end
        S_OUT: if (sig_ready) st_q <= S_IDLE;
        default: st_q <= S_IDLE;
      endcase
    end
  end

  a_sig_stable: assert property (@(posedge clk) disable iff (!rst_n)
    sig_valid && !sig_ready |=> sig_valid && $stable(sig));
  // the private key must be reduced (1 <= d < n)
  a_key_range: assert property (@(posedge clk) disable iff (!rst_n)
    st_q == S_M1 |-> priv_key < SECP_N && priv_key != '0);
endmodule
