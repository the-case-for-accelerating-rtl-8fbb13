// ecdsa_precompute: secp256k1 nonce pre-computer with a stock FIFO.
//
// Produces, ahead of any message, the message-independent half of an ECDSA
// signature: a nonce k in [1, n-1], r = (kG).x mod n and k^-1 mod n, and
// keeps up to STOCK_DEPTH such pairs in a FIFO whose fill level ("precomputed
// stock level") steers the signing ratio controller.
//
// How it works: a small micro-sequencer drives one modular multiplier and a
// modular adder/subtracter over a 16-entry register file of 256-bit values.
//  1. k is drawn from a xoshiro256** generator (4 x 64 bits, redrawn if
//     k = 0 or k >= n).
//  2. kG by left-to-right double-and-add over the bits of k, in Jacobian
//     coordinates (a = 0 doubling "dbl-2009-l", 7 products; mixed addition
//     with the affine G "madd-2007-bl", 11 products).
//  3. Z^-1 = Z^(p-2) mod p by square-and-multiply, x = X * Z^-2 mod p,
//     r = x mod n (one conditional subtraction, since p < 2n).
//  4. k^-1 = k^(n-2) mod n by square-and-multiply.
//  5. (r, k^-1) is pushed into the FIFO; r = 0 causes a redraw.
// A pair takes about 35,000 cycles (about 4,100 products of 4 cycles each,
// plus one to three control cycles per micro-operation), 6.6K pairs/s at
// 230 MHz. The paper's sustained rate (81.78K pairs/s, ~2800 cycles) needs
// more multipliers working in parallel than this single one; that is a
// known departure.
//
// The generator is a placeholder for a cryptographically secure random source
// (the paper only says ECDSA needs random numbers); it is seeded through
// seed/seed_load. The exceptional additions Q = +-G, reachable only for two
// specific nonce prefixes, are not handled.
//
// Interface: pre valid/ready (FIFO head), stock_level (FIFO count).
module ecdsa_precompute
  import aom_pkg::*;
#(
  parameter int unsigned STOCK_DEPTH = 16,
  parameter int unsigned STOCK_W     = $clog2(STOCK_DEPTH + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               seed_load,
  input  logic [255:0]       seed,
  output logic               pre_valid,
  input  logic               pre_ready,
  output precomp_t           pre,
  output logic [STOCK_W-1:0] stock_level,
  output logic [31:0]        made_cnt      // pairs produced since reset
);
  // ---------------- micro-operations ----------------
  typedef enum logic [1:0] {OP_MUL, OP_ADD, OP_SUB} opk_t;
  typedef struct packed {
    opk_t       kind;
    logic       modn;   // 1: modulo n, 0: modulo p
    logic [3:0] dst, a, b;
  } uop_t;

  localparam logic [3:0] RX = 0, RY = 1, RZ = 2, T0 = 3, T1 = 4, T2 = 5, T3 = 6, T4 = 7,
                         T5 = 8, T6 = 9, T7 = 10, T8 = 11, RGX = 12, RGY = 13, RK = 14, RACC = 15;
  localparam int unsigned DBL_LEN = 21;
  localparam int unsigned ADD_LEN = 25;

  function automatic uop_t u(opk_t k, logic [3:0] d, logic [3:0] a, logic [3:0] b);
    return '{kind: k, modn: 1'b0, dst: d, a: a, b: b};
  endfunction

  // point doubling, (X,Y,Z) <- 2(X,Y,Z)
  function automatic uop_t dbl_op(input logic [4:0] pc);
    case (pc)
      5'd0:  return u(OP_MUL, T0, RX, RX);    // A = X^2
      5'd1:  return u(OP_MUL, T1, RY, RY);    // B = Y^2
      5'd2:  return u(OP_MUL, T2, T1, T1);    // C = B^2
      5'd3:  return u(OP_ADD, T3, RX, T1);    // X + B
      5'd4:  return u(OP_MUL, T3, T3, T3);    // (X+B)^2
      5'd5:  return u(OP_SUB, T3, T3, T0);
      5'd6:  return u(OP_SUB, T3, T3, T2);
      5'd7:  return u(OP_ADD, T3, T3, T3);    // D = 2((X+B)^2 - A - C)
      5'd8:  return u(OP_ADD, T4, T0, T0);
      5'd9:  return u(OP_ADD, T4, T4, T0);    // E = 3A
      5'd10: return u(OP_MUL, T5, T4, T4);    // F = E^2
      5'd11: return u(OP_MUL, RZ, RY, RZ);    // Y*Z
      5'd12: return u(OP_ADD, RZ, RZ, RZ);    // Z3 = 2YZ
      5'd13: return u(OP_SUB, RX, T5, T3);
      5'd14: return u(OP_SUB, RX, RX, T3);    // X3 = F - 2D
      5'd15: return u(OP_SUB, T6, T3, RX);    // D - X3
      5'd16: return u(OP_MUL, RY, T4, T6);    // E(D - X3)
      5'd17: return u(OP_ADD, T2, T2, T2);
      5'd18: return u(OP_ADD, T2, T2, T2);
      5'd19: return u(OP_ADD, T2, T2, T2);    // 8C
      default: return u(OP_SUB, RY, RY, T2);  // Y3 = E(D - X3) - 8C
    endcase
  endfunction

  // mixed addition, (X,Y,Z) <- (X,Y,Z) + (GX,GY,1)
  function automatic uop_t add_op(input logic [4:0] pc);
    case (pc)
      5'd0:  return u(OP_MUL, T0, RZ, RZ);    // Z1Z1
      5'd1:  return u(OP_MUL, T1, RGX, T0);   // U2
      5'd2:  return u(OP_MUL, T2, RZ, T0);
      5'd3:  return u(OP_MUL, T2, RGY, T2);   // S2
      5'd4:  return u(OP_SUB, T3, T1, RX);    // H
      5'd5:  return u(OP_MUL, T4, T3, T3);    // HH
      5'd6:  return u(OP_ADD, T5, T4, T4);
      5'd7:  return u(OP_ADD, T5, T5, T5);    // I = 4HH
      5'd8:  return u(OP_MUL, T6, T3, T5);    // J = H*I
      5'd9:  return u(OP_SUB, T7, T2, RY);
      5'd10: return u(OP_ADD, T7, T7, T7);    // r = 2(S2 - Y1)
      5'd11: return u(OP_MUL, T8, RX, T5);    // V = X1*I
      5'd12: return u(OP_ADD, RZ, RZ, T3);
      5'd13: return u(OP_MUL, RZ, RZ, RZ);
      5'd14: return u(OP_SUB, RZ, RZ, T0);
      5'd15: return u(OP_SUB, RZ, RZ, T4);    // Z3 = (Z1+H)^2 - Z1Z1 - HH
      5'd16: return u(OP_MUL, RX, T7, T7);
      5'd17: return u(OP_SUB, RX, RX, T6);
      5'd18: return u(OP_SUB, RX, RX, T8);
      5'd19: return u(OP_SUB, RX, RX, T8);    // X3 = r^2 - J - 2V
      5'd20: return u(OP_SUB, T8, T8, RX);    // V - X3
      5'd21: return u(OP_MUL, T8, T7, T8);    // r(V - X3)
      5'd22: return u(OP_MUL, T6, RY, T6);    // Y1*J
      5'd23: return u(OP_ADD, T6, T6, T6);
      default: return u(OP_SUB, RY, T8, T6);  // Y3 = r(V - X3) - 2 Y1 J
    endcase
  endfunction

  // ---------------- random nonce source ----------------
  logic [63:0] s_q [4];
  logic [63:0] rnd;
  function automatic logic [63:0] rotl64(input logic [63:0] x, input int unsigned n);
    return (x << n) | (x >> (64 - n));
  endfunction
  assign rnd = rotl64(s_q[1] * 64'd5, 7) * 64'd9;

  // ---------------- state ----------------
  typedef enum logic [3:0] {S_IDLE, S_GENK, S_CHKK, S_SCAN, S_RUN, S_MULW, S_NEXT,
                            S_BIT, S_RCALC, S_PUSH} state_t;
  typedef enum logic [1:0] {PH_DBL, PH_ADD, PH_EXP, PH_AFF} phase_t;

  state_t       st_q;
  phase_t       ph_q;
  logic [255:0] rf [16];
  logic [255:0] k_q;
  logic [7:0]   bit_q, ebit_q;
  logic [1:0]   gcnt_q;
  logic         inf_q;       // accumulator point is the point at infinity
  logic         exp_n_q;     // current exponentiation is modulo n (k^-1), else p (Z^-1)
  logic         exp_mul_q;   // last exponentiation op was the multiply
  logic [4:0]   pc_q;
  uop_t         op_q;

  logic         mm_start, mm_busy, mm_done;
  logic [255:0] mm_y, opa, opb, opm;
  assign opa = rf[op_q.a];
  assign opb = rf[op_q.b];
  assign opm = op_q.modn ? SECP_N : SECP_P;

  modmul #(.W(256)) u_mm (
    .clk, .rst_n, .start(mm_start), .a(opa), .b(opb), .m(opm),
    .busy(mm_busy), .done(mm_done), .y(mm_y)
  );
  assign mm_start = (st_q == S_RUN) && (op_q.kind == OP_MUL);

  logic [255:0] exp_e;
  assign exp_e = exp_n_q ? SECP_N - 256'd2 : SECP_P - 256'd2;

  // ---------------- stock FIFO ----------------
  localparam int unsigned AW = (STOCK_DEPTH > 1) ? $clog2(STOCK_DEPTH) : 1;
  precomp_t          fifo [STOCK_DEPTH];
  logic [AW-1:0]     wp_q, rp_q;
  logic [STOCK_W-1:0] cnt_q;
  logic              push, pop;

  assign pre_valid   = (cnt_q != '0);
  assign pre         = fifo[rp_q];
  assign stock_level = cnt_q;
  assign pop         = pre_valid && pre_ready;
  assign push        = (st_q == S_PUSH);

  function automatic logic [AW-1:0] wrap_inc(input logic [AW-1:0] p);
    return (32'(p) == STOCK_DEPTH - 1) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp_q <= '0; rp_q <= '0; cnt_q <= '0;
      for (int i = 0; i < STOCK_DEPTH; i++) fifo[i] <= '0;
    end else begin
      if (push) begin fifo[wp_q] <= '{r: rf[T1], kinv: rf[RACC]}; wp_q <= wrap_inc(wp_q); end
      if (pop) rp_q <= wrap_inc(rp_q);
      if (push && !pop) cnt_q <= cnt_q + 1'b1;
      else if (pop && !push) cnt_q <= cnt_q - 1'b1;
    end
  end

  // ---------------- micro-sequencer ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= S_IDLE; ph_q <= PH_DBL; k_q <= '0; bit_q <= '0; ebit_q <= '0;
      gcnt_q <= '0; inf_q <= 1'b1; exp_n_q <= 1'b0; exp_mul_q <= 1'b0; pc_q <= '0;
      op_q <= '0; made_cnt <= '0;
      for (int i = 0; i < 16; i++) rf[i] <= '0;
      s_q[0] <= 64'h9E3779B97F4A7C15; s_q[1] <= 64'hBF58476D1CE4E5B9;
      s_q[2] <= 64'h94D049BB133111EB; s_q[3] <= 64'h2545F4914F6CDD1D;
    end else begin
      if (seed_load) begin
        if (seed == '0) begin
          s_q[0] <= 64'h9E3779B97F4A7C15; s_q[1] <= 64'hBF58476D1CE4E5B9;
          s_q[2] <= 64'h94D049BB133111EB; s_q[3] <= 64'h2545F4914F6CDD1D;
        end else begin
          s_q[0] <= seed[255:192]; s_q[1] <= seed[191:128];
          s_q[2] <= seed[127:64];  s_q[3] <= seed[63:0];
        end
      end
      case (st_q)
        S_IDLE: if (32'(cnt_q) < STOCK_DEPTH && !seed_load) begin
          gcnt_q <= '0;
          st_q   <= S_GENK;
        end
        S_GENK: if (!seed_load) begin
          k_q <= {k_q[191:0], rnd};
          // xoshiro256 state update
          s_q[3] <= rotl64(s_q[3] ^ s_q[1], 45);
          s_q[1] <= s_q[1] ^ s_q[2] ^ s_q[0];
          s_q[0] <= s_q[0] ^ s_q[3] ^ s_q[1];
          s_q[2] <= s_q[2] ^ s_q[0] ^ (s_q[1] << 17);
          gcnt_q <= gcnt_q + 1'b1;
          if (gcnt_q == 2'd3) st_q <= S_CHKK;
        end
        S_CHKK: begin
          if (k_q == '0 || k_q >= SECP_N) begin
            gcnt_q <= '0;
            st_q <= S_GENK;
          end else begin
            rf[RK]  <= k_q;
            rf[RGX] <= SECP_GX;
            rf[RGY] <= SECP_GY;
            inf_q   <= 1'b1;
            bit_q   <= 8'd255;
            st_q    <= S_SCAN;
          end
        end
        S_SCAN: begin
          if (inf_q) begin
            if (k_q[bit_q]) begin
              rf[RX] <= SECP_GX; rf[RY] <= SECP_GY; rf[RZ] <= 256'd1;
              inf_q <= 1'b0;
            end
            st_q <= S_BIT;
          end else begin
            ph_q <= PH_DBL; pc_q <= '0; op_q <= dbl_op(5'd0);
            st_q <= S_RUN;
          end
        end
        S_RUN: begin
          case (op_q.kind)
            OP_ADD:  begin rf[op_q.dst] <= mod_add(opa, opb, opm); st_q <= S_NEXT; end
            OP_SUB:  begin rf[op_q.dst] <= mod_sub(opa, opb, opm); st_q <= S_NEXT; end
            default: st_q <= S_MULW;
          endcase
        end
        S_MULW: if (mm_done) begin rf[op_q.dst] <= mm_y; st_q <= S_NEXT; end
        S_NEXT: begin
          st_q <= S_RUN;
          case (ph_q)
            PH_DBL:
              if (32'(pc_q) < DBL_LEN - 1) begin
                pc_q <= pc_q + 1'b1; op_q <= dbl_op(pc_q + 1'b1);
              end else if (k_q[bit_q]) begin
                ph_q <= PH_ADD; pc_q <= '0; op_q <= add_op(5'd0);
              end else st_q <= S_BIT;
            PH_ADD:
              if (32'(pc_q) < ADD_LEN - 1) begin
                pc_q <= pc_q + 1'b1; op_q <= add_op(pc_q + 1'b1);
              end else st_q <= S_BIT;
            PH_EXP: begin
              if (!exp_mul_q && exp_e[ebit_q]) begin
                // square done and the exponent bit is set: multiply by the base
                exp_mul_q <= 1'b1;
                op_q <= '{kind: OP_MUL, modn: exp_n_q, dst: RACC, a: RACC,
                          b: exp_n_q ? RK : RZ};
              end else if (ebit_q != 8'd0) begin
                exp_mul_q <= 1'b0;
                ebit_q <= ebit_q - 1'b1;
                op_q <= '{kind: OP_MUL, modn: exp_n_q, dst: RACC, a: RACC, b: RACC};
              end else if (!exp_n_q) begin
                // Z^-1 is in ACC: x = X * (Z^-1)^2
                ph_q <= PH_AFF; pc_q <= '0;
                op_q <= '{kind: OP_MUL, modn: 1'b0, dst: T0, a: RACC, b: RACC};
              end else st_q <= S_PUSH;
            end
            default: // PH_AFF
              if (pc_q == '0) begin
                pc_q <= 5'd1;
                op_q <= '{kind: OP_MUL, modn: 1'b0, dst: T1, a: RX, b: T0};
              end else st_q <= S_RCALC;
          endcase
        end
        S_BIT: begin
          if (bit_q != 8'd0) begin
            bit_q <= bit_q - 1'b1;
            st_q  <= S_SCAN;
          end else begin
            // start Z^(p-2) mod p
            ph_q <= PH_EXP; exp_n_q <= 1'b0; exp_mul_q <= 1'b0;
            ebit_q <= 8'd255; rf[RACC] <= 256'd1;
            op_q <= '{kind: OP_MUL, modn: 1'b0, dst: RACC, a: RACC, b: RACC};
            st_q <= S_RUN;
          end
        end
        S_RCALC: begin
          // r = x mod n; x < p < 2n
          if (rf[T1] == '0) begin
            gcnt_q <= '0; st_q <= S_GENK;      // degenerate point: draw a new k
          end else begin
            if (rf[T1] >= SECP_N) rf[T1] <= rf[T1] - SECP_N;
            // start k^(n-2) mod n
            ph_q <= PH_EXP; exp_n_q <= 1'b1; exp_mul_q <= 1'b0;
            ebit_q <= 8'd255; rf[RACC] <= 256'd1;
            op_q <= '{kind: OP_MUL, modn: 1'b1, dst: RACC, a: RACC, b: RACC};
            st_q <= S_RUN;
          end
        end
        S_PUSH: begin
          made_cnt <= made_cnt + 1'b1;
          st_q <= S_IDLE;
        end
        default: st_q <= S_IDLE;
      endcase
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    push |-> (32'(cnt_q) < STOCK_DEPTH) || pop);
endmodule
