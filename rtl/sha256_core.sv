// sha256_core: SHA-256 compression function (FIPS 180-4), one round per clock.
//
// On `start` the core latches a 512-bit message block (big-endian: word 0 is
// block[511:480]) and the incoming chaining value h_in (H0 in h_in[255:224]).
// It runs the 64 rounds, one per cycle, with the message schedule kept in a
// 16-word sliding window, then adds the chaining value. `done` pulses one
// cycle with h_out valid 65 cycles after start; h_out holds until the next
// start. Padding and multi-block sequencing are the caller's job.
//
// The paper names a SHA-256 module; its insides here follow the standard.
module sha256_core (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [511:0] block,
  input  logic [255:0] h_in,
  output logic         busy,
  output logic         done,
  output logic [255:0] h_out
);
  localparam logic [31:0] K [64] = '{
    32'h428a2f98, 32'h71374491, 32'hb5c0fbcf, 32'he9b5dba5, 32'h3956c25b, 32'h59f111f1, 32'h923f82a4, 32'hab1c5ed5,
    32'hd807aa98, 32'h12835b01, 32'h243185be, 32'h550c7dc3, 32'h72be5d74, 32'h80deb1fe, 32'h9bdc06a7, 32'hc19bf174,
    32'he49b69c1, 32'hefbe4786, 32'h0fc19dc6, 32'h240ca1cc, 32'h2de92c6f, 32'h4a7484aa, 32'h5cb0a9dc, 32'h76f988da,
    32'h983e5152, 32'ha831c66d, 32'hb00327c8, 32'hbf597fc7, 32'hc6e00bf3, 32'hd5a79147, 32'h06ca6351, 32'h14292967,
    32'h27b70a85, 32'h2e1b2138, 32'h4d2c6dfc, 32'h53380d13, 32'h650a7354, 32'h766a0abb, 32'h81c2c92e, 32'h92722c85,
    32'ha2bfe8a1, 32'ha81a664b, 32'hc24b8b70, 32'hc76c51a3, 32'hd192e819, 32'hd6990624, 32'hf40e3585, 32'h106aa070,
    32'h19a4c116, 32'h1e376c08, 32'h2748774c, 32'h34b0bcb5, 32'h391c0cb3, 32'h4ed8aa4a, 32'h5b9cca4f, 32'h682e6ff3,
    32'h748f82ee, 32'h78a5636f, 32'h84c87814, 32'h8cc70208, 32'h90befffa, 32'ha4506ceb, 32'hbef9a3f7, 32'hc67178f2
  };

  logic [31:0] w_q [16];
  logic [31:0] a, b, c, d, e, f, g, h;
  logic [255:0] hin_q;
  logic [6:0]  rnd_q;

  function automatic logic [31:0] rotr(input logic [31:0] x, input int unsigned n);
    return (x >> n) | (x << (32 - n));
  endfunction

  logic [31:0] t1, t2, w_new;
  always_comb begin
    t1 = h + (rotr(e, 6) ^ rotr(e, 11) ^ rotr(e, 25)) + ((e & f) ^ (~e & g))
           + K[rnd_q[5:0]] + w_q[0];
    t2 = (rotr(a, 2) ^ rotr(a, 13) ^ rotr(a, 22)) + ((a & b) ^ (a & c) ^ (b & c));
    w_new = (rotr(w_q[14], 17) ^ rotr(w_q[14], 19) ^ (w_q[14] >> 10)) + w_q[9]
          + (rotr(w_q[1], 7) ^ rotr(w_q[1], 18) ^ (w_q[1] >> 3)) + w_q[0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 16; i++) w_q[i] <= '0;
      {a, b, c, d, e, f, g, h} <= '0;
      hin_q <= '0; rnd_q <= '0; busy <= 1'b0; done <= 1'b0; h_out <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        for (int i = 0; i < 16; i++) w_q[i] <= block[511 - 32*i -: 32];
        {a, b, c, d, e, f, g, h} <= h_in;
        hin_q <= h_in;
        rnd_q <= '0;
        busy  <= 1'b1;
      end else if (busy) begin
        if (rnd_q < 7'd64) begin
          h <= g; g <= f; f <= e; e <= d + t1;
          d <= c; c <= b; b <= a; a <= t1 + t2;
          for (int i = 0; i < 15; i++) w_q[i] <= w_q[i+1];
          w_q[15] <= w_new;
          rnd_q <= rnd_q + 1'b1;
        end else begin
          h_out <= {a + hin_q[255:224], b + hin_q[223:192], c + hin_q[191:160], d + hin_q[159:128],
                    e + hin_q[127:96],  f + hin_q[95:64],   g + hin_q[63:32],   h + hin_q[31:0]};
          done <= 1'b1;
          busy <= 1'b0;
        end
      end
    end
  end
endmodule
