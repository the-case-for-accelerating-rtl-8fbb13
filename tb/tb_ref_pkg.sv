// tb_ref_pkg: reference models for the testbenches, written independently of
// the RTL: SHA-256 as a plain function, modular arithmetic with the
// language's wide '*' and '%', the expected AOM chain hash, and the first
// nonce pairs the pre-computer must produce for TB_SEED (computed offline
// with an affine-coordinate secp256k1 model: r = (kG).x mod n, k^-1 mod n).
package tb_ref_pkg;
  import aom_pkg::*;

  localparam logic [255:0] TB_SEED =
    256'h0123456789ABCDEF_FEDCBA9876543210_0F1E2D3C4B5A6978_8796A5B4C3D2E1F0;
  localparam int unsigned NUM_PAIRS = 8;

  function automatic precomp_t ref_pair(input int unsigned i);
    case (i)
    0: return '{r: 256'h13e8db0975f890f01ff3905689bde5cbae7591c46d6a4c006dc1e4f1842e0fdc,
              kinv: 256'h3b090bec42a08909f8cdc0cb4de54618b87dd733f81e4de1c2353201126bedd3};
    1: return '{r: 256'h31a6bf3fbbb385e136d31ac00be8fd3f8090df44bf3ac5cbacb9bf22a14ab06d,
              kinv: 256'h2a80cc63b1648b62e0cda28b740aaf41078c80decdaa5076f5424190ee5d7396};
    2: return '{r: 256'h42203e1c4b3145554caf184c121bf1153cbd71afb42079cc9cfe890bbafaf41a,
              kinv: 256'h2d1b5dfe4daea4adab33a2f2f83d275b0ed4d551e0ed4b3b05532a17f3c81481};
    3: return '{r: 256'hc16e81a1694940d3d43629ca455b5c5a22391c4933acae65fc1ddc679697cdc4,
              kinv: 256'h1ec5787546710d31fd7993dea639d9a334f67bad95661bb88a07cf1f4fe44e17};
    4: return '{r: 256'h598954d71f55668d0b8682560a65ee0b93eb7137ae72b94d0d80f27c803f5f3c,
              kinv: 256'h286c6250d854b6df46e89f9577a728428d3400782f1558cfd911e37cec59f89b};
    5: return '{r: 256'he954116fc344f84dca09d641462d0514a7168384f790efabc8cf1afc8e927404,
              kinv: 256'h4ba902dd602a766a0556aaef6e50e812e2d1ec33830a1dbbdc788ec9e3651168};
    6: return '{r: 256'h18bc81696fd9f77f79a7d943b0e052d8a7dc521199074a451154651758179d3b,
              kinv: 256'h7a116e6009facc1ba10009ce5fb805f7ff04fee8e8f329b4c714751f16cf3df9};
    7: return '{r: 256'h23d389038d879e162c74374bb3ef19209c9578d5a0973f6df1587ea8eb5764f4,
              kinv: 256'h3e8c2885cf8c590ca2b8511e20282b7b6608d995cec8d09cc7c428197246ed7e};
      default: return '0;
    endcase
  endfunction

  function automatic logic [255:0] ref_mulmod(input logic [255:0] a, input logic [255:0] b,
                                              input logic [255:0] m);
    logic [511:0] p;
    p = {256'd0, a} * {256'd0, b};
    return 256'(p % {256'd0, m});
  endfunction

  // ECDSA s for hash z, pair (r, k^-1) and key d
  function automatic logic [255:0] ref_sign(input logic [255:0] z, input precomp_t pp,
                                            input logic [255:0] d);
    logic [256:0] t;
    logic [255:0] zz;
    zz = 256'({1'b0, z} % {1'b0, SECP_N});
    t = {1'b0, ref_mulmod(pp.r, d, SECP_N)} + {1'b0, zz};
    if (t >= {1'b0, SECP_N}) t = t - {1'b0, SECP_N};
    return ref_mulmod(pp.kinv, t[255:0], SECP_N);
  endfunction

  function automatic logic [31:0] rr(input logic [31:0] x, input int n);
    return (x >> n) | (x << (32 - n));
  endfunction

  function automatic logic [255:0] sha_compress(input logic [255:0] hin, input logic [511:0] blk);
    logic [31:0] k [64];
    logic [31:0] w [64];
    logic [31:0] hv [8];
    logic [31:0] v [8];
    logic [31:0] s0, s1, t1, t2;
    k = '{32'h428a2f98, 32'h71374491, 32'hb5c0fbcf, 32'he9b5dba5, 32'h3956c25b, 32'h59f111f1, 32'h923f82a4, 32'hab1c5ed5,
          32'hd807aa98, 32'h12835b01, 32'h243185be, 32'h550c7dc3, 32'h72be5d74, 32'h80deb1fe, 32'h9bdc06a7, 32'hc19bf174,
          32'he49b69c1, 32'hefbe4786, 32'h0fc19dc6, 32'h240ca1cc, 32'h2de92c6f, 32'h4a7484aa, 32'h5cb0a9dc, 32'h76f988da,
          32'h983e5152, 32'ha831c66d, 32'hb00327c8, 32'hbf597fc7, 32'hc6e00bf3, 32'hd5a79147, 32'h06ca6351, 32'h14292967,
          32'h27b70a85, 32'h2e1b2138, 32'h4d2c6dfc, 32'h53380d13, 32'h650a7354, 32'h766a0abb, 32'h81c2c92e, 32'h92722c85,
          32'ha2bfe8a1, 32'ha81a664b, 32'hc24b8b70, 32'hc76c51a3, 32'hd192e819, 32'hd6990624, 32'hf40e3585, 32'h106aa070,
          32'h19a4c116, 32'h1e376c08, 32'h2748774c, 32'h34b0bcb5, 32'h391c0cb3, 32'h4ed8aa4a, 32'h5b9cca4f, 32'h682e6ff3,
          32'h748f82ee, 32'h78a5636f, 32'h84c87814, 32'h8cc70208, 32'h90befffa, 32'ha4506ceb, 32'hbef9a3f7, 32'hc67178f2};
    for (int i = 0; i < 8; i++) hv[i] = hin[255-32*i -: 32];
    for (int i = 0; i < 16; i++) w[i] = blk[511-32*i -: 32];
    for (int i = 16; i < 64; i++) begin
      s0 = rr(w[i-15], 7) ^ rr(w[i-15], 18) ^ (w[i-15] >> 3);
      s1 = rr(w[i-2], 17) ^ rr(w[i-2], 19) ^ (w[i-2] >> 10);
      w[i] = w[i-16] + s0 + w[i-7] + s1;
    end
    v = hv;
    for (int i = 0; i < 64; i++) begin
      t1 = v[7] + (rr(v[4], 6) ^ rr(v[4], 11) ^ rr(v[4], 25)) + ((v[4] & v[5]) ^ (~v[4] & v[6])) + k[i] + w[i];
      t2 = (rr(v[0], 2) ^ rr(v[0], 13) ^ rr(v[0], 22)) + ((v[0] & v[1]) ^ (v[0] & v[2]) ^ (v[1] & v[2]));
      v[7] = v[6]; v[6] = v[5]; v[5] = v[4]; v[4] = v[3] + t1;
      v[3] = v[2]; v[2] = v[1]; v[1] = v[0]; v[0] = t1 + t2;
    end
    return {hv[0]+v[0], hv[1]+v[1], hv[2]+v[2], hv[3]+v[3], hv[4]+v[4], hv[5]+v[5], hv[6]+v[6], hv[7]+v[7]};
  endfunction

  localparam logic [255:0] SHA_IV = {32'h6a09e667, 32'hbb67ae85, 32'h3c6ef372, 32'ha54ff53a,
                                     32'h510e527f, 32'h9b05688c, 32'h1f83d9ab, 32'h5be0cd19};

  // SHA-256 of the 68-byte message digest || seq || prev
  function automatic logic [255:0] ref_chain_hash(input logic [255:0] digest, input logic [31:0] seq,
                                                  input logic [255:0] prev);
    logic [543:0] msg;
    logic [1023:0] padded;
    msg = {digest, seq, prev};
    padded = {msg, 8'h80, 408'd0, 64'd544};
    return sha_compress(sha_compress(SHA_IV, padded[1023:512]), padded[511:0]);
  endfunction

  // deterministic test digest for packet i of group g
  function automatic logic [255:0] tb_digest(input int unsigned g, input int unsigned i);
    logic [255:0] d;
    for (int j = 0; j < 8; j++) d[32*j +: 32] = 32'h9E3779B9 * (i + 1) + 32'h1234567 * (g + 3) + 32'(j) * 32'h01010101;
    return d;
  endfunction

  // build beat 0 of a test packet
  function automatic logic [DATA_W-1:0] tb_hdr(input int unsigned g, input logic [31:0] seq,
                                               input logic [31:0] epoch, input int unsigned salt);
    logic [DATA_W-1:0] d;
    for (int j = 0; j < 16; j++) d[32*j +: 32] = 32'hA5A5_0000 + 32'(salt * 16 + j);
    d = put_field(d, OFF_GROUP, 4, 256'(g));
    d = put_field(d, OFF_SEQ, 4, 256'(seq));
    d = put_field(d, OFF_EPOCH, 4, 256'(epoch));
    d = put_field(d, OFF_FLAGS, 1, 256'd0);
    return d;
  endfunction
endpackage
