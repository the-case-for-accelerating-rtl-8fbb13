// aom_pkg: types, constants and header-field helpers shared by the
// authenticated-ordered-multicast (AOM) signing accelerator.
//
// Packet stream: 512-bit beats (the width printed for the packet stream of
// the accelerator), byte i of a beat at data[8*i +: 8], multi-byte fields in
// network (big-endian) order. The AOM header layout below is this design's
// own choice; the paper only lists the fields (group ID, sequence number,
// epoch number, authenticator), the sender's message digest and, for the
// public-key variant, the hash of the preceding packet.
//
//   beat 0  bytes  0..41  Ethernet / IPv4 / UDP headers (not interpreted)
//           bytes 42..45  group ID          (filled by the sender)
//           bytes 46..49  sequence number   (filled by the sequencer)
//           bytes 50..53  epoch number      (filled by the sequencer)
//           byte  54      flags, bit 0 = packet carries a signature
//   beat 1  bytes  0..31  message digest    (filled by the sender)
//           bytes 32..63  chain hash of the preceding packet
//   beat 2  bytes  0..31  signature r,  bytes 32..63 signature s
//   beat 3.. payload
package aom_pkg;

  localparam int unsigned DATA_W = 512;   // packet stream width (printed in the figure)
  localparam int unsigned HASH_W = 256;   // hash stream width (printed in the figure)
  localparam int unsigned SEQ_W  = 32;
  localparam int unsigned EPOCH_W = 32;
  localparam int unsigned GROUP_W = 32;

  // byte offsets of the header fields
  localparam int unsigned OFF_GROUP = 42;
  localparam int unsigned OFF_SEQ   = 46;
  localparam int unsigned OFF_EPOCH = 50;
  localparam int unsigned OFF_FLAGS = 54;
  localparam int unsigned OFF_DIGEST = 0;   // beat 1
  localparam int unsigned OFF_PREV   = 32;  // beat 1
  localparam int unsigned OFF_SIG_R  = 0;   // beat 2
  localparam int unsigned OFF_SIG_S  = 32;  // beat 2

  localparam int unsigned BEAT_HDR = 0;
  localparam int unsigned BEAT_HASH = 1;
  localparam int unsigned BEAT_SIG = 2;

  // secp256k1 domain parameters (SEC 2)
  localparam logic [255:0] SECP_P  = 256'hFFFFFFFF_FFFFFFFF_FFFFFFFF_FFFFFFFF_FFFFFFFF_FFFFFFFF_FFFFFFFE_FFFFFC2F;
  localparam logic [255:0] SECP_N  = 256'hFFFFFFFF_FFFFFFFF_FFFFFFFF_FFFFFFFE_BAAEDCE6_AF48A03B_BFD25E8C_D0364141;
  localparam logic [255:0] SECP_GX = 256'h79BE667E_F9DCBBAC_55A06295_CE870B07_029BFCDB_2DCE28D9_59F2815B_16F81798;
  localparam logic [255:0] SECP_GY = 256'h483ADA77_26A3C465_5DA4FBFC_0E1108A8_FD17B448_A6855419_9C47D08F_FB10D4B8;

  // one beat of the packet stream (AXI4-Stream style; valid/ready travel beside it)
  typedef struct packed {
    logic [DATA_W-1:0]   data;
    logic [DATA_W/8-1:0] keep;
    logic                last;
  } beat_t;

  // request to the hash chain: the fields that are hashed
  typedef struct packed {
    logic [GROUP_W-1:0] group;
    logic [HASH_W-1:0]  digest;
    logic [SEQ_W-1:0]   seq;
    logic [EPOCH_W-1:0] epoch;
  } hash_req_t;

  // result of the hash chain
  typedef struct packed {
    logic [HASH_W-1:0] hash;   // chain hash of this packet
    logic [HASH_W-1:0] prev;   // chain hash of the preceding packet
    logic [SEQ_W-1:0]  seq;    // sequence number it belongs to
    logic [EPOCH_W-1:0] epoch; // epoch number it belongs to
  } hash_rsp_t;

  // one precomputed signing pair
  typedef struct packed {
    logic [255:0] r;      // (kG).x mod n
    logic [255:0] kinv;   // k^-1 mod n
  } precomp_t;

  typedef struct packed {
    logic [255:0] r;
    logic [255:0] s;
  } sig_t;

  // read an n-byte big-endian field that starts at byte `off` of a beat
  function automatic logic [255:0] get_field(input logic [DATA_W-1:0] d,
                                             input int unsigned off,
                                             input int unsigned nbytes);
    logic [255:0] f;
    f = '0;
    for (int unsigned i = 0; i < nbytes; i++)
      f[8*(nbytes-1-i) +: 8] = d[8*(off+i) +: 8];
    return f;
  endfunction

  // write an n-byte big-endian field that starts at byte `off` of a beat
  function automatic logic [DATA_W-1:0] put_field(input logic [DATA_W-1:0] d,
                                                  input int unsigned off,
                                                  input int unsigned nbytes,
                                                  input logic [255:0] f);
    logic [DATA_W-1:0] o;
    o = d;
    for (int unsigned i = 0; i < nbytes; i++)
      o[8*(off+i) +: 8] = f[8*(nbytes-1-i) +: 8];
    return o;
  endfunction

  // modular add / subtract of operands already reduced below m
  function automatic logic [255:0] mod_add(input logic [255:0] a, input logic [255:0] b,
                                           input logic [255:0] m);
    logic [256:0] s;
    s = {1'b0, a} + {1'b0, b};
    if (s >= {1'b0, m}) s = s - {1'b0, m};
    return s[255:0];
  endfunction

  function automatic logic [255:0] mod_sub(input logic [255:0] a, input logic [255:0] b,
                                           input logic [255:0] m);
    logic [255:0] d;
    d = a - b;
    if (a < b) d = d + m;
    return d;
  endfunction

endpackage
