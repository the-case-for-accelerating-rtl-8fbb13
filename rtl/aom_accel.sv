// aom_accel: the public-key AOM signing accelerator (FPGA co-processor).
//
// Sequenced AOM packets arrive from the switch on a 512-bit stream. The
// packet parser reads the header and sends digest, group and sequence
// number to the SHA-256 hash chain; the packet updater stamps the preceding
// packet's chain hash into the header; the signing ratio controller decides,
// from the pre-computer's stock level, whether this packet is signed and, if
// so, hands its chain hash to the secp256k1 signer; the stream merger puts
// the signature into signed packets and returns the stream to the switch.
// The pre-computer fills its stock of (r, k^-1) pairs in the background.
//
//   rx -> parser -> updater -> ratio ctrl -------------------> merger -> tx
//           |          ^           |                              ^
//           +-> hash chain         +-> signer <- pre-computer     |
//                                        +------------------------+
//
// Timing at default parameters: an unsigned packet leaves about 140 cycles
// after it arrives (hash chain, 135 cycles, plus the register stages); a
// signed packet's signature beat leaves about 10 cycles later (signer).
// Packets are hashed one after another, so the packet rate is at most one
// per ~138 cycles (1.67M packets/s at 230 MHz).
// Ports follow the figure of the design (streams, key, stock level) plus
// status counters; the handshakes, widths of the counters and the header
// layout (aom_pkg) are this design's own.
// The 100G Ethernet MAC/PHY (a vendor hard IP in the original) is not part of
// this module: rx/tx are its user-side streams.
module aom_accel
  import aom_pkg::*;
#(
  parameter int unsigned NUM_GROUPS  = 64,
  parameter int unsigned STOCK_DEPTH = 16,
  parameter int unsigned HIGH_WATER  = 4,
  parameter int unsigned RATIO       = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [255:0] priv_key,
  input  logic         seed_load,
  input  logic [255:0] seed,
  input  logic         rx_valid,
  output logic         rx_ready,
  input  beat_t        rx_beat,
  output logic         tx_valid,
  input  logic         tx_ready,
  output beat_t        tx_beat,
  output logic [$clog2(STOCK_DEPTH+1)-1:0] stock_level,
  output logic [31:0]  signed_cnt,
  output logic [31:0]  unsigned_cnt,
  output logic [31:0]  precomp_cnt,
  output logic [15:0]  mismatch_cnt
);
  localparam int unsigned STOCK_W = $clog2(STOCK_DEPTH + 1);

  // parser -> updater
  logic p_valid, p_ready; beat_t p_beat; logic [SEQ_W-1:0] p_seq; logic [EPOCH_W-1:0] p_epoch;
  // parser -> hash chain -> updater
  logic hq_valid, hq_ready; hash_req_t hq;
  logic hr_valid, hr_ready; hash_rsp_t hr;
  // updater -> controller
  logic u_valid, u_ready, u_hvalid; beat_t u_beat; logic [HASH_W-1:0] u_hash;
  // controller -> merger / signer
  logic c_valid, c_ready, c_sign; beat_t c_beat;
  logic s_valid, s_ready; logic [HASH_W-1:0] s_hash;
  // pre-computer -> signer -> merger
  logic pc_valid, pc_ready; precomp_t pc;
  logic sg_valid, sg_ready; sig_t sg;

  packet_parser u_parser (
    .clk, .rst_n, .in_valid(rx_valid), .in_ready(rx_ready), .in_beat(rx_beat),
    .out_valid(p_valid), .out_ready(p_ready), .out_beat(p_beat),
    .out_seq(p_seq), .out_epoch(p_epoch),
    .hreq_valid(hq_valid), .hreq_ready(hq_ready), .hreq(hq)
  );

  hash_chain #(.NUM_GROUPS(NUM_GROUPS)) u_chain (
    .clk, .rst_n, .req_valid(hq_valid), .req_ready(hq_ready), .req(hq),
    .rsp_valid(hr_valid), .rsp_ready(hr_ready), .rsp(hr)
  );

  packet_updater u_updater (
    .clk, .rst_n, .in_valid(p_valid), .in_ready(p_ready), .in_beat(p_beat),
    .in_seq(p_seq), .in_epoch(p_epoch),
    .hrsp_valid(hr_valid), .hrsp_ready(hr_ready), .hrsp(hr),
    .out_valid(u_valid), .out_ready(u_ready), .out_beat(u_beat),
    .out_hash_valid(u_hvalid), .out_hash(u_hash), .mismatch_cnt(mismatch_cnt)
  );

  sign_ratio_ctrl #(.STOCK_W(STOCK_W), .HIGH_WATER(HIGH_WATER), .RATIO(RATIO)) u_ctrl (
    .clk, .rst_n, .stock_level(stock_level),
    .in_valid(u_valid), .in_ready(u_ready), .in_beat(u_beat),
    .in_hash_valid(u_hvalid), .in_hash(u_hash),
    .sreq_valid(s_valid), .sreq_ready(s_ready), .sreq_hash(s_hash),
    .out_valid(c_valid), .out_ready(c_ready), .out_beat(c_beat), .out_sign(c_sign),
    .signed_cnt(signed_cnt), .unsigned_cnt(unsigned_cnt)
  );

  ecdsa_precompute #(.STOCK_DEPTH(STOCK_DEPTH), .STOCK_W(STOCK_W)) u_pre (
    .clk, .rst_n, .seed_load, .seed,
    .pre_valid(pc_valid), .pre_ready(pc_ready), .pre(pc),
    .stock_level(stock_level), .made_cnt(precomp_cnt)
  );

  ecdsa_signer u_signer (
    .clk, .rst_n, .priv_key,
    .hash_valid(s_valid), .hash_ready(s_ready), .hash(s_hash),
    .pre_valid(pc_valid), .pre_ready(pc_ready), .pre(pc),
    .sig_valid(sg_valid), .sig_ready(sg_ready), .sig(sg)
  );

  stream_merger u_merger (
    .clk, .rst_n, .in_valid(c_valid), .in_ready(c_ready), .in_beat(c_beat), .in_sign(c_sign),
    .sig_valid(sg_valid), .sig_ready(sg_ready), .sig(sg),
    .out_valid(tx_valid), .out_ready(tx_ready), .out_beat(tx_beat)
  );
endmodule
