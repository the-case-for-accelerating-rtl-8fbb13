// aom_pk_top: the signing path of a public-key AOM sequencer switch.
//
// AOM (authenticated ordered multicast) lets a switch order and authenticate
// multicast messages so that BFT replicas need not agree on an order among
// themselves. In the public-key variant the switch stamps each packet of a
// group with a gap-less sequence number and the epoch number
// (aom_sequencer), and hands it to a crypto co-processor (aom_accel) that
// chains it into the group's SHA-256 hash chain and, as often as its
// precomputed nonce stock allows, signs the chain hash with the switch's
// secp256k1 key. The returned packet is then multicast to the group's
// receivers by the switch's replication engine, which is outside this RTL:
// tx is the stream that goes back to the switch egress.
//
// Ports: rx is the stream from the senders (after the switch ingress), tx the
// signed/chained stream, cfg_* the control-plane configuration (epoch number,
// private key, nonce-generator seed), and status counters.
module aom_pk_top
  import aom_pkg::*;
#(
  parameter int unsigned NUM_GROUPS  = 64,
  parameter int unsigned STOCK_DEPTH = 16,
  parameter int unsigned HIGH_WATER  = 4,
  parameter int unsigned RATIO       = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               cfg_epoch_we,
  input  logic [EPOCH_W-1:0] cfg_epoch,
  input  logic [255:0]       cfg_priv_key,
  input  logic               cfg_seed_load,
  input  logic [255:0]       cfg_seed,
  input  logic               rx_valid,
  output logic               rx_ready,
  input  beat_t              rx_beat,
  output logic               tx_valid,
  input  logic               tx_ready,
  output beat_t              tx_beat,
  output logic [$clog2(STOCK_DEPTH+1)-1:0] stock_level,
  output logic [31:0]        signed_cnt,
  output logic [31:0]        unsigned_cnt,
  output logic [31:0]        precomp_cnt,
  output logic [31:0]        foreign_cnt,
  output logic [15:0]        mismatch_cnt
);
  logic  q_valid, q_ready;
  beat_t q_beat;

  aom_sequencer #(.NUM_GROUPS(NUM_GROUPS)) u_seq (
    .clk, .rst_n, .cfg_epoch_we, .cfg_epoch,
    .in_valid(rx_valid), .in_ready(rx_ready), .in_beat(rx_beat),
    .out_valid(q_valid), .out_ready(q_ready), .out_beat(q_beat),
    .foreign_cnt(foreign_cnt)
  );

  aom_accel #(.NUM_GROUPS(NUM_GROUPS), .STOCK_DEPTH(STOCK_DEPTH),
              .HIGH_WATER(HIGH_WATER), .RATIO(RATIO)) u_accel (
    .clk, .rst_n, .priv_key(cfg_priv_key), .seed_load(cfg_seed_load), .seed(cfg_seed),
    .rx_valid(q_valid), .rx_ready(q_ready), .rx_beat(q_beat),
    .tx_valid, .tx_ready, .tx_beat,
    .stock_level, .signed_cnt, .unsigned_cnt, .precomp_cnt, .mismatch_cnt
  );
endmodule
