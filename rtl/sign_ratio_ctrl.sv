// sign_ratio_ctrl: signing ratio controller.
//
// Signing is slower than hashing (the sustained rate is bounded by the
// pre-computer), so not every packet can carry a signature; unsigned packets
// are covered by the hash chain up to the next signed one. At the first beat
// of each packet this block decides whether the packet is signed, from the
// pre-computer's stock level, which rises when traffic is light and falls
// when packets arrive faster than signatures are precomputed:
//   stock >= HIGH_WATER      : sign every packet
//   0 < stock < HIGH_WATER   : sign one packet in every RATIO
//   stock == 0               : sign none
// The decision is written into the flags byte of beat 0 (bit 0) and given to
// the stream merger beside the packet (out_sign). For a signed packet, beat 1
// waits until the signer accepts the packet's chain hash.
//
// Interface: in valid/ready with the chain hash beside beat 1, hash stream
// to the signer valid/ready, out valid/ready with one register of latency.
// From the paper: the block, its inputs (traffic, precomputed stock level)
// and its outputs (packet stream to the merger, hash stream to the signer).
// The thresholds and the policy are this design's own.
module sign_ratio_ctrl
  import aom_pkg::*;
#(
  parameter int unsigned STOCK_W    = 5,
  parameter int unsigned HIGH_WATER = 4,
  parameter int unsigned RATIO      = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [STOCK_W-1:0] stock_level,
  input  logic               in_valid,
  output logic               in_ready,
  input  beat_t              in_beat,
  input  logic               in_hash_valid,
  input  logic [HASH_W-1:0]  in_hash,
  output logic               sreq_valid,
  input  logic               sreq_ready,
  output logic [HASH_W-1:0]  sreq_hash,
  output logic               out_valid,
  input  logic               out_ready,
  output beat_t              out_beat,
  output logic               out_sign,
  output logic [31:0]        signed_cnt,
  output logic [31:0]        unsigned_cnt
);
  logic [15:0] idx_q;
  logic        sign_q;                 // decision for the current packet
  logic [$clog2(RATIO+1)-1:0] gap_q;   // unsigned packets since the last signed one
  logic stage_free, need_sig, take, decide;

  assign stage_free = !out_valid || out_ready;
  assign need_sig   = (idx_q == 16'(BEAT_HASH)) && sign_q;
  assign in_ready   = stage_free && (!need_sig || sreq_ready);
  assign take       = in_valid && in_ready;
  assign sreq_valid = in_valid && stage_free && need_sig;
  assign sreq_hash  = in_hash;

  always_comb begin
    if (stock_level == '0)                        decide = 1'b0;
    else if (32'(stock_level) >= HIGH_WATER)      decide = 1'b1;
    else                                          decide = (32'(gap_q) >= RATIO - 1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idx_q <= '0; sign_q <= 1'b0; gap_q <= '0;
      out_valid <= 1'b0; out_beat <= '0; out_sign <= 1'b0;
      signed_cnt <= '0; unsigned_cnt <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (take) begin
        logic s;
        s = sign_q;
        out_beat <= in_beat;
        if (idx_q == 16'(BEAT_HDR)) begin
          s = decide;
          sign_q <= s;
          out_beat.data[8*OFF_FLAGS] <= s;
          if (s) begin
            gap_q <= '0;
            signed_cnt <= signed_cnt + 1'b1;
          end else begin
            if (32'(gap_q) < RATIO) gap_q <= gap_q + 1'b1;
            unsigned_cnt <= unsigned_cnt + 1'b1;
          end
        end
        out_valid <= 1'b1;
        out_sign  <= s;
        idx_q     <= in_beat.last ? '0 : idx_q + 1'b1;
      end
    end
  end

  a_hash_with_beat1: assert property (@(posedge clk) disable iff (!rst_n)
    sreq_valid |-> in_hash_valid);
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_beat));
endmodule
