// packet_updater: stamps the hash chain into the packet.
//
// Beat 0 passes through. Beat 1 waits until the hash chain's result for this
// packet is available, then leaves with the preceding packet's chain hash
// H_(n-1) written into its bytes 32..63. The packet's own chain hash H_n is
// handed on beside beat 1 (out_hash, out_hash_valid) for the signing ratio
// controller, which forwards it to the signer when the packet is signed.
// The message and session numbers that came from the parser are compared with
// those the hash result belongs to; a mismatch (which cannot happen in order-keeping
// operation) is counted in `mismatch_cnt` and flagged by an assertion.
//
// Interface: in valid/ready (+ message/session number), hash result
// valid/ready, out valid/ready with one register of latency.
// From the paper: the block's name and place between parser, hash chain and
// controller. What it writes, and where, is this design's choice.
module packet_updater
  import aom_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  output logic               in_ready,
  input  beat_t              in_beat,
  input  logic [SEQ_W-1:0]   in_seq,
  input  logic [EPOCH_W-1:0] in_epoch,
  input  logic               hrsp_valid,
  output logic               hrsp_ready,
  input  hash_rsp_t          hrsp,
  output logic               out_valid,
  input  logic               out_ready,
  output beat_t              out_beat,
  output logic               out_hash_valid,   // qualifies out_hash on this beat
  output logic [HASH_W-1:0]  out_hash,
  output logic [15:0]        mismatch_cnt
);
  logic [15:0] idx_q;
  logic stage_free, need_hash, take;

  assign stage_free = !out_valid || out_ready;
  assign need_hash  = (idx_q == 16'(BEAT_HASH));
  assign in_ready   = stage_free && (!need_hash || hrsp_valid);
  assign take       = in_valid && in_ready;
  assign hrsp_ready = in_valid && stage_free && need_hash;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idx_q <= '0; out_valid <= 1'b0; out_beat <= '0;
      out_hash_valid <= 1'b0; out_hash <= '0; mismatch_cnt <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (take) begin
        out_valid <= 1'b1;
        out_beat  <= in_beat;
        out_hash_valid <= 1'b0;
        if (need_hash) begin
          out_beat.data  <= put_field(in_beat.data, OFF_PREV, 32, hrsp.prev);
          out_hash       <= hrsp.hash;
          out_hash_valid <= 1'b1;
          if (hrsp.seq != in_seq || hrsp.epoch != in_epoch) mismatch_cnt <= mismatch_cnt + 1'b1;
        end
        idx_q <= in_beat.last ? '0 : idx_q + 1'b1;
      end
    end
  end

  a_seq_match: assert property (@(posedge clk) disable iff (!rst_n)
    take && need_hash |-> hrsp.seq == in_seq && hrsp.epoch == in_epoch);
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_beat));
endmodule
