// packet_parser: first stage of the accelerator's packet path.
//
// It registers each beat of the incoming 512-bit packet stream and reads the
// AOM header: the group ID, message (sequence) number and session (epoch)
// number from beat 0, the sender's message digest from beat 1. When beat 1 is accepted
// it issues a request to the hash chain; the beat waits at the input until
// the hash chain takes the request. The message and session numbers travel
// beside the packet stream, held for the whole packet, to the packet updater
// (the thin "Message/Session Number" line of the accelerator figure).
//
// Interface: in valid/ready, out valid/ready with one register of latency,
// hash request valid/ready. Packets must have at least two beats.
module packet_parser
  import aom_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  beat_t             in_beat,
  output logic              out_valid,
  input  logic              out_ready,
  output beat_t             out_beat,
  output logic [SEQ_W-1:0]  out_seq,     // message number of the packet on out
  output logic [EPOCH_W-1:0] out_epoch,  // session number of the packet on out
  output logic              hreq_valid,
  input  logic              hreq_ready,
  output hash_req_t         hreq
);
  logic [15:0] idx_q;           // beat index of the next input beat
  logic [SEQ_W-1:0]  seq_q;
  logic [EPOCH_W-1:0] epoch_q;
  logic [GROUP_W-1:0] group_q;
  logic stage_free, need_hreq, take;

  assign stage_free = !out_valid || out_ready;
  assign need_hreq  = (idx_q == 16'(BEAT_HASH));
  assign in_ready   = stage_free && (!need_hreq || hreq_ready);
  assign take       = in_valid && in_ready;

  assign hreq_valid  = in_valid && stage_free && need_hreq;
  assign hreq.digest = get_field(in_beat.data, OFF_DIGEST, 32);
  assign hreq.seq    = seq_q;
  assign hreq.group  = group_q;
  assign hreq.epoch  = epoch_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idx_q <= '0; seq_q <= '0; epoch_q <= '0; group_q <= '0;
      out_valid <= 1'b0; out_beat <= '0; out_seq <= '0; out_epoch <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (take) begin
        logic [SEQ_W-1:0]   s;
        logic [EPOCH_W-1:0] e;
        s = seq_q; e = epoch_q;
        if (idx_q == 16'(BEAT_HDR)) begin
          s = SEQ_W'(get_field(in_beat.data, OFF_SEQ, 4));
          e = EPOCH_W'(get_field(in_beat.data, OFF_EPOCH, 4));
          seq_q <= s; epoch_q <= e;
          group_q <= GROUP_W'(get_field(in_beat.data, OFF_GROUP, 4));
        end
        out_valid <= 1'b1;
        out_beat  <= in_beat;
        out_seq   <= s;
        out_epoch <= e;
        idx_q     <= in_beat.last ? '0 : idx_q + 1'b1;
      end
    end
  end

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_beat));
  a_two_beats: assert property (@(posedge clk) disable iff (!rst_n)
    take && idx_q == 16'(BEAT_HDR) |-> !in_beat.last);
endmodule
