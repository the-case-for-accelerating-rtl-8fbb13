// stream_merger: joins signatures back into the packet stream.
//
// Packets from the signing ratio controller arrive in order with a per-packet
// sign flag. Unsigned packets pass straight through. For a signed packet,
// beat 2 waits until the signer's (r, s) result is available and leaves with
// r in bytes 0..31 and s in bytes 32..63. Since packets and signatures are
// both kept in order, the next signature always belongs to the next signed
// packet. The output goes to the Ethernet port (QSFP28 MAC in the original).
//
// Interface: in valid/ready (+ in_sign), signature valid/ready, out
// valid/ready with one register of latency. Signed packets need at least
// three beats.
// From the paper: the block and its role of sending the signed packet back
// to the port; where the signature lands is this design's choice.
module stream_merger
  import aom_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  beat_t in_beat,
  input  logic  in_sign,
  input  logic  sig_valid,
  output logic  sig_ready,
  input  sig_t  sig,
  output logic  out_valid,
  input  logic  out_ready,
  output beat_t out_beat
);
  logic [15:0] idx_q;
  logic stage_free, need_sig, take;

  assign stage_free = !out_valid || out_ready;
  assign need_sig   = (idx_q == 16'(BEAT_SIG)) && in_sign;
  assign in_ready   = stage_free && (!need_sig || sig_valid);
  assign take       = in_valid && in_ready;
  assign sig_ready  = in_valid && stage_free && need_sig;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idx_q <= '0; out_valid <= 1'b0; out_beat <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (take) begin
        out_valid <= 1'b1;
        out_beat  <= in_beat;
        if (need_sig)
          out_beat.data <= put_field(put_field(in_beat.data, OFF_SIG_R, 32, sig.r),
                                     OFF_SIG_S, 32, sig.s);
        idx_q <= in_beat.last ? '0 : idx_q + 1'b1;
      end
    end
  end

  a_signed_len: assert property (@(posedge clk) disable iff (!rst_n)
    take && in_sign && idx_q < 16'(BEAT_SIG) |-> !in_beat.last);
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_beat));
endmodule
