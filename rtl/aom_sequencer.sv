// aom_sequencer: in-switch AOM sequencing stage.
//
// The sequencer keeps one counter per AOM group. For the first beat of every
// packet it reads the group ID from the AOM header, increments that group's
// counter and writes the new value, together with the current epoch number,
// into the header; the remaining beats pass unchanged. Sequence numbers are
// therefore gap-less and start at 1 in each group and epoch. Loading a new
// epoch number (cfg_epoch_we, the control plane installing this switch as a
// group's sequencer for a new epoch) clears all counters.
// Group IDs at or above NUM_GROUPS are not groups this switch sequences; such
// packets are dropped (all their beats) and counted in `foreign_cnt`, so
// that they never enter a group's hash chain.
//
// Interface: in valid/ready, out valid/ready, one register of latency.
// From the paper: one counter register per group, located by the group
// address, incremented and written into the header. The number of groups,
// the counter reset on an epoch change and dropping unknown groups
// are this design's choices.
module aom_sequencer
  import aom_pkg::*;
#(
  parameter int unsigned NUM_GROUPS = 64
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               cfg_epoch_we,
  input  logic [EPOCH_W-1:0] cfg_epoch,
  input  logic               in_valid,
  output logic               in_ready,
  input  beat_t              in_beat,
  output logic               out_valid,
  input  logic               out_ready,
  output beat_t              out_beat,
  output logic [31:0]        foreign_cnt
);
  localparam int unsigned GW = (NUM_GROUPS > 1) ? $clog2(NUM_GROUPS) : 1;

  logic [SEQ_W-1:0]   ctr_q [NUM_GROUPS];
  logic [EPOCH_W-1:0] epoch_q;
  logic               first_q;   // next input beat is the first of a packet
  logic               drop_q;    // rest of the current packet is being dropped
  logic               take;
  logic [GROUP_W-1:0] gid;
  logic [GW-1:0]      gsel;
  logic               known;

  assign in_ready = (!out_valid || out_ready) && !cfg_epoch_we;
  assign take     = in_valid && in_ready;
  assign gid      = GROUP_W'(get_field(in_beat.data, OFF_GROUP, 4));
  assign known    = (gid < GROUP_W'(NUM_GROUPS));
  assign gsel     = GW'(gid);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_GROUPS; i++) ctr_q[i] <= '0;
      epoch_q <= '0; first_q <= 1'b1; drop_q <= 1'b0; out_valid <= 1'b0; out_beat <= '0;
      foreign_cnt <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (cfg_epoch_we) begin
        epoch_q <= cfg_epoch;
        for (int i = 0; i < NUM_GROUPS; i++) ctr_q[i] <= '0;
      end else if (take) begin
        first_q <= in_beat.last;
        if (first_q) begin
          drop_q <= !known && !in_beat.last;
          if (known) begin
            out_valid <= 1'b1;
            out_beat  <= in_beat;
            ctr_q[gsel] <= ctr_q[gsel] + 1'b1;
            out_beat.data <= put_field(put_field(in_beat.data, OFF_SEQ, 4, 256'(ctr_q[gsel] + 1'b1)),
                                       OFF_EPOCH, 4, 256'(epoch_q));
          end else begin
            foreign_cnt <= foreign_cnt + 1'b1;
          end
        end else if (!drop_q) begin
          out_valid <= 1'b1;
          out_beat  <= in_beat;
        end else if (in_beat.last) begin
          drop_q <= 1'b0;
        end
      end
    end
  end

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_beat));
endmodule
