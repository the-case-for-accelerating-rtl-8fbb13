// tb_packet_updater: sends packets with random gaps and back-pressure while
// hash results arrive late and at random. Checks that beat 1 of every packet
// leaves with the preceding chain hash in bytes 32..63, that the packet's own
// chain hash comes out beside beat 1 only, that all other bytes and beats are
// unchanged, and that no sequence mismatch is reported.
module tb_packet_updater;
  import aom_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, hrsp_valid = 0, hrsp_ready, out_valid, out_ready, out_hash_valid;
  beat_t in_beat, out_beat;
  logic [31:0] in_seq, in_epoch;
  hash_rsp_t hrsp;
  logic [255:0] out_hash;
  logic [15:0] mismatch_cnt;
  int checks = 0, failures = 0;
  localparam int NPKT = 20;

  packet_updater dut (.clk, .rst_n, .in_valid, .in_ready, .in_beat, .in_seq, .in_epoch,
    .hrsp_valid, .hrsp_ready, .hrsp, .out_valid, .out_ready, .out_beat,
    .out_hash_valid, .out_hash, .mismatch_cnt);

  beat_t ib[$], eb[$];
  logic [31:0] iseq[$];
  logic ehv[$];
  logic [255:0] eh[$];
  hash_rsp_t rsps[$];

  always_ff @(posedge clk) out_ready <= ($urandom % 4) != 0;

  initial begin
    for (int p = 0; p < NPKT; p++) begin
      int nb;
      hash_rsp_t r;
      nb = 2 + $urandom % 3;
      r.hash = {8{$urandom}}; r.prev = {8{$urandom}}; r.seq = 32'(p + 1); r.epoch = 32'd3;
      rsps.push_back(r);
      for (int b = 0; b < nb; b++) begin
        beat_t bt, e;
        bt.keep = '1; bt.last = (b == nb - 1);
        for (int j = 0; j < 16; j++) bt.data[32*j +: 32] = $urandom;
        e = bt;
        if (b == 1) e.data = put_field(bt.data, OFF_PREV, 32, r.prev);
        ib.push_back(bt); eb.push_back(e); iseq.push_back(32'(p + 1));
        ehv.push_back(b == 1); eh.push_back(r.hash);
      end
    end
  end

  logic in_ready_q, hrsp_ready_q;
  always_ff @(posedge clk) begin in_ready_q <= in_ready; hrsp_ready_q <= hrsp_ready; end
  initial begin
    int k = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    while (k < ib.size()) begin
      @(negedge clk);
      if (in_valid && in_ready_q) k++;
      if (k < ib.size() && ($urandom % 3 != 0 || in_valid)) begin
        in_valid = 1; in_beat = ib[k]; in_seq = iseq[k]; in_epoch = 32'd3;
      end else in_valid = 0;
    end
    in_valid = 0;
  end
  initial begin
    int k = 0;
    repeat (3) @(negedge clk);
    while (k < rsps.size()) begin
      @(negedge clk);
      if (hrsp_valid && hrsp_ready_q) k++;
      if (k < rsps.size() && ($urandom % 8 == 0 || hrsp_valid)) begin
        hrsp_valid = 1; hrsp = rsps[k];
      end else hrsp_valid = 0;
    end
    hrsp_valid = 0;
  end

  int ob = 0;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks += 2;
    if (out_beat !== eb[ob]) begin failures++; $display("FAIL beat %0d", ob); end
    if (out_hash_valid !== ehv[ob] || (ehv[ob] && out_hash !== eh[ob])) begin failures++; $display("FAIL hash beat %0d", ob); end
    ob++;
  end

  initial begin
    wait (rst_n);
    wait (ob == eb.size() && ob > 0);
    repeat (3) @(posedge clk);
    checks++;
    if (mismatch_cnt != 16'd0) begin failures++; $display("FAIL mismatch count %0d", mismatch_cnt); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
