// tb_packet_parser: sends packets of 2..5 beats with random gaps, random
// output back-pressure and a hash chain that accepts requests only some of
// the time. Checks that beats leave unchanged and in order with the right
// message/session number beside them, and that exactly one hash request per
// packet carries that packet's group, digest and sequence number.
module tb_packet_parser;
  import aom_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, out_valid, out_ready, hreq_valid, hreq_ready;
  beat_t in_beat, out_beat;
  logic [31:0] out_seq, out_epoch;
  hash_req_t hreq;
  int checks = 0, failures = 0;
  localparam int NPKT = 30;

  packet_parser dut (.clk, .rst_n, .in_valid, .in_ready, .in_beat, .out_valid, .out_ready, .out_beat,
                     .out_seq, .out_epoch, .hreq_valid, .hreq_ready, .hreq);

  beat_t exp_beats[$];
  logic [31:0] exp_seq[$], exp_ep[$];
  hash_req_t exp_req[$];
  int nbeats [NPKT];

  always_ff @(posedge clk) begin
    out_ready  <= ($urandom % 4) != 0;
    hreq_ready <= ($urandom % 3) == 0;
  end

  initial begin
    for (int p = 0; p < NPKT; p++) begin
      nbeats[p] = 2 + $urandom % 4;
      for (int b = 0; b < nbeats[p]; b++) begin
        beat_t bt;
        bt.keep = '1; bt.last = (b == nbeats[p] - 1);
        for (int j = 0; j < 16; j++) bt.data[32*j +: 32] = $urandom;
        if (b == 0) bt.data = tb_hdr(p % 5, 32'(p * 7 + 1), 32'(p / 10), p);
        if (b == 1) bt.data = put_field(bt.data, OFF_DIGEST, 32, tb_digest(p % 5, p));
        exp_beats.push_back(bt);
        exp_seq.push_back(32'(p * 7 + 1)); exp_ep.push_back(32'(p / 10));
      end
      exp_req.push_back('{group: 32'(p % 5), digest: tb_digest(p % 5, p), seq: 32'(p * 7 + 1), epoch: 32'(p / 10)});
    end
  end

  // driver
  initial begin
    int k = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    while (k < exp_beats.size()) begin
      @(negedge clk);
      if (in_valid && in_ready_q) k++;
      if (k < exp_beats.size() && ($urandom % 3 != 0 || in_valid)) begin
        in_valid = 1; in_beat = exp_beats[k];
      end else in_valid = 0;
    end
    in_valid = 0;
  end
  logic in_ready_q;
  always_ff @(posedge clk) in_ready_q <= in_ready;   // in_ready seen at the last edge
  // note: in_valid is only dropped after the beat was taken

  // monitors
  int ob = 0, orq = 0;
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      checks += 2;
      if (out_beat !== exp_beats[ob]) begin failures++; $display("FAIL beat %0d", ob); end
      if (out_seq !== exp_seq[ob] || out_epoch !== exp_ep[ob]) begin failures++; $display("FAIL seq/ep beat %0d", ob); end
      ob++;
    end
    if (hreq_valid && hreq_ready) begin
      checks++;
      if (hreq !== exp_req[orq]) begin failures++; $display("FAIL req %0d", orq); end
      orq++;
    end
  end

  initial begin
    wait (rst_n);
    wait (ob == exp_beats.size() && ob > 0);
    repeat (5) @(posedge clk);
    checks++;
    if (orq != NPKT) begin failures++; $display("FAIL %0d hash requests", orq); end
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
