// tb_stream_merger: a mix of signed and unsigned packets of 3..5 beats, with
// signatures arriving late and at random and random output back-pressure.
// Checks that signed packets leave with (r, s) in beat 2 (r in bytes 0..31,
// s in 32..63, big-endian) and every other beat unchanged, that unsigned
// packets pass untouched, and that every signature is used exactly once.
module tb_stream_merger;
  import aom_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, in_sign, sig_valid = 0, sig_ready, out_valid, out_ready;
  beat_t in_beat, out_beat;
  sig_t sig;
  int checks = 0, failures = 0;
  localparam int NPKT = 24;

  stream_merger dut (.clk, .rst_n, .in_valid, .in_ready, .in_beat, .in_sign,
                     .sig_valid, .sig_ready, .sig, .out_valid, .out_ready, .out_beat);

  beat_t ib[$], eb[$];
  logic isg[$];
  sig_t sigs[$];

  always_ff @(posedge clk) out_ready <= ($urandom % 4) != 0;

  initial begin
    for (int p = 0; p < NPKT; p++) begin
      int nb; logic s; sig_t sg;
      nb = 3 + $urandom % 3;
      s = ($urandom % 2);
      sg.r = {8{$urandom}}; sg.s = {8{$urandom}};
      if (s) sigs.push_back(sg);
      for (int b = 0; b < nb; b++) begin
        beat_t bt, e;
        bt.keep = '1; bt.last = (b == nb - 1);
        for (int j = 0; j < 16; j++) bt.data[32*j +: 32] = $urandom;
        e = bt;
        if (s && b == 2) begin
          for (int j = 0; j < 32; j++) begin
            e.data[8*j +: 8]      = sg.r[8*(31-j) +: 8];
            e.data[8*(32+j) +: 8] = sg.s[8*(31-j) +: 8];
          end
        end
        ib.push_back(bt); eb.push_back(e); isg.push_back(s);
      end
    end
  end

  logic in_ready_q, sig_ready_q;
  always_ff @(posedge clk) begin in_ready_q <= in_ready; sig_ready_q <= sig_ready; end
  initial begin
    int k = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    while (k < ib.size()) begin
      @(negedge clk);
      if (in_valid && in_ready_q) k++;
      if (k < ib.size() && ($urandom % 3 != 0 || in_valid)) begin
        in_valid = 1; in_beat = ib[k]; in_sign = isg[k];
      end else in_valid = 0;
    end
    in_valid = 0;
  end
  int ns = 0;
  initial begin
    repeat (3) @(negedge clk);
    while (ns < sigs.size()) begin
      @(negedge clk);
      if (sig_valid && sig_ready_q) ns++;
      if (ns < sigs.size() && ($urandom % 10 == 0 || sig_valid)) begin
        sig_valid = 1; sig = sigs[ns];
      end else sig_valid = 0;
    end
    sig_valid = 0;
  end

  int ob = 0;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    if (out_beat !== eb[ob]) begin failures++; $display("FAIL beat %0d", ob); end
    ob++;
  end

  initial begin
    wait (rst_n);
    wait (ob == eb.size() && ob > 0);
    repeat (3) @(posedge clk);
    checks++;
    if (ns != sigs.size() || sigs.size() == 0) begin failures++; $display("FAIL signatures used %0d", ns); end
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
