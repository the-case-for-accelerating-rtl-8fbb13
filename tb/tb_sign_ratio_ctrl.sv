// tb_sign_ratio_ctrl: drives 3-beat packets (chain hash beside beat 1) while
// the stock level is held high, at a middle value and at zero. An
// independent model of the policy (sign all at or above HIGH_WATER, one in
// RATIO below it, none at zero) gives the expected decision; the testbench
// checks the flags bit in beat 0, the out_sign sideband, that the hash goes
// to the signer for exactly the signed packets, the untouched bytes and the
// signed/unsigned counters. The signer side accepts with random delay.
module tb_sign_ratio_ctrl;
  import aom_pkg::*;
  import tb_ref_pkg::*;
  localparam int HW = 4, RT = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [4:0] stock_level;
  logic in_valid = 0, in_ready, in_hash_valid, sreq_valid, sreq_ready, out_valid, out_ready, out_sign;
  beat_t in_beat, out_beat;
  logic [255:0] in_hash, sreq_hash;
  logic [31:0] signed_cnt, unsigned_cnt;
  int checks = 0, failures = 0;

  sign_ratio_ctrl #(.STOCK_W(5), .HIGH_WATER(HW), .RATIO(RT)) dut (.clk, .rst_n, .stock_level,
    .in_valid, .in_ready, .in_beat, .in_hash_valid, .in_hash, .sreq_valid, .sreq_ready, .sreq_hash,
    .out_valid, .out_ready, .out_beat, .out_sign, .signed_cnt, .unsigned_cnt);

  always_ff @(posedge clk) begin
    out_ready  <= ($urandom % 4) != 0;
    sreq_ready <= ($urandom % 3) == 0;
  end

  beat_t eb[$];
  logic  es[$];
  logic [255:0] ehash[$];
  int gap = 0, n_signed = 0, n_unsigned = 0;

  logic in_ready_q;
  always_ff @(posedge clk) in_ready_q <= in_ready;

  task automatic send_pkt(input int p, input logic [4:0] stock);
    logic s;
    logic [255:0] h;
    h = {8{32'(p) * 32'h01000193}};
    // model: decision at beat 0
    if (stock == 0) s = 0;
    else if (stock >= HW) s = 1;
    else s = (gap >= RT - 1);
    if (s) begin gap = 0; n_signed++; ehash.push_back(h); end
    else begin if (gap < RT) gap++; n_unsigned++; end
    stock_level = stock;
    for (int b = 0; b < 3; b++) begin
      beat_t bt, e;
      bt.keep = '1; bt.last = (b == 2);
      for (int j = 0; j < 16; j++) bt.data[32*j +: 32] = $urandom;
      e = bt;
      if (b == 0) e.data[8*OFF_FLAGS] = s;
      eb.push_back(e); es.push_back(s);
      @(negedge clk);
      in_valid = 1; in_beat = bt; in_hash_valid = (b == 1); in_hash = h;
      @(negedge clk);
      while (!in_ready_q) @(negedge clk);
      in_valid = 0;
    end
  endtask

  int ob = 0, oh = 0;
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      checks += 2;
      if (out_beat !== eb[ob]) begin failures++; $display("FAIL beat %0d", ob); end
      if (out_sign !== es[ob]) begin failures++; $display("FAIL sign beat %0d", ob); end
      ob++;
    end
    if (sreq_valid && sreq_ready) begin
      checks++;
      if (sreq_hash !== ehash[oh]) begin failures++; $display("FAIL sign hash %0d", oh); end
      oh++;
    end
  end

  initial begin
    stock_level = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int p = 0; p < 6; p++) send_pkt(p, 5'd9);        // plenty: sign all
    for (int p = 6; p < 18; p++) send_pkt(p, 5'd2);       // low: one in RT
    for (int p = 18; p < 22; p++) send_pkt(p, 5'd0);      // empty: none
    for (int p = 22; p < 26; p++) send_pkt(p, 5'd4);      // at the high-water mark
    wait (ob == eb.size());
    repeat (3) @(posedge clk);
    checks += 3;
    if (oh != n_signed) begin failures++; $display("FAIL %0d hashes to signer, exp %0d", oh, n_signed); end
    if (signed_cnt != 32'(n_signed) || unsigned_cnt != 32'(n_unsigned)) begin failures++; $display("FAIL counters"); end
    if (n_signed == 0 || n_unsigned == 0) failures++;
    $display("signed %0d unsigned %0d", n_signed, n_unsigned);
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
