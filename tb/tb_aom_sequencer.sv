// tb_aom_sequencer: packets of 1..4 beats for groups 0..5 (two of them not
// served by a 4-group sequencer) with random gaps and back-pressure, then an
// epoch change and more packets. A per-group counter model gives the
// expected sequence number (1, 2, 3, ... per group and epoch) and epoch in
// each header; packets of unknown groups must be dropped whole and counted.
module tb_aom_sequencer;
  import aom_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cfg_epoch_we = 0, in_valid = 0, in_ready, out_valid, out_ready;
  logic [31:0] cfg_epoch, foreign_cnt;
  beat_t in_beat, out_beat;
  int checks = 0, failures = 0;
  int model [6];
  int n_foreign = 0;

  aom_sequencer #(.NUM_GROUPS(4)) dut (.clk, .rst_n, .cfg_epoch_we, .cfg_epoch, .in_valid, .in_ready,
    .in_beat, .out_valid, .out_ready, .out_beat, .foreign_cnt);

  always_ff @(posedge clk) out_ready <= ($urandom % 4) != 0;
  logic in_ready_q;
  always_ff @(posedge clk) in_ready_q <= in_ready;

  beat_t eb[$];
  int ob = 0;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    if (out_beat !== eb[ob]) begin failures++; $display("FAIL beat %0d", ob); end
    ob++;
  end

  task automatic send(input int g, input int salt, input logic [31:0] epoch);
    int nb;
    nb = 1 + $urandom % 4;
    if (g < 4) model[g]++; else n_foreign++;
    for (int b = 0; b < nb; b++) begin
      beat_t bt, e;
      bt.keep = '1; bt.last = (b == nb - 1);
      for (int j = 0; j < 16; j++) bt.data[32*j +: 32] = $urandom;
      if (b == 0) bt.data = tb_hdr(g, 32'hDEAD, 32'hBEEF, salt);
      e = bt;
      if (b == 0 && g < 4) e.data = tb_hdr(g, 32'(model[g]), epoch, salt);
      if (g < 4) eb.push_back(e);
      @(negedge clk);
      if ($urandom % 3 == 0) @(negedge clk);
      in_valid = 1; in_beat = bt;
      @(negedge clk);
      while (!in_ready_q) @(negedge clk);
      in_valid = 0;
    end
  endtask

  initial begin
    for (int g = 0; g < 6; g++) model[g] = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int p = 0; p < 30; p++) send($urandom % 6, p, 0);
    wait (ob == eb.size());
    @(negedge clk); cfg_epoch = 32'd7; cfg_epoch_we = 1; @(negedge clk); cfg_epoch_we = 0;
    for (int g = 0; g < 6; g++) model[g] = 0;
    for (int p = 30; p < 50; p++) send($urandom % 6, p, 7);
    wait (ob == eb.size());
    repeat (3) @(posedge clk);
    checks++;
    if (foreign_cnt != 32'(n_foreign)) begin failures++; $display("FAIL foreign count"); end
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
