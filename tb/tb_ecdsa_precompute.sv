// tb_ecdsa_precompute: seeds the nonce generator with TB_SEED and checks the
// first pairs the pre-computer delivers against the offline secp256k1 model
// (r = (kG).x mod n and k^-1 mod n for the same xoshiro256** nonces). It
// lets the two-entry stock fill up, checks the stock level and that
// production stops when full, then drains and checks the refill. Reports the
// cycles per pair.
module tb_ecdsa_precompute;
  import aom_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic seed_load = 0, pre_valid, pre_ready = 0;
  logic [255:0] seed;
  precomp_t pre;
  logic [1:0] stock_level;
  logic [31:0] made_cnt;
  int checks = 0, failures = 0, got = 0;
  longint t0, t1;

  ecdsa_precompute #(.STOCK_DEPTH(2)) dut (.clk, .rst_n, .seed_load, .seed,
    .pre_valid, .pre_ready, .pre, .stock_level, .made_cnt);

  task automatic take_one();
    @(negedge clk);
    while (!pre_valid) @(negedge clk);
    checks += 2;
    if (pre.r !== ref_pair(got).r) begin failures++; $display("FAIL r[%0d]=%h", got, pre.r); end
    if (pre.kinv !== ref_pair(got).kinv) begin failures++; $display("FAIL kinv[%0d]=%h", got, pre.kinv); end
    pre_ready = 1; @(negedge clk); pre_ready = 0;
    got++;
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    seed = TB_SEED; seed_load = 1; @(negedge clk); seed_load = 0;
    t0 = $time;
    wait (stock_level == 2'd1);
    t1 = $time;
    $display("cycles per pair: %0d", (t1 - t0) / 10);
    wait (stock_level == 2'd2);
    repeat (1000) @(negedge clk);
    checks += 2;
    if (stock_level != 2'd2) begin failures++; $display("FAIL stock level"); end
    if (made_cnt != 32'd2) begin failures++; $display("FAIL produced past a full stock"); end
    take_one(); take_one(); take_one();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
