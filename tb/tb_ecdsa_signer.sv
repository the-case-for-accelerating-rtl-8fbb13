// tb_ecdsa_signer: feeds hashes and precomputed (r, k^-1) pairs and compares
// s with k^-1 (z + r d) mod n computed by the testbench with wide '*' and
// '%'; includes a hash above n and a pair that arrives late. Checks the
// latency against the paper's ~745 ns signer latency (171 cycles at 230 MHz).
module tb_ecdsa_signer;
  import aom_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [255:0] d = 256'h1f2e3d4c5b6a79880123456789abcdef_fedcba9876543210_0badc0de_cafef00d;
  logic hash_valid = 0, hash_ready, pre_valid = 0, pre_ready, sig_valid, sig_ready = 0;
  logic [255:0] hash;
  precomp_t pre;
  sig_t sig;
  int checks = 0, failures = 0, maxlat = 0;

  ecdsa_signer dut (.clk, .rst_n, .priv_key(d), .hash_valid, .hash_ready, .hash,
                               .pre_valid, .pre_ready, .pre, .sig_valid, .sig_ready, .sig);

  task automatic one(input logic [255:0] z, input precomp_t pp, input bit late_pre);
    int cyc;
    logic [255:0] exp_s;
    exp_s = ref_sign(z, pp, d);
    @(negedge clk); hash = z; hash_valid = 1; pre = pp; pre_valid = !late_pre;
    if (late_pre) begin
      repeat (10) begin
        @(negedge clk);
        checks++;
        if (hash_ready) begin failures++; $display("FAIL took hash without a pair"); end
      end
      pre_valid = 1;
    end
    #1;
    while (!hash_ready) begin @(negedge clk); #1; end
    checks++;
    if (!pre_ready) begin failures++; $display("FAIL pair not consumed with hash"); end
    @(negedge clk); hash_valid = 0; pre_valid = 0; cyc = 1;
    while (!sig_valid) begin @(negedge clk); cyc++; end
    if (cyc > maxlat) maxlat = cyc;
    sig_ready = 1;
    checks += 3;
    if (sig.s !== exp_s) begin failures++; $display("FAIL s=%h exp %h", sig.s, exp_s); end
    if (sig.r !== pp.r) begin failures++; $display("FAIL r"); end
    if (cyc > 171) begin failures++; $display("FAIL latency %0d > 171", cyc); end
    @(negedge clk); sig_ready = 0;
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 8; i++)
    one({$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom},
          ref_pair(i), i == 3);
    one(256'hFFFFFFFF_FFFFFFFF_FFFFFFFF_FFFFFFFF_FFFFFFFF_FFFFFFFF_FFFFFFFF_FFFFFFF0, ref_pair(0), 0);
    $display("signer latency %0d cycles", maxlat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
