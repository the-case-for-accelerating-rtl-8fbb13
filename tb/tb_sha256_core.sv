// tb_sha256_core: FIPS 180-4 example vectors ("abc", one block, and the
// 448-bit two-block message) plus random blocks against the testbench's own
// SHA-256 function; checks the 65-cycle latency of one compression.
module tb_sha256_core;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, done;
  logic [511:0] block;
  logic [255:0] h_in, h_out;
  int checks = 0, failures = 0;

  sha256_core dut (.clk, .rst_n, .start, .block, .h_in, .busy, .done, .h_out);

  task automatic comp(input logic [255:0] hi, input logic [511:0] blk, output logic [255:0] ho);
    int cyc;
    @(negedge clk); h_in = hi; block = blk; start = 1;
    @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    ho = h_out;
    checks++;
    if (cyc != 66) begin failures++; $display("FAIL latency %0d", cyc); end
  endtask

  task automatic expect_eq(input logic [255:0] got, input logic [255:0] exp_v);
    checks++;
    if (got !== exp_v) begin failures++; $display("FAIL got %h exp %h", got, exp_v); end
  endtask

  initial begin
    logic [255:0] h1, h2;
    logic [511:0] blk;
    repeat (3) @(negedge clk); rst_n = 1;
    comp(SHA_IV, {32'h61626380, 416'd0, 64'd24}, h1);
    expect_eq(h1, 256'hba7816bf_8f01cfea_414140de_5dae2223_b00361a3_96177a9c_b410ff61_f20015ad);
    comp(SHA_IV, {"abcdbcdecdefdefgefghfghighijhijkijkljklmklmnlmnomnopnopq", 8'h80, 56'd0}, h1);
    comp(h1, {448'd0, 64'd448}, h2);
    expect_eq(h2, 256'h248d6a61_d20638b8_e5c02693_0c3e6039_a33ce459_64ff2167_f6ecedd4_19db06c1);
    for (int i = 0; i < 10; i++) begin
      for (int j = 0; j < 16; j++) blk[32*j +: 32] = $urandom;
      comp(h2, blk, h1);
      expect_eq(h1, sha_compress(h2, blk));
      h2 = h1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
