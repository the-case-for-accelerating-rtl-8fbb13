// tb_modmul: checks the modular multiplier against the language's own
// 512-bit '*' and '%' for random operands modulo both secp256k1 moduli and
// for edge operands (0, 1, m-1), and checks the fixed latency (result three cycles after start).
module tb_modmul;
  import aom_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, done;
  logic [255:0] a, b, m, y;
  int checks = 0, failures = 0;

  modmul #(.W(256)) dut (.clk, .rst_n, .start, .a, .b, .m, .busy, .done, .y);

  function automatic logic [255:0] rnd256();
    return {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
  endfunction

  task automatic run(input logic [255:0] ta, input logic [255:0] tb_, input logic [255:0] tm);
    int cyc;
    logic [255:0] exp_y;
    exp_y = ref_mulmod(ta, tb_, tm);
    @(negedge clk); a = ta; b = tb_; m = tm; start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks += 2;
    if (y !== exp_y) begin failures++; $display("FAIL y=%h exp=%h", y, exp_y); end
    if (cyc != 4) begin failures++; $display("FAIL latency %0d", cyc); end
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    run(256'd0, SECP_N - 1, SECP_N);
    run(256'd1, SECP_N - 1, SECP_N);
    run(SECP_N - 1, SECP_N - 1, SECP_N);
    run(SECP_P - 1, SECP_P - 1, SECP_P);
    for (int i = 0; i < 40; i++) begin
      logic [255:0] mm;
      mm = (i % 2) ? SECP_P : SECP_N;
      run(rnd256() % mm, rnd256() % mm, mm);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
