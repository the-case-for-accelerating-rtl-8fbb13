// tb_hash_chain: drives chained requests for two interleaved groups, an epoch
// change and random response back-pressure, and checks every H_n and H_(n-1)
// against the testbench's SHA-256 model of digest || seq || prev; checks the
// 135-cycle request-to-response latency.
module tb_hash_chain;
  import aom_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic req_valid = 0, req_ready, rsp_valid, rsp_ready = 0;
  hash_req_t req;
  hash_rsp_t rsp;
  int checks = 0, failures = 0;
  logic [255:0] prev [4];
  logic [31:0]  cur_epoch [4];

  hash_chain #(.NUM_GROUPS(4)) dut (.clk, .rst_n, .req_valid, .req_ready, .req, .rsp_valid, .rsp_ready, .rsp);

  task automatic one(input int g, input int i, input logic [31:0] epoch, input bit stall);
    logic [255:0] d, exp_h;
    int cyc;
    d = tb_digest(g, i);
    if (cur_epoch[g] != epoch) begin prev[g] = '0; cur_epoch[g] = epoch; end
    exp_h = ref_chain_hash(d, 32'(i + 1), prev[g]);
    @(negedge clk);
    req = '{group: 32'(g), digest: d, seq: 32'(i + 1), epoch: epoch};
    req_valid = 1;
    while (!req_ready) @(negedge clk);
    @(negedge clk); req_valid = 0; cyc = 1;
    while (!rsp_valid) begin @(negedge clk); cyc++; end
    if (stall) repeat (5) @(negedge clk);
    rsp_ready = 1;
    checks += 4;
    if (rsp.hash !== exp_h) begin failures++; $display("FAIL hash g%0d i%0d", g, i); end
    if (rsp.prev !== prev[g]) begin failures++; $display("FAIL prev g%0d i%0d", g, i); end
    if (rsp.seq !== 32'(i + 1) || rsp.epoch !== epoch) begin failures++; $display("FAIL seq/epoch"); end
    if (cyc != 135) begin failures++; $display("FAIL latency %0d", cyc); end
    @(negedge clk); rsp_ready = 0;
    prev[g] = exp_h;
  endtask

  initial begin
    for (int g = 0; g < 4; g++) begin prev[g] = '0; cur_epoch[g] = 0; end
    repeat (3) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 4; i++) begin
      one(0, i, 0, i == 1);
      one(1, i, 0, 0);
    end
    // new epoch for group 0: its chain restarts, group 1 keeps going
    for (int i = 0; i < 2; i++) one(0, i, 1, 0);
    one(1, 4, 0, 0);
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
