// tb_aom_pk_top: end-to-end test of the whole signing path, switch-side
// sequencer plus accelerator, with every parameter at its default (64
// groups, 16-entry stock, high-water mark 4, ratio 8). Raw packets from
// "senders" carry junk in the sequence and epoch fields; the sequencer must
// stamp 1, 2, 3, ... per group and the configured epoch. After the stock has
// filled to the high-water mark, packets for several groups are sent and
// every output packet is checked against independent models: header as
// stamped (plus the signed flag), digest, preceding chain hash (SHA-256
// model per group, restarted when a new epoch is configured), and for signed
// packets r and s = k^-1 (z + r d) mod n with the i-th reference nonce pair.
// Counted mechanisms, each of which must occur: sign-all, ratio skip and
// ratio sign, skip on empty stock, the merger waiting for a signature, tx
// back-pressure, chain restart on a new epoch, and a packet of an unknown
// group dropped by the sequencer. Latency bounds (192 / 363 cycles) and the
// 1.2M packets/s burst rate come from the paper's figures at 230 MHz.
module tb_aom_pk_top;
  import aom_pkg::*;
  import tb_ref_pkg::*;
  localparam int HW = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [255:0] d = 256'h1f2e3d4c5b6a79880123456789abcdef_fedcba9876543210_0badc0de_cafef00d;
  logic seed_load = 0, rx_valid = 0, rx_ready, tx_valid, tx_ready = 1;
  beat_t rx_beat, tx_beat;
  logic [4:0] stock_level;
  logic [31:0] signed_cnt, unsigned_cnt, precomp_cnt, foreign_cnt;
  logic cfg_epoch_we = 0;
  logic [31:0] cfg_epoch = 0;
  int seqc [64];
  logic [15:0] mismatch_cnt;
  int checks = 0, failures = 0;
  bit random_stall = 0;

  aom_pk_top dut (
    .clk, .rst_n, .cfg_epoch_we, .cfg_epoch, .cfg_priv_key(d), .cfg_seed_load(seed_load),
    .cfg_seed(TB_SEED), .rx_valid, .rx_ready, .rx_beat, .tx_valid, .tx_ready, .tx_beat,
    .stock_level, .signed_cnt, .unsigned_cnt, .precomp_cnt, .foreign_cnt, .mismatch_cnt);

  // ---------------- expected packets ----------------
  beat_t        exp_beats[$];   // all expected beats, in order
  logic [255:0] exp_hash[$];    // chain hash of each outstanding packet
  longint       exp_tb1[$];     // cycle its beat 1 was accepted
  logic [255:0] prev [64];
  logic [31:0]  ep [64];
  int pair_idx = 0;

  logic rx_ready_q;
  always_ff @(posedge clk) rx_ready_q <= rx_ready;

  task automatic send(input int g, input int nb);
    logic [31:0] seq, epoch;
    beat_t pb[$];
    logic [255:0] dg, h;
    epoch = cfg_epoch;
    seqc[g]++;
    seq = 32'(seqc[g]);
    dg = tb_digest(g, int'(seq) + 100 * int'(epoch));
    if (ep[g] != epoch) begin prev[g] = '0; ep[g] = epoch; end
    for (int b = 0; b < nb; b++) begin
      beat_t bt;
      bt.keep = '1; bt.last = (b == nb - 1);
      for (int j = 0; j < 16; j++) bt.data[32*j +: 32] = $urandom;
      if (b == 0) bt.data = tb_hdr(g, seq, epoch, int'(seq));   // as it will leave
      if (b == 1) bt.data = put_field(put_field(bt.data, OFF_DIGEST, 32, dg), OFF_PREV, 32, 256'd0);
      pb.push_back(bt);
    end
    h = ref_chain_hash(dg, seq, prev[g]);
    for (int b = 0; b < nb; b++)
      exp_beats.push_back(b == 1 ? '{data: put_field(pb[1].data, OFF_PREV, 32, prev[g]),
                                     keep: pb[1].keep, last: pb[1].last} : pb[b]);
    prev[g] = h;
    exp_hash.push_back(h);
    exp_tb1.push_back(0);
    for (int b = 0; b < nb; b++) begin
      @(negedge clk);
      rx_valid = 1;
      rx_beat = pb[b];
      if (b == 0) rx_beat.data = tb_hdr(g, 32'hFFFF_0000 + seq, 32'hABCD, int'(seq));
      @(negedge clk);
      while (!rx_ready_q) @(negedge clk);
      if (b == 1) exp_tb1[exp_tb1.size() - 1] = $time / 10 - 1;
      rx_valid = 0;
    end
  endtask

  // ---------------- output checker ----------------
  int ob = 0, npk = 0, n_signed = 0, max_lat_u = 0, max_lat_s = 0;
  logic cur_signed;
  always_ff @(posedge clk) if (random_stall) tx_ready <= ($urandom % 3) != 0; else tx_ready <= 1'b1;

  always @(posedge clk) if (rst_n && tx_valid && tx_ready) begin
    beat_t e;
    longint now;
    now = $time / 10;
    e = exp_beats[0];
    if (ob == 0) begin
      cur_signed = tx_beat.data[8*OFF_FLAGS];
      e.data[8*OFF_FLAGS] = cur_signed;
    end
    if (ob == 1 && !cur_signed) begin
      if (now - exp_tb1[0] > max_lat_u) max_lat_u = int'(now - exp_tb1[0]);
    end
    if (ob == 2 && cur_signed) begin
      precomp_t pp;
      pp = ref_pair(pair_idx);
      e.data = put_field(put_field(e.data, OFF_SIG_R, 32, pp.r), OFF_SIG_S, 32,
                         ref_sign(exp_hash[0], pp, d));
      pair_idx++;
      n_signed++;
      if (now - exp_tb1[0] > max_lat_s) max_lat_s = int'(now - exp_tb1[0]);
    end
    checks++;
    if (tx_beat !== e) begin failures++; $display("FAIL packet %0d beat %0d", npk, ob); end
    void'(exp_beats.pop_front());
    if (tx_beat.last) begin
      ob = 0; npk++;
      void'(exp_hash.pop_front()); void'(exp_tb1.pop_front());
    end else ob++;
  end

  // ---------------- mechanism counters ----------------
  int n_full = 0, n_ratio_sign = 0, n_ratio_skip = 0, n_empty = 0, n_sigwait = 0, n_stall = 0, n_restart = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_accel.u_ctrl.take && dut.u_accel.u_ctrl.idx_q == 0) begin
      if (stock_level == 0) n_empty++;
      else if (stock_level >= HW) n_full++;
      else if (dut.u_accel.u_ctrl.decide) n_ratio_sign++;
      else n_ratio_skip++;
    end
    if (dut.u_accel.u_merger.in_valid && dut.u_accel.u_merger.need_sig && !dut.u_accel.u_merger.sig_valid) n_sigwait++;
    if (tx_valid && !tx_ready) n_stall++;
    if (dut.u_accel.u_chain.req_ready && dut.u_accel.u_chain.req_valid &&
        dut.u_accel.u_chain.started_q[dut.u_accel.u_chain.g_in] && dut.u_accel.u_chain.epoch_mem[dut.u_accel.u_chain.g_in] != dut.u_accel.u_chain.req.epoch)
      n_restart++;
  end

  task automatic drain();
    while (exp_hash.size() != 0) @(negedge clk);
  endtask

  task automatic need(input string what, input int n);
    checks++;
    $display("%-28s %0d", what, n);
    if (n == 0) begin failures++; $display("FAIL mechanism never seen: %s", what); end
  endtask

  initial begin
    longint t0, t1;
    for (int g = 0; g < 64; g++) begin prev[g] = '0; ep[g] = 0; seqc[g] = 0; end
    repeat (3) @(negedge clk); rst_n = 1;
    seed_load = 1; @(negedge clk); seed_load = 0;
    wait (stock_level == 5'(HW));
    // phase 1: sign-all at the high-water mark, then one in RATIO, then empty
    random_stall = 1;
    for (int i = 0; i < 16; i++) send((i * 13) % 64, 3 + (i % 3));
    drain();
    random_stall = 0;
    // a packet of a group this switch does not sequence is dropped
    @(negedge clk); rx_valid = 1; rx_beat = '{data: tb_hdr(77, 0, 0, 5), keep: '1, last: 1'b0};
    @(negedge clk); while (!rx_ready_q) @(negedge clk);
    rx_beat.last = 1'b1; rx_beat.data = '1;
    @(negedge clk); while (!rx_ready_q) @(negedge clk);
    rx_valid = 0;
    // phase 2: new epoch: counters and chains restart
    @(negedge clk); cfg_epoch = 32'd1; cfg_epoch_we = 1; @(negedge clk); cfg_epoch_we = 0;
    for (int g = 0; g < 64; g++) seqc[g] = 0;
    for (int i = 0; i < 4; i++) send(i % 2, 3);
    drain();
    // phase 3: back-to-back burst
    t0 = $time / 10;
    for (int i = 0; i < 8; i++) send(5, 3);
    drain();
    t1 = $time / 10;
    $display("burst: %0d cycles per packet", (t1 - t0) / 8);
    checks++;
    if ((t1 - t0) / 8 > 192) begin failures++; $display("FAIL packet rate below 1.2 Mpps"); end
    $display("max latency unsigned %0d, signed %0d cycles", max_lat_u, max_lat_s);
    checks += 4;
    if (max_lat_u > 192 || max_lat_u == 0) begin failures++; $display("FAIL unsigned latency"); end
    if (max_lat_s > 363 || max_lat_s == 0) begin failures++; $display("FAIL signed latency"); end
    if (signed_cnt != 32'(n_signed) || signed_cnt + unsigned_cnt != 32'(npk)) begin failures++; $display("FAIL counters"); end
    if (mismatch_cnt != 0) failures++;
    need("sign-all (stock full)", n_full);
    need("ratio: signed", n_ratio_sign);
    need("ratio: skipped", n_ratio_skip);
    need("skipped (stock empty)", n_empty);
    need("merger waits for signature", n_sigwait);
    need("tx back-pressure", n_stall);
    need("chain restart on epoch", n_restart);
    need("unknown group dropped", int'(foreign_cnt));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
