// hash_chain: per-group SHA-256 hash chain over the AOM packet sequence.
//
// For every request it computes
//     H_n = SHA-256( digest_n || seq_n || H_(n-1) )        (68 bytes, 2 blocks)
// where digest_n is the sender's 32-byte message digest, seq_n the 4-byte
// big-endian sequence number and H_(n-1) the chain hash of the group's
// previous packet. It returns H_n (which the signer signs) and H_(n-1) (which
// is stamped into packet n so a receiver can walk the chain backwards from the
// next signed packet). Each group has its own chain, since each group has its
// own number sequence and its receivers see only its packets. A group's chain
// starts from an all-zero H_(-1) after reset and whenever the group's epoch
// number changes, because a new epoch starts a new sequencer and a new
// number sequence. Group IDs are taken modulo NUM_GROUPS.
//
// Interface: req valid/ready in, rsp valid/ready out. One request is in
// flight at a time; a new one is taken only when the previous result has been
// accepted (H_n depends on H_(n-1)). Request to response: 135 cycles
// (two 66-cycle compressions plus three control cycles).
//
// From the paper: hashing digest and sequence number with SHA-256 and
// stamping each packet with the preceding packet's hash. This design's own:
// the byte order of the hashed message, the zero starting value, per-group
// chains and the restart on an epoch change.
module hash_chain
  import aom_pkg::*;
#(
  parameter int unsigned NUM_GROUPS = 64
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      req_valid,
  output logic      req_ready,
  input  hash_req_t req,
  output logic      rsp_valid,
  input  logic      rsp_ready,
  output hash_rsp_t rsp
);
  localparam logic [255:0] IV = {32'h6a09e667, 32'hbb67ae85, 32'h3c6ef372, 32'ha54ff53a,
                                 32'h510e527f, 32'h9b05688c, 32'h1f83d9ab, 32'h5be0cd19};
  localparam int unsigned GW = (NUM_GROUPS > 1) ? $clog2(NUM_GROUPS) : 1;

  typedef enum logic [2:0] {S_IDLE, S_B1, S_W1, S_B2, S_W2, S_OUT} state_t;
  state_t st_q;

  // per-group chain state
  logic [HASH_W-1:0]  prev_mem  [NUM_GROUPS];
  logic [EPOCH_W-1:0] epoch_mem [NUM_GROUPS];
  logic [NUM_GROUPS-1:0] started_q;

  logic [HASH_W-1:0]  prev_q, digest_q;
  logic [SEQ_W-1:0]   seq_q;
  logic [EPOCH_W-1:0] epoch_q;
  logic [GW-1:0]      g_q, g_in;

  logic         sha_start, sha_busy, sha_done;
  logic [511:0] sha_block;
  logic [255:0] sha_hin, sha_hout, mid_q;

  sha256_core u_sha (
    .clk, .rst_n, .start(sha_start), .block(sha_block), .h_in(sha_hin),
    .busy(sha_busy), .done(sha_done), .h_out(sha_hout)
  );

  assign g_in      = GW'(req.group);
  assign req_ready = (st_q == S_IDLE);
  assign rsp_valid = (st_q == S_OUT);

  always_comb begin
    sha_start = (st_q == S_B1) || (st_q == S_B2);
    if (st_q == S_B1) begin
      sha_block = {digest_q, seq_q, prev_q[255:32]};
      sha_hin   = IV;
    end else begin
      sha_block = {prev_q[31:0], 8'h80, 408'd0, 64'd544};
      sha_hin   = mid_q;
    end
  end

  always_ff @(posedge clk) begin
    if (st_q == S_W2 && sha_done) begin
      prev_mem[g_q]  <= sha_hout;
      epoch_mem[g_q] <= epoch_q;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= S_IDLE; started_q <= '0; prev_q <= '0; digest_q <= '0; seq_q <= '0;
      epoch_q <= '0; g_q <= '0; mid_q <= '0; rsp <= '0;
    end else begin
      case (st_q)
        S_IDLE: if (req_valid) begin
          digest_q <= req.digest;
          seq_q    <= req.seq;
          epoch_q  <= req.epoch;
          g_q      <= g_in;
          prev_q   <= (started_q[g_in] && epoch_mem[g_in] == req.epoch) ? prev_mem[g_in] : '0;
          st_q     <= S_B1;
        end
        S_B1: st_q <= S_W1;
        S_W1: if (sha_done) begin mid_q <= sha_hout; st_q <= S_B2; end
        S_B2: st_q <= S_W2;
        S_W2: if (sha_done) begin
          rsp.hash  <= sha_hout;
          rsp.prev  <= prev_q;
          rsp.seq   <= seq_q;
          rsp.epoch <= epoch_q;
          started_q[g_q] <= 1'b1;
          st_q      <= S_OUT;
        end
        S_OUT: if (rsp_ready) st_q <= S_IDLE;
        default: st_q <= S_IDLE;
      endcase
    end
  end

  a_rsp_stable: assert property (@(posedge clk) disable iff (!rst_n)
    rsp_valid && !rsp_ready |=> rsp_valid && $stable(rsp));
endmodule
