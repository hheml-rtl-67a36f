// pasta_core: the two-XOF Pasta encryption/decryption core. A central round
// counter hands consecutive message blocks to NUM_LANES keystream lanes in
// turn and returns the results in block order.
//
// How it works. A job is `num_blocks` blocks of T words with block counters
// ctr_base, ctr_base+1, ... On `start` lane l begins the keystream for block l.
// Keystream does not depend on the data, so a lane runs as soon as it has a
// counter. Input packets are accepted strictly in order: packet k goes to lane
// k mod NUM_LANES once that lane's keystream is ready, and is combined as
//     encrypt: c_k = m_k + ks_k (mod p)      decrypt: m_k = c_k - ks_k (mod p)
// into that lane's result register. The lane is then restarted on block
// k + NUM_LANES. Results leave in the same round-robin order, so the output
// stream is in block order whatever the lanes' individual run times (each lane
// rejects a different number of XOF samples).
//
// `rounds` counts scheduler rounds: one round starts a group of up to
// NUM_LANES blocks side by side. A job of n blocks takes ceil(n/NUM_LANES)
// rounds, e.g. 47 blocks (one 784-word image) take 24 rounds with two lanes.
//
// `stop` abandons a job: the lanes return to idle, buffered results are
// dropped, `busy` falls and `done` does not pulse.
//
// Interface: `in_valid`/`in_ready` and `out_valid`/`out_ready` handshakes carry
// whole T-word packets; `done` pulses when the last result has left. Input
// words are reduced mod p before combining. `nonce`, `ctr_base`, the key and
// `mode` must be stable during a job.
//
// From the paper: two XOF modules, alternating assignment by a centralized
// round counter, ordered output, c = m + ks and m = c - ks, start and stop
// commands. This design's
// choices: the handshakes, per-lane result registers, and restarting a lane as
// soon as its keystream has been used.
module pasta_core
  import pasta_pkg::*;
#(
  parameter int unsigned NUM_LANES      = 2,
  parameter int unsigned XOF_FIFO_DEPTH = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        stop,
  input  mode_e       mode,
  input  logic [63:0] nonce,
  input  logic [63:0] ctr_base,
  input  vec_t        key_l,
  input  vec_t        key_r,
  input  logic [31:0] num_blocks,
  output logic        busy,
  output logic        done,
  output logic [31:0] rounds,
  output logic [31:0] blocks_out,
  // packets into the core
  input  logic        in_valid,
  output logic        in_ready,
  input  vec_t        in_data,
  // packets out of the core
  output logic        out_valid,
  input  logic        out_ready,
  output vec_t        out_data
);

  localparam int unsigned LW = (NUM_LANES > 1) ? $clog2(NUM_LANES) : 1;

  logic [NUM_LANES-1:0] l_start, l_busy, l_ks_valid, l_ack;
  vec_t                 l_ks  [NUM_LANES];
  logic [63:0]          l_ctr [NUM_LANES];
  logic [31:0]          l_blk [NUM_LANES];   // block index the lane works on
  vec_t                 res   [NUM_LANES];
  logic [NUM_LANES-1:0] res_valid;

  logic [LW-1:0] in_ptr, out_ptr;
  logic          in_fire, out_fire;
  logic          launch;   // first cycle of a job

  for (genvar l = 0; l < NUM_LANES; l++) begin : g_lane
    pasta_lane #(.XOF_FIFO_DEPTH(XOF_FIFO_DEPTH)) u_lane (
      .clk, .rst_n,
      .start   (l_start[l]),
      .halt    (stop),
      .nonce   (nonce),
      .counter (l_ctr[l]),
      .key_l   (key_l),
      .key_r   (key_r),
      .busy    (l_busy[l]),
      .ks_valid(l_ks_valid[l]),
      .ack     (l_ack[l]),
      .ks      (l_ks[l])
    );
  end

  function automatic vec_t combine(vec_t d, vec_t k, mode_e m);
    vec_t r;
    for (int j = 0; j < T; j++) begin
      word_t dm;
      dm   = word_t'(d[j] % P);
      r[j] = (m == MODE_ENC) ? add_mod(dm, k[j]) : sub_mod(dm, k[j]);
    end
    return r;
  endfunction

  function automatic logic [LW-1:0] next_ptr(logic [LW-1:0] p);
    return (p == LW'(NUM_LANES - 1)) ? '0 : p + 1'b1;
  endfunction

  assign in_ready  = busy && l_ks_valid[in_ptr] && !res_valid[in_ptr];
  assign in_fire   = in_valid && in_ready;
  assign out_valid = res_valid[out_ptr];
  assign out_data  = res[out_ptr];
  assign out_fire  = out_valid && out_ready;

  // Lane start requests: at job start for the first NUM_LANES blocks, and
  // after a lane's keystream has been consumed for its next block.
  always_comb begin
    l_start = '0;
    l_ack   = '0;
    for (int l = 0; l < NUM_LANES; l++) begin
      l_ctr[l] = ctr_base + 64'(l);
      if (stop) begin
        l_start[l] = 1'b0;
      end else if (launch) begin
        l_start[l] = (32'(l) < num_blocks);
      end else if (in_fire && in_ptr == LW'(l)) begin
        l_ack[l]   = 1'b1;
        l_ctr[l]   = ctr_base + 64'(l_blk[l]) + 64'(NUM_LANES);
        l_start[l] = (l_blk[l] + 32'(NUM_LANES) < num_blocks);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy       <= 1'b0;
      done       <= 1'b0;
      launch     <= 1'b0;
      rounds     <= '0;
      blocks_out <= '0;
      in_ptr     <= '0;
      out_ptr    <= '0;
      res_valid  <= '0;
      for (int l = 0; l < NUM_LANES; l++) begin
        l_blk[l] <= '0;
        res[l]   <= '0;
      end
    end else begin
      done   <= 1'b0;
      launch <= 1'b0;
      if (stop) begin
        busy      <= 1'b0;
        res_valid <= '0;
      end else if (start && !busy) begin
        busy       <= (num_blocks != 0);
        done       <= (num_blocks == 0);
        launch     <= (num_blocks != 0);
        rounds     <= '0;
        blocks_out <= '0;
        in_ptr     <= '0;
        out_ptr    <= '0;
        res_valid  <= '0;
        for (int l = 0; l < NUM_LANES; l++) l_blk[l] <= 32'(l);
      end else if (busy) begin
        // a round begins whenever lane 0 is started
        if (l_start[0]) rounds <= rounds + 1'b1;
        for (int l = 0; l < NUM_LANES; l++)
          if (l_start[l] && !launch) l_blk[l] <= l_blk[l] + 32'(NUM_LANES);
        if (in_fire) begin
          res[in_ptr]       <= combine(in_data, l_ks[in_ptr], mode);
          res_valid[in_ptr] <= 1'b1;
          in_ptr            <= next_ptr(in_ptr);
        end
        if (out_fire) begin
          res_valid[out_ptr] <= 1'b0;
          out_ptr            <= next_ptr(out_ptr);
          blocks_out         <= blocks_out + 1'b1;
          if (blocks_out + 1'b1 == num_blocks) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end

  // A packet offered on the output stays offered, unchanged, until taken.
  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n || stop)
                               out_valid && !out_ready |=> out_valid && $stable(out_data))
    else $error("pasta_core: output packet dropped or changed before it was taken");

endmodule
