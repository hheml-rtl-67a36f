// tb_pasta_core: a job of NB blocks is encrypted with random packet arrival
// and output back-pressure; every output packet is compared with
// m_k + ks(ctr_base + k) from the reference model, in block order. The same
// ciphertext is then decrypted and must give the plaintext back. Checks the
// scheduler round count ceil(NB / 2), that both lanes served blocks, and that
// a job of zero blocks finishes at once. A job stopped after one packet must
// go idle without `done`, drop its result, and a new job must then give the
// same ciphertext as before.
module tb_pasta_core;
  import pasta_pkg::*;
  import pasta_ref_pkg::*;

  localparam int NB = 5;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, stop = 1'b0;
  mode_e mode = MODE_ENC;
  logic [63:0] nonce = 64'hFEED_0000_1234_5678, ctr_base = 64'd100;
  vec_t key_l, key_r, in_data = '0, out_data;
  logic [31:0] num_blocks = NB, rounds, blocks_out;
  logic busy, done, in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b0;
  int checks = 0, failures = 0;

  pasta_core dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  uvec_t kl, kr, msg [NB], ct [NB], ks [NB];
  int lane_use [2];

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // drive NB packets in and collect NB packets out
  task automatic run_job(input mode_e m, input uvec_t data [NB], output uvec_t res [NB]);
    int nin = 0, nout = 0;
    mode = m;
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    while (nout < NB) begin
      in_valid  = (nin < NB) && ($urandom_range(3, 0) != 0);
      if (nin < NB) for (int j = 0; j < T; j++) in_data[j] = word_t'(data[nin][j]);
      out_ready = ($urandom_range(3, 0) != 0);
      @(posedge clk);
      if (in_valid && in_ready) begin
        lane_use[dut.in_ptr]++;
        nin++;
      end
      if (out_valid && out_ready) begin
        for (int j = 0; j < T; j++) res[nout][j] = int'(out_data[j]);
        nout++;
      end
      @(negedge clk);
    end
    in_valid = 1'b0;
    out_ready = 1'b0;
    @(negedge clk);
    check(!busy, "idle after job");
    check(rounds == (NB + 1) / 2, $sformatf("rounds %0d", rounds));
    check(blocks_out == NB, "blocks_out");
  endtask

  initial begin
    uvec_t back [NB];
    int rej, perms;
    kl = random_vec(1'b0);
    kr = random_vec(1'b0);
    for (int j = 0; j < T; j++) begin key_l[j] = word_t'(kl[j]); key_r[j] = word_t'(kr[j]); end
    for (int k = 0; k < NB; k++) begin
      msg[k] = random_vec(1'b0);
      keystream(kl, kr, nonce, ctr_base + 64'(k), ks[k], rej, perms);
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    run_job(MODE_ENC, msg, ct);
    for (int k = 0; k < NB; k++)
      for (int j = 0; j < T; j++)
        check(ct[k][j] == fadd(msg[k][j], ks[k][j]), $sformatf("ct block %0d word %0d", k, j));

    run_job(MODE_DEC, ct, back);
    for (int k = 0; k < NB; k++)
      for (int j = 0; j < T; j++)
        check(back[k][j] == msg[k][j], $sformatf("pt block %0d word %0d", k, j));

    check(lane_use[0] > 0 && lane_use[1] > 0, "both lanes used");

    // stop a job after its first packet
    begin
      uvec_t again [NB];
      bit saw_done = 1'b0;
      mode = MODE_ENC;
      @(negedge clk) start = 1'b1;
      @(negedge clk) start = 1'b0;
      for (int j = 0; j < T; j++) in_data[j] = word_t'(msg[0][j]);
      in_valid = 1'b1;
      while (!(in_valid && in_ready)) @(negedge clk);
      @(negedge clk) in_valid = 1'b0;
      repeat (300) @(negedge clk);
      check(busy && out_valid, "job running before stop");
      stop = 1'b1;
      @(negedge clk) stop = 1'b0;
      for (int c = 0; c < 100; c++) begin
        if (done) saw_done = 1'b1;
        @(negedge clk);
      end
      check(!busy && !out_valid && !saw_done, "stopped job idle, no result, no done");
      check(dut.l_busy == '0 && dut.l_ks_valid == '0, "lanes idle after stop");
      run_job(MODE_ENC, msg, again);
      for (int k = 0; k < NB; k++)
        for (int j = 0; j < T; j++)
          check(again[k][j] == ct[k][j], $sformatf("ct after stop, block %0d word %0d", k, j));
    end

    // empty job
    num_blocks = 0;
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    check(done && !busy, "empty job done");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
