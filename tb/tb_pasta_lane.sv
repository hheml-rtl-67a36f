// tb_pasta_lane: computes keystream blocks for random keys, nonces and block
// counters and compares them with the reference Pasta-pi; the second block is
// started from the done state right after the first is acknowledged. Also
// checks the lower bound on the run time implied by the XOF: at least one
// Keccak permutation (24 cycles) per 21 draws actually used. A block is then
// aborted half-way: the lane must go idle at once, and the next block must
// still be correct (its XOF re-seeded).
module tb_pasta_lane;
  import pasta_pkg::*;
  import pasta_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, halt = 1'b0, ack = 1'b0, busy, ks_valid;
  logic [63:0] nonce = '0, counter = '0;
  vec_t key_l = '0, key_r = '0, ks;
  int checks = 0, failures = 0;

  pasta_lane dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input uvec_t kl, input uvec_t kr, input bit [63:0] n, input bit [63:0] c);
    uvec_t exp;
    int rej, perms, cycles;
    keystream(kl, kr, n, c, exp, rej, perms);
    for (int j = 0; j < T; j++) begin key_l[j] = word_t'(kl[j]); key_r[j] = word_t'(kr[j]); end
    nonce = n;
    counter = c;
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    cycles = 1;
    while (!ks_valid) begin
      @(negedge clk);
      cycles++;
    end
    for (int j = 0; j < T; j++) begin
      checks++;
      if (ks[j] !== word_t'(exp[j])) begin
        failures++;
        $display("ks[%0d]: got %0d expected %0d", j, ks[j], exp[j]);
      end
    end
    checks++;
    if (cycles < 24 * perms) begin
      failures++;
      $display("keystream after %0d cycles, XOF needs %0d permutations", cycles, perms);
    end
    $display("block ctr=%0d: %0d cycles, %0d permutations, %0d rejected draws", c, cycles, perms, rej);
    ack = 1'b1;
    @(negedge clk) ack = 1'b0;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run(random_vec(1'b0), random_vec(1'b0), 64'h0123_4567_89AB_CDEF, 64'd0);
    run(random_vec(1'b0), random_vec(1'b0), {$urandom, $urandom}, 64'd5);
    // halt in the middle of a block
    counter = 64'd9;
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    repeat (700) @(negedge clk);
    checks++;
    if (!busy) begin failures++; $display("lane not busy before halt"); end
    halt = 1'b1;
    @(negedge clk) halt = 1'b0;
    checks++;
    if (busy || ks_valid) begin failures++; $display("lane still busy after halt"); end
    repeat (50) @(negedge clk);
    checks++;
    if (busy || ks_valid) begin failures++; $display("lane left idle after halt"); end
    run(random_vec(1'b0), random_vec(1'b0), {$urandom, $urandom}, 64'd11);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
