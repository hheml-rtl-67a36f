// tb_keccak_f1600: checks the one-round-per-cycle Keccak-f[1600] against the
// reference permutation (all 25 lanes) and the published first lane of
// Keccak-f[1600] applied to the all-zero state (0xF1258F7940E1DDE7), and checks
// the 24-cycle latency from start to done.
module tb_keccak_f1600;
  import pasta_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, busy, done;
  logic [24:0][63:0] state_in, state_out;
  int checks = 0, failures = 0;

  keccak_f1600 dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_one(input lane_t in [25]);
    lane_t exp [25];
    int cycles;
    keccak_flat(in, exp);
    for (int i = 0; i < 25; i++) state_in[i] = in[i];
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    cycles = 1;
    while (!done) begin
      @(negedge clk);
      cycles++;
    end
    checks++;
    if (cycles != 24) begin
      failures++;
      $display("latency %0d, expected 24", cycles);
    end
    for (int i = 0; i < 25; i++) begin
      checks++;
      if (state_out[i] !== exp[i]) begin
        failures++;
        $display("lane %0d: got %h expected %h", i, state_out[i], exp[i]);
      end
    end
  endtask

  initial begin
    lane_t v [25];
    state_in = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    foreach (v[i]) v[i] = '0;
    run_one(v);
    checks++;
    if (state_out[0] !== 64'hF1258F7940E1DDE7) begin
      failures++;
      $display("zero-state lane 0: %h", state_out[0]);
    end
    // chain a second permutation on the result, then random states
    foreach (v[i]) v[i] = state_out[i];
    run_one(v);
    repeat (4) begin
      foreach (v[i]) v[i] = {$urandom, $urandom};
      run_one(v);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
