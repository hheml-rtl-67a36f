// tb_axil_regs: AXI4-Lite writes and reads of every register through a small
// bus-functional master: read-back of NUM_WORDS, nonce, counter and all key
// words on the key outputs, byte strobes, the one-cycle START pulse with
// MODE, STATUS BUSY and the sticky DONE bit, the STOP pulse with the sticky
// STOPPED bit, and unmapped reads returning 0.
module tb_axil_regs;
  import pasta_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [11:0] s_axil_awaddr = '0, s_axil_araddr = '0;
  logic s_axil_awvalid = 1'b0, s_axil_awready, s_axil_wvalid = 1'b0, s_axil_wready;
  logic [31:0] s_axil_wdata = '0, s_axil_rdata;
  logic [3:0] s_axil_wstrb = 4'hF;
  logic [1:0] s_axil_bresp, s_axil_rresp;
  logic s_axil_bvalid, s_axil_bready = 1'b0, s_axil_arvalid = 1'b0, s_axil_arready;
  logic s_axil_rvalid, s_axil_rready = 1'b0;
  logic start, stop, busy = 1'b0, done = 1'b0;
  mode_e mode;
  logic [31:0] num_words, rounds = 32'd24, blocks = 32'd47;
  logic [63:0] nonce, ctr_base;
  vec_t key_l, key_r;
  int checks = 0, failures = 0, start_pulses = 0, stop_pulses = 0;

  axil_regs dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && start) start_pulses++;
  always @(posedge clk) if (rst_n && stop) stop_pulses++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic wr(input logic [11:0] a, input logic [31:0] d, input logic [3:0] strb = 4'hF);
    s_axil_awaddr = a; s_axil_wdata = d; s_axil_wstrb = strb;
    s_axil_awvalid = 1'b1; s_axil_wvalid = 1'b1;
    do @(posedge clk); while (!(s_axil_awready && s_axil_wready));
    @(negedge clk);
    s_axil_awvalid = 1'b0; s_axil_wvalid = 1'b0;
    while (!s_axil_bvalid) @(negedge clk);
    repeat ($urandom_range(2, 0)) @(negedge clk);   // late BREADY
    check(s_axil_bvalid && s_axil_bresp == 2'b00, "write response held");
    s_axil_bready = 1'b1;
    @(negedge clk) s_axil_bready = 1'b0;
  endtask

  task automatic rd(input logic [11:0] a, output logic [31:0] d);
    s_axil_araddr = a; s_axil_arvalid = 1'b1;
    do @(posedge clk); while (!s_axil_arready);
    @(negedge clk) s_axil_arvalid = 1'b0;
    while (!s_axil_rvalid) @(negedge clk);
    repeat ($urandom_range(2, 0)) @(negedge clk);
    d = s_axil_rdata;
    s_axil_rready = 1'b1;
    @(negedge clk) s_axil_rready = 1'b0;
  endtask

  initial begin
    logic [31:0] d;
    logic [31:0] kv [2*T];
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    wr(12'h008, 32'd784);       rd(12'h008, d); check(d == 784 && num_words == 784, "NUM_WORDS");
    wr(12'h00C, 32'hDEADBEEF);  wr(12'h010, 32'h01234567);
    check(nonce == 64'h01234567_DEADBEEF, "nonce");
    wr(12'h014, 32'd5);         wr(12'h018, 32'd1);
    check(ctr_base == 64'h1_0000_0005, "counter");
    rd(12'h00C, d); check(d == 32'hDEADBEEF, "NONCE_LO read");
    wr(12'h014, 32'hAABBCCDD, 4'b0100);
    check(ctr_base[31:0] == 32'h00BB0005, "byte strobe");
    for (int k = 0; k < 2*T; k++) begin
      kv[k] = $urandom_range(65536, 0);
      wr(12'h100 + 12'(4*k), kv[k]);
    end
    for (int k = 0; k < T; k++) begin
      check(key_l[k] == kv[k], "key_l");
      check(key_r[k] == kv[T+k], "key_r");
    end
    rd(12'h100 + 12'(4*7), d); check(d == kv[7], "key read");
    // start in decrypt mode
    wr(12'h000, 32'h3);
    check(start_pulses == 1 && mode == MODE_DEC, "start pulse and mode");
    busy = 1'b1;
    rd(12'h004, d); check(d[1:0] == 2'b01, "busy status");
    @(negedge clk) done = 1'b1;
    @(negedge clk) done = 1'b0; busy = 1'b0;
    rd(12'h004, d); check(d[1:0] == 2'b10, "done sticky");
    rd(12'h01C, d); check(d == 24, "ROUNDS");
    rd(12'h020, d); check(d == 47, "BLOCKS");
    rd(12'h000, d); check(d == 32'h2, "CTRL read");
    wr(12'h000, 32'h1);
    check(start_pulses == 2 && mode == MODE_ENC, "second start");
    rd(12'h004, d); check(d[1] == 1'b0, "done cleared by start");
    check(stop_pulses == 0, "no stop yet");
    wr(12'h000, 32'h4);
    check(stop_pulses == 1 && start_pulses == 2, "stop pulse");
    rd(12'h004, d); check(d[2] == 1'b1, "STOPPED set");
    wr(12'h000, 32'h1);
    rd(12'h004, d); check(d[2] == 1'b0 && start_pulses == 3, "STOPPED cleared by start");
    rd(12'h0F0, d); check(d == 0, "unmapped read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
