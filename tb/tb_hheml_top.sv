// tb_hheml_top: end-to-end test of the accelerator at its default size. The
// host is modelled by an AXI4-Lite master and two AXI4-Stream DMA models.
//
// Job 1 encrypts one 784-word MNIST image (28 x 28 pixels, one word each):
// 47 packets of 17 words, the last holding 2 words. Every ciphertext word is
// compared with m + ks(ctr, word) from the reference Pasta model, and the
// ROUNDS register must read ceil(47 / 2) = 24. Job 2 decrypts the ciphertext
// with the same key, nonce and counter and must return the image. A third
// image job is stopped through CTRL.STOP part-way: STATUS must show STOPPED,
// not BUSY and not DONE, and the output stream must be empty. A last, short
// job (20 words) then checks that the accelerator runs again and that the
// counter base register is honoured.
// Both streams see random gaps and back-pressure.
//
// Mechanisms counted and required at least once: encrypt mode, decrypt mode,
// blocks on lane 0 and on lane 1, a zero-padded short packet, a packet
// waiting for keystream (core stall), output back-pressure, input gaps, XOF
// rejections, XOF re-squeeze permutations, a stopped job.
module tb_hheml_top;
  import pasta_pkg::*;
  import pasta_ref_pkg::*;

  localparam int NW = 784;       // MNIST image, words
  localparam int NB = (NW + T - 1) / T;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [11:0] s_axil_awaddr = '0, s_axil_araddr = '0;
  logic s_axil_awvalid = 1'b0, s_axil_awready, s_axil_wvalid = 1'b0, s_axil_wready;
  logic [31:0] s_axil_wdata = '0, s_axil_rdata;
  logic [3:0] s_axil_wstrb = 4'hF;
  logic [1:0] s_axil_bresp, s_axil_rresp;
  logic s_axil_bvalid, s_axil_bready = 1'b0, s_axil_arvalid = 1'b0, s_axil_arready;
  logic s_axil_rvalid, s_axil_rready = 1'b0;
  logic [31:0] s_axis_tdata = '0, m_axis_tdata;
  logic s_axis_tvalid = 1'b0, s_axis_tready, s_axis_tlast = 1'b0;
  logic m_axis_tvalid, m_axis_tready = 1'b0, m_axis_tlast;

  hheml_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_enc = 0, n_dec = 0, n_lane0 = 0, n_lane1 = 0, n_pad = 0, n_core_stall = 0;
  int n_out_bp = 0, n_in_gap = 0, n_reject = 0, n_perm = 0, n_stop = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // ---- mechanism probes
  always @(posedge clk) if (rst_n) begin
    if (dut.u_core.in_valid && dut.u_core.in_ready) begin
      if (dut.u_core.in_ptr == 0) n_lane0++; else n_lane1++;
      if (dut.u_wrap.pk_cnt != 5'(T)) n_pad++;
    end
    if (dut.u_core.in_valid && !dut.u_core.in_ready) n_core_stall++;
    if (m_axis_tvalid && !m_axis_tready) n_out_bp++;
    if (dut.u_core.g_lane[0].u_lane.u_xof.state == 2'd2 && !dut.u_core.g_lane[0].u_lane.u_xof.accept
        && !dut.u_core.g_lane[0].u_lane.u_xof.f_full) n_reject++;
    if (dut.u_core.g_lane[0].u_lane.u_xof.k_start) n_perm++;
  end

  // ---- AXI4-Lite master
  task automatic wr(input logic [11:0] a, input logic [31:0] d);
    s_axil_awaddr = a; s_axil_wdata = d; s_axil_awvalid = 1'b1; s_axil_wvalid = 1'b1;
    s_axil_bready = 1'b1;
    do @(posedge clk); while (!(s_axil_awready && s_axil_wready));
    @(negedge clk);
    s_axil_awvalid = 1'b0; s_axil_wvalid = 1'b0;
    while (!s_axil_bvalid) @(negedge clk);
    @(negedge clk) s_axil_bready = 1'b0;
  endtask

  task automatic rd(input logic [11:0] a, output logic [31:0] d);
    s_axil_araddr = a; s_axil_arvalid = 1'b1; s_axil_rready = 1'b1;
    do @(posedge clk); while (!s_axil_arready);
    @(negedge clk) s_axil_arvalid = 1'b0;
    while (!s_axil_rvalid) @(negedge clk);
    d = s_axil_rdata;
    @(negedge clk) s_axil_rready = 1'b0;
  endtask

  // ---- one job: configure, start, stream in and out
  task automatic job(input mode_e m, input int n, input logic [63:0] ctr,
                     input int unsigned din [], output int unsigned dout []);
    int nin = 0, nout = 0, cyc = 0;
    logic [31:0] d;
    dout = new[n];
    wr(12'h008, 32'(n));
    wr(12'h014, ctr[31:0]);
    wr(12'h018, ctr[63:32]);
    wr(12'h000, {30'd0, m, 1'b1});
    if (m == MODE_ENC) n_enc++; else n_dec++;
    while (nout < n) begin
      s_axis_tvalid = (nin < n) && ($urandom_range(9, 0) != 0);
      if (nin < n && !s_axis_tvalid) n_in_gap++;
      s_axis_tdata  = din[nin < n ? nin : 0];
      s_axis_tlast  = (nin == n - 1);
      m_axis_tready = ($urandom_range(4, 0) != 0);
      @(posedge clk);
      if (s_axis_tvalid && s_axis_tready) nin++;
      if (m_axis_tvalid && m_axis_tready) begin
        dout[nout] = m_axis_tdata;
        check(m_axis_tlast == (nout == n - 1), "tlast");
        nout++;
      end
      @(negedge clk);
      cyc++;
    end
    s_axis_tvalid = 1'b0;
    m_axis_tready = 1'b0;
    repeat (3) @(negedge clk);
    rd(12'h004, d);
    check(d[1:0] == 2'b10, "status done, not busy");
    rd(12'h020, d);
    check(d == 32'((n + T - 1) / T), "BLOCKS register");
    $display("job mode=%0d words=%0d: %0d cycles", m, n, cyc);
  endtask

  initial begin
    uvec_t kl, kr, ks;
    logic [63:0] nonce, ctr;
    int unsigned img [], ct [], back [], ct2 [];
    int rej, perms;
    logic [31:0] d;

    kl = random_vec(1'b0);
    kr = random_vec(1'b0);
    nonce = {$urandom, $urandom};
    ctr   = 64'd0;
    img = new[NW];
    foreach (img[i]) img[i] = $urandom_range(255, 0);   // 8-bit pixels
    repeat (5) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    for (int k = 0; k < 2*T; k++) wr(12'h100 + 12'(4*k), (k < T) ? kl[k] : kr[k-T]);
    wr(12'h00C, nonce[31:0]);
    wr(12'h010, nonce[63:32]);

    // job 1: encrypt the image
    job(MODE_ENC, NW, ctr, img, ct);
    for (int b = 0; b < NB; b++) begin
      keystream(kl, kr, nonce, ctr + 64'(b), ks, rej, perms);
      for (int j = 0; j < T && b*T + j < NW; j++)
        check(ct[b*T + j] == fadd(img[b*T + j], ks[j]), $sformatf("ciphertext word %0d", b*T + j));
    end
    rd(12'h01C, d);
    check(d == 32'((NB + 1) / 2), $sformatf("ROUNDS = %0d, expected %0d", d, (NB + 1) / 2));

    // job 2: decrypt it again
    job(MODE_DEC, NW, ctr, ct, back);
    foreach (back[i]) check(back[i] == img[i], $sformatf("decrypted word %0d", i));

    // job 3: an image job stopped part-way
    wr(12'h008, 32'(NW));
    wr(12'h000, 32'h1);
    for (int i = 0; i < 100; i++) begin
      s_axis_tvalid = 1'b1;
      s_axis_tdata  = img[i];
      do @(posedge clk); while (!s_axis_tready);
      @(negedge clk);
    end
    s_axis_tvalid = 1'b0;
    repeat (3000) @(negedge clk);
    check(m_axis_tvalid, "results waiting before stop");
    wr(12'h000, 32'h4);
    n_stop++;
    repeat (5) @(negedge clk);
    rd(12'h004, d);
    check(d[2:0] == 3'b100, $sformatf("status after stop %b", d[2:0]));
    check(!m_axis_tvalid, "output stream emptied by stop");

    // job 4: short message with another counter base
    job(MODE_ENC, 20, 64'd1000, img, ct2);
    for (int b = 0; b < 2; b++) begin
      keystream(kl, kr, nonce, 64'd1000 + 64'(b), ks, rej, perms);
      for (int j = 0; j < T && b*T + j < 20; j++)
        check(ct2[b*T + j] == fadd(img[b*T + j], ks[j]), "counter base");
    end

    $display("mechanisms: enc=%0d dec=%0d lane0=%0d lane1=%0d padded=%0d core_stall=%0d out_bp=%0d in_gap=%0d reject=%0d perm=%0d stop=%0d",
             n_enc, n_dec, n_lane0, n_lane1, n_pad, n_core_stall, n_out_bp, n_in_gap, n_reject, n_perm, n_stop);
    check(n_enc > 0, "encrypt mode used");
    check(n_dec > 0, "decrypt mode used");
    check(n_lane0 > 0 && n_lane1 > 0, "both XOF lanes used");
    check(n_pad > 0, "short packet padded");
    check(n_core_stall > 0, "packet waited for keystream");
    check(n_out_bp > 0, "output back-pressure");
    check(n_in_gap > 0, "input gaps");
    check(n_reject > 0, "XOF rejection");
    check(n_perm > 0, "XOF permutations");
    check(n_stop > 0, "job stopped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
