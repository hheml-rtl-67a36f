// tb_axis_wrapper: the wrapper with a stand-in core that returns each packet
// with every word incremented by its index plus one, one cycle later. Jobs of
// 40 words (two full packets and a short one) and 17 words are streamed with
// random TVALID gaps and TREADY back-pressure. Checks: packet contents and
// zero padding, output words in order, exactly NUM_WORDS words out, TLAST only
// on the last.
module tb_axis_wrapper;
  import pasta_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [31:0] num_words = '0;
  logic [31:0] s_axis_tdata = '0, m_axis_tdata;
  logic s_axis_tvalid = 1'b0, s_axis_tready, s_axis_tlast = 1'b0;
  logic m_axis_tvalid, m_axis_tready = 1'b0, m_axis_tlast;
  logic pkt_in_valid, pkt_in_ready, pkt_out_valid, pkt_out_ready;
  vec_t pkt_in_data, pkt_out_data;
  int checks = 0, failures = 0;
  int pads = 0, stalls = 0;

  axis_wrapper #(.FIFO_DEPTH(32)) dut (.*);

  // stand-in core: one-packet register
  logic held = 1'b0;
  vec_t hold;
  assign pkt_in_ready  = !held;
  assign pkt_out_valid = held;
  assign pkt_out_data  = hold;
  always_ff @(posedge clk) begin
    if (pkt_in_valid && pkt_in_ready) begin
      held <= 1'b1;
      for (int j = 0; j < T; j++) hold[j] <= pkt_in_data[j] + 32'(j + 1);
    end else if (pkt_out_valid && pkt_out_ready) held <= 1'b0;
  end

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // packet contents seen by the core
  int pkt_seen;
  int job_words;
  always @(posedge clk) begin
    if (pkt_in_valid && pkt_in_ready) begin
      for (int j = 0; j < T; j++) begin
        int w;
        w = pkt_seen * T + j;
        if (w < job_words) check(pkt_in_data[j] == 32'(1000 + w), "packet word");
        else begin
          check(pkt_in_data[j] == 0, "padding");
          pads++;
        end
      end
      pkt_seen++;
    end
    if (m_axis_tvalid && !m_axis_tready) stalls++;
  end

  task automatic run_job(input int n);
    int nin = 0, nout = 0;
    job_words = n;
    pkt_seen  = 0;
    num_words = n;
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    while (nout < n) begin
      s_axis_tvalid = (nin < n) && ($urandom_range(2, 0) != 0);
      s_axis_tdata  = 32'(1000 + nin);
      s_axis_tlast  = (nin == n - 1);
      m_axis_tready = ($urandom_range(2, 0) != 0);
      @(posedge clk);
      if (s_axis_tvalid && s_axis_tready) nin++;
      if (m_axis_tvalid && m_axis_tready) begin
        check(m_axis_tdata == 32'(1000 + nout + (nout % T) + 1), $sformatf("out word %0d", nout));
        check(m_axis_tlast == (nout == n - 1), "tlast");
        nout++;
      end
      @(negedge clk);
    end
    s_axis_tvalid = 1'b0;
    m_axis_tready = 1'b1;
    repeat (30) @(negedge clk);
    check(!m_axis_tvalid, "no extra words");
    m_axis_tready = 1'b0;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run_job(40);
    run_job(17);
    check(pads > 0, "short packet padded");
    check(stalls > 0, "output back-pressure seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
