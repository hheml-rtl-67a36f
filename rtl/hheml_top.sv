// hheml_top: the programmable-logic side of the HHE client. It encrypts a
// stream of 32-bit words (elements of F_p) with the Pasta-4 cipher, or
// decrypts one, using two keystream lanes each with its own SHAKE128 XOF.
//
// Data path: host DMA -> AXI4-Stream slave -> input FIFO -> 17-word packets
// -> pasta_core (round-robin over two lanes, c = m + ks / m = c - ks)
// -> output FIFO -> AXI4-Stream master -> host DMA.
// Control path: AXI4-Lite registers (axil_regs) hold the mode, job length,
// nonce, first block counter and the 2*17-word key, start a job and report
// BUSY/DONE, the number of scheduler rounds and finished blocks.
//
// Use: write the key, nonce, counter and NUM_WORDS, write CTRL with START and
// MODE, stream NUM_WORDS words in and read NUM_WORDS words out (the last with
// TLAST), then poll STATUS.DONE. Input may be streamed before or after START;
// START empties both FIFOs, so stream after it. CTRL.STOP abandons a job: the
// lanes go idle, both FIFOs are emptied and STATUS.STOPPED is set.
//
// Timing: one word per cycle on the streams; each block needs one lane run of
// R+1 = 5 affine layers, dominated by squeezing 5*4*17 field elements from the
// XOF; two lanes run side by side.
//
// From the paper: the block set (XOF1, XOF2, MatGen, MatMul, VecAdd, Mix &
// S-box), AXI-Stream data and AXI-Lite control, FIFOs, 17-word packets, the
// two-XOF round-robin. The key is loaded by the host through the registers:
// the paper places key generation in the PL but does not say how it works.
module hheml_top
  import pasta_pkg::*;
#(
  parameter int unsigned NUM_LANES      = 2,
  parameter int unsigned FIFO_DEPTH     = 1024,
  parameter int unsigned XOF_FIFO_DEPTH = 16,
  parameter int unsigned AXIL_ADDR_W    = 12
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // AXI4-Lite control
  input  logic [AXIL_ADDR_W-1:0] s_axil_awaddr,
  input  logic                   s_axil_awvalid,
  output logic                   s_axil_awready,
  input  logic [31:0]            s_axil_wdata,
  input  logic [3:0]             s_axil_wstrb,
  input  logic                   s_axil_wvalid,
  output logic                   s_axil_wready,
  output logic [1:0]             s_axil_bresp,
  output logic                   s_axil_bvalid,
  input  logic                   s_axil_bready,
  input  logic [AXIL_ADDR_W-1:0] s_axil_araddr,
  input  logic                   s_axil_arvalid,
  output logic                   s_axil_arready,
  output logic [31:0]            s_axil_rdata,
  output logic [1:0]             s_axil_rresp,
  output logic                   s_axil_rvalid,
  input  logic                   s_axil_rready,
  // AXI4-Stream in (plaintext or ciphertext words)
  input  logic [31:0]            s_axis_tdata,
  input  logic                   s_axis_tvalid,
  output logic                   s_axis_tready,
  input  logic                   s_axis_tlast,
  // AXI4-Stream out (ciphertext or plaintext words)
  output logic [31:0]            m_axis_tdata,
  output logic                   m_axis_tvalid,
  input  logic                   m_axis_tready,
  output logic                   m_axis_tlast
);

  logic        start, stop, busy, done;
  mode_e       mode;
  logic [31:0] num_words, num_blocks, rounds, blocks_out;
  logic [63:0] nonce, ctr_base;
  vec_t        key_l, key_r;

  logic        pin_valid, pin_ready, pout_valid, pout_ready;
  vec_t        pin_data, pout_data;

  // Packets per job: ceil(num_words / T).
  assign num_blocks = (num_words + 32'(T - 1)) / 32'(T);

  axil_regs #(.ADDR_W(AXIL_ADDR_W)) u_regs (
    .clk, .rst_n,
    .s_axil_awaddr, .s_axil_awvalid, .s_axil_awready,
    .s_axil_wdata, .s_axil_wstrb, .s_axil_wvalid, .s_axil_wready,
    .s_axil_bresp, .s_axil_bvalid, .s_axil_bready,
    .s_axil_araddr, .s_axil_arvalid, .s_axil_arready,
    .s_axil_rdata, .s_axil_rresp, .s_axil_rvalid, .s_axil_rready,
    .start, .stop, .mode, .num_words, .nonce, .ctr_base, .key_l, .key_r,
    .busy, .done, .rounds, .blocks(blocks_out)
  );

  axis_wrapper #(.FIFO_DEPTH(FIFO_DEPTH)) u_wrap (
    .clk, .rst_n,
    .start        (start || stop),
    .num_words,
    .s_axis_tdata, .s_axis_tvalid, .s_axis_tready, .s_axis_tlast,
    .m_axis_tdata, .m_axis_tvalid, .m_axis_tready, .m_axis_tlast,
    .pkt_in_valid (pin_valid),
    .pkt_in_ready (pin_ready),
    .pkt_in_data  (pin_data),
    .pkt_out_valid(pout_valid),
    .pkt_out_ready(pout_ready),
    .pkt_out_data (pout_data)
  );

  pasta_core #(.NUM_LANES(NUM_LANES), .XOF_FIFO_DEPTH(XOF_FIFO_DEPTH)) u_core (
    .clk, .rst_n,
    .start, .stop, .mode, .nonce, .ctr_base, .key_l, .key_r, .num_blocks,
    .busy, .done, .rounds, .blocks_out,
    .in_valid (pin_valid),
    .in_ready (pin_ready),
    .in_data  (pin_data),
    .out_valid(pout_valid),
    .out_ready(pout_ready),
    .out_data (pout_data)
  );

endmodule
