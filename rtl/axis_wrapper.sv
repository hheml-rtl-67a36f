// axis_wrapper: the AXI4-Stream side of the accelerator. It stages the
// incoming word stream in the input FIFO, cuts it into T-word (17-word)
// packets for the cipher core, and turns result packets back into a word
// stream through the output FIFO.
//
// How it works. A job of `num_words` 32-bit words begins with `start`.
// Packer: words leave the input FIFO one per cycle into a packet register;
// after T words, or after the job's last word (the short last packet is padded
// with zeros), the packet is offered to the core. Unpacker: a result packet
// is taken when the previous one has been emitted, and its words go one per
// cycle into the output FIFO, only as many as the job has left, so padding is
// never returned. The last word of the job carries TLAST. Both FIFOs let the
// stream run on while the core is busy and absorb back-pressure on either side.
//
// Interface: slave stream s_axis_* (TLAST is accepted but not used: the job
// length comes from `num_words`), master stream m_axis_*, packet handshakes
// pkt_in_* (towards the core) and pkt_out_* (from the core). Timing: one word
// per cycle on each side when not stalled.
//
// From the paper: AXI4-Stream, input and output FIFOs, 17-word packets. This
// design's choices: FIFO depth, zero padding, length from a register, TLAST.
module axis_wrapper
  import pasta_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] num_words,
  // AXI4-Stream slave: words from the DMA
  input  logic [31:0] s_axis_tdata,
  input  logic        s_axis_tvalid,
  output logic        s_axis_tready,
  input  logic        s_axis_tlast,
  // AXI4-Stream master: words to the DMA
  output logic [31:0] m_axis_tdata,
  output logic        m_axis_tvalid,
  input  logic        m_axis_tready,
  output logic        m_axis_tlast,
  // packets to the core
  output logic        pkt_in_valid,
  input  logic        pkt_in_ready,
  output vec_t        pkt_in_data,
  // packets from the core
  input  logic        pkt_out_valid,
  output logic        pkt_out_ready,
  input  vec_t        pkt_out_data
);

  localparam int unsigned IW = $clog2(T + 1);
  localparam int unsigned CW = $clog2(FIFO_DEPTH + 1);

  // ---------------- input side ----------------
  logic        if_full, if_empty, if_rd;
  logic [31:0] if_data;
  logic [CW-1:0] if_count;
  logic [31:0] words_packed;
  logic [IW-1:0] pk_cnt;
  logic        pk_full;   // packet register holds a packet on offer

  sync_fifo #(.WIDTH(32), .DEPTH(FIFO_DEPTH)) u_in_fifo (
    .clk, .rst_n,
    .clr    (start),
    .wr_en  (s_axis_tvalid && s_axis_tready),
    .wr_data(s_axis_tdata),
    .full   (if_full),
    .rd_en  (if_rd),
    .rd_data(if_data),
    .empty  (if_empty),
    .count  (if_count)
  );

  assign s_axis_tready = !if_full && !start;
  assign if_rd         = !if_empty && !pk_full && (words_packed < num_words) && !start;
  assign pkt_in_valid  = pk_full;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      words_packed <= '0;
      pk_cnt       <= '0;
      pk_full      <= 1'b0;
      pkt_in_data  <= '0;
    end else if (start) begin
      words_packed <= '0;
      pk_cnt       <= '0;
      pk_full      <= 1'b0;
      pkt_in_data  <= '0;
    end else begin
      if (pk_full && pkt_in_ready) begin
        pk_full     <= 1'b0;
        pk_cnt      <= '0;
        pkt_in_data <= '0;
      end else if (if_rd) begin
        pkt_in_data[pk_cnt[$clog2(T)-1:0]] <= if_data;
        words_packed <= words_packed + 1'b1;
        pk_cnt       <= pk_cnt + 1'b1;
        if (pk_cnt == IW'(T - 1) || words_packed + 1'b1 == num_words)
          pk_full <= 1'b1;
      end
    end
  end

  // ---------------- output side ----------------
  logic        of_full, of_empty, of_wr;
  logic [32:0] of_rd_data;
  logic [CW-1:0] of_count;
  vec_t        up_data;
  logic        up_full;
  logic [IW-1:0] up_idx;
  logic [31:0] words_out;
  logic        up_last_of_pkt, up_last_of_job;

  assign pkt_out_ready  = !up_full && !start;
  assign up_last_of_job = (words_out + 1'b1 == num_words);
  assign up_last_of_pkt = (up_idx == IW'(T - 1)) || up_last_of_job;
  assign of_wr          = up_full && !of_full && !start;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      up_data   <= '0;
      up_full   <= 1'b0;
      up_idx    <= '0;
      words_out <= '0;
    end else if (start) begin
      up_full   <= 1'b0;
      up_idx    <= '0;
      words_out <= '0;
    end else begin
      if (pkt_out_valid && pkt_out_ready) begin
        up_data <= pkt_out_data;
        up_full <= 1'b1;
        up_idx  <= '0;
      end else if (of_wr) begin
        words_out <= words_out + 1'b1;
        up_idx    <= up_idx + 1'b1;
        if (up_last_of_pkt) up_full <= 1'b0;
      end
    end
  end

  sync_fifo #(.WIDTH(33), .DEPTH(FIFO_DEPTH)) u_out_fifo (
    .clk, .rst_n,
    .clr    (start),
    .wr_en  (of_wr),
    .wr_data({up_last_of_job, up_data[up_idx[$clog2(T)-1:0]]}),
    .full   (of_full),
    .rd_en  (m_axis_tvalid && m_axis_tready),
    .rd_data(of_rd_data),
    .empty  (of_empty),
    .count  (of_count)
  );

  assign m_axis_tvalid = !of_empty;
  assign m_axis_tdata  = of_rd_data[31:0];
  assign m_axis_tlast  = of_rd_data[32];

  // AXI4-Stream rule: once TVALID is high, TDATA/TLAST hold until TREADY.
  a_m_axis_hold: assert property (@(posedge clk) disable iff (!rst_n || start)
                   m_axis_tvalid && !m_axis_tready |=> m_axis_tvalid && $stable(m_axis_tdata))
    else $error("axis_wrapper: m_axis data changed while stalled");

endmodule
