// axil_regs: AXI4-Lite slave holding the accelerator's control and status
// registers, through which the host starts jobs and watches their progress.
//
// Register map (byte addresses, 32-bit registers):
//   0x000 CTRL       W: bit 0 START (self-clearing pulse), bit 1 MODE
//                    (0 encrypt, 1 decrypt), bit 2 STOP (self-clearing
//                    pulse, abandons the running job).  R: bit 1 MODE.
//   0x004 STATUS     R: bit 0 BUSY, bit 1 DONE (set at the end of a job,
//                    cleared by START), bit 2 STOPPED (set by STOP,
//                    cleared by START).
//   0x008 NUM_WORDS  words in the job
//   0x00C NONCE_LO   0x010 NONCE_HI   public nonce N
//   0x014 CTR_LO     0x018 CTR_HI     block counter of the first block
//   0x01C ROUNDS     R: scheduler rounds used by the last job
//   0x020 BLOCKS     R: blocks finished in the current or last job
//   0x100 + 4k       KEY[k], k = 0 .. 2T-1: key words, k < T the left half
//                    x_L, k >= T the right half x_R (values below p)
//
// How it works. A write is taken when address and data are both valid and no
// response is pending (AWREADY and WREADY rise together), the response is OKAY
// for every address. A read is taken when no read data is pending; unmapped
// addresses read as 0. WSTRB is honoured per byte.
//
// From the paper: control and status over AXI-Lite, start/stop issued and
// status monitored by the host. The register map, and STOP abandoning the
// job, are this design's own.
module axil_regs
  import pasta_pkg::*;
#(
  parameter int unsigned ADDR_W = 12
) (
  input  logic              clk,
  input  logic              rst_n,
  // AXI4-Lite slave
  input  logic [ADDR_W-1:0] s_axil_awaddr,
  input  logic              s_axil_awvalid,
  output logic              s_axil_awready,
  input  logic [31:0]       s_axil_wdata,
  input  logic [3:0]        s_axil_wstrb,
  input  logic              s_axil_wvalid,
  output logic              s_axil_wready,
  output logic [1:0]        s_axil_bresp,
  output logic              s_axil_bvalid,
  input  logic              s_axil_bready,
  input  logic [ADDR_W-1:0] s_axil_araddr,
  input  logic              s_axil_arvalid,
  output logic              s_axil_arready,
  output logic [31:0]       s_axil_rdata,
  output logic [1:0]        s_axil_rresp,
  output logic              s_axil_rvalid,
  input  logic              s_axil_rready,
  // to / from the accelerator
  output logic              start,
  output logic              stop,
  output mode_e             mode,
  output logic [31:0]       num_words,
  output logic [63:0]       nonce,
  output logic [63:0]       ctr_base,
  output vec_t              key_l,
  output vec_t              key_r,
  input  logic              busy,
  input  logic              done,
  input  logic [31:0]       rounds,
  input  logic [31:0]       blocks
);

  localparam logic [ADDR_W-1:0] A_CTRL   = 'h000;
  localparam logic [ADDR_W-1:0] A_STATUS = 'h004;
  localparam logic [ADDR_W-1:0] A_NWORDS = 'h008;
  localparam logic [ADDR_W-1:0] A_NLO    = 'h00C;
  localparam logic [ADDR_W-1:0] A_NHI    = 'h010;
  localparam logic [ADDR_W-1:0] A_CLO    = 'h014;
  localparam logic [ADDR_W-1:0] A_CHI    = 'h018;
  localparam logic [ADDR_W-1:0] A_ROUNDS = 'h01C;
  localparam logic [ADDR_W-1:0] A_BLOCKS = 'h020;
  localparam logic [ADDR_W-1:0] A_KEY    = 'h100;

  logic        done_flag, stop_flag;
  logic        wr_fire, rd_fire;
  logic [31:0] key_mem [2*T];

  function automatic logic [31:0] apply_strb(logic [31:0] old, logic [31:0] d, logic [3:0] s);
    logic [31:0] r;
    for (int b = 0; b < 4; b++) r[8*b +: 8] = s[b] ? d[8*b +: 8] : old[8*b +: 8];
    return r;
  endfunction

  function automatic logic is_key(logic [ADDR_W-1:0] a);
    return (a >= A_KEY) && (a < A_KEY + ADDR_W'(8 * T)) && (a[1:0] == 2'b00);
  endfunction

  function automatic int unsigned key_idx(logic [ADDR_W-1:0] a);
    logic [ADDR_W-1:0] d;
    d = a - A_KEY;
    return 32'(d >> 2);
  endfunction

  assign wr_fire        = s_axil_awvalid && s_axil_wvalid && !s_axil_bvalid;
  assign s_axil_awready = wr_fire;
  assign s_axil_wready  = wr_fire;
  assign s_axil_bresp   = 2'b00;
  assign rd_fire        = s_axil_arvalid && !s_axil_rvalid;
  assign s_axil_arready = rd_fire;
  assign s_axil_rresp   = 2'b00;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      start         <= 1'b0;
      stop          <= 1'b0;
      stop_flag     <= 1'b0;
      mode          <= MODE_ENC;
      num_words     <= '0;
      nonce         <= '0;
      ctr_base      <= '0;
      done_flag     <= 1'b0;
      s_axil_bvalid <= 1'b0;
      s_axil_rvalid <= 1'b0;
      s_axil_rdata  <= '0;
      for (int k = 0; k < 2*T; k++) key_mem[k] <= '0;
    end else begin
      start <= 1'b0;
      stop  <= 1'b0;
      if (done) done_flag <= 1'b1;

      if (wr_fire) begin
        s_axil_bvalid <= 1'b1;
        case (1'b1)
          s_axil_awaddr == A_CTRL: begin
            if (s_axil_wstrb[0]) begin
              mode <= mode_e'(s_axil_wdata[1]);
              if (s_axil_wdata[2]) begin
                stop      <= 1'b1;
                stop_flag <= 1'b1;
              end else if (s_axil_wdata[0]) begin
                start     <= 1'b1;
                done_flag <= 1'b0;
                stop_flag <= 1'b0;
              end
            end
          end
          s_axil_awaddr == A_NWORDS: num_words <= apply_strb(num_words, s_axil_wdata, s_axil_wstrb);
          s_axil_awaddr == A_NLO: nonce[31:0]     <= apply_strb(nonce[31:0], s_axil_wdata, s_axil_wstrb);
          s_axil_awaddr == A_NHI: nonce[63:32]    <= apply_strb(nonce[63:32], s_axil_wdata, s_axil_wstrb);
          s_axil_awaddr == A_CLO: ctr_base[31:0]  <= apply_strb(ctr_base[31:0], s_axil_wdata, s_axil_wstrb);
          s_axil_awaddr == A_CHI: ctr_base[63:32] <= apply_strb(ctr_base[63:32], s_axil_wdata, s_axil_wstrb);
          is_key(s_axil_awaddr):
            key_mem[key_idx(s_axil_awaddr)] <= apply_strb(key_mem[key_idx(s_axil_awaddr)],
                                                          s_axil_wdata, s_axil_wstrb);
          default: ;
        endcase
      end else if (s_axil_bvalid && s_axil_bready) begin
        s_axil_bvalid <= 1'b0;
      end

      if (rd_fire) begin
        s_axil_rvalid <= 1'b1;
        case (1'b1)
          s_axil_araddr == A_CTRL:   s_axil_rdata <= {30'd0, mode, 1'b0};
          s_axil_araddr == A_STATUS: s_axil_rdata <= {29'd0, stop_flag, done_flag, busy};
          s_axil_araddr == A_NWORDS: s_axil_rdata <= num_words;
          s_axil_araddr == A_NLO:    s_axil_rdata <= nonce[31:0];
          s_axil_araddr == A_NHI:    s_axil_rdata <= nonce[63:32];
          s_axil_araddr == A_CLO:    s_axil_rdata <= ctr_base[31:0];
          s_axil_araddr == A_CHI:    s_axil_rdata <= ctr_base[63:32];
          s_axil_araddr == A_ROUNDS: s_axil_rdata <= rounds;
          s_axil_araddr == A_BLOCKS: s_axil_rdata <= blocks;
          is_key(s_axil_araddr):     s_axil_rdata <= key_mem[key_idx(s_axil_araddr)];
          default:                   s_axil_rdata <= '0;
        endcase
      end else if (s_axil_rvalid && s_axil_rready) begin
        s_axil_rvalid <= 1'b0;
      end
    end
  end

  always_comb begin
    for (int k = 0; k < T; k++) begin
      key_l[k] = key_mem[k];
      key_r[k] = key_mem[T + k];
    end
  end

  // AXI4-Lite rule: a response, once valid, stays valid until accepted.
  a_b_hold: assert property (@(posedge clk) disable iff (!rst_n)
                             s_axil_bvalid && !s_axil_bready |=> s_axil_bvalid)
    else $error("axil_regs: write response dropped");
  a_r_hold: assert property (@(posedge clk) disable iff (!rst_n)
                             s_axil_rvalid && !s_axil_rready |=> s_axil_rvalid && $stable(s_axil_rdata))
    else $error("axil_regs: read data dropped or changed");

endmodule
