// pasta_lane: one keystream engine of the accelerator. It computes
//     ks = left_T( Pasta-pi(sk, N, i) )
//        = left_T( A_R . S . A_{R-1} . S' . ... . A_1 . S' . A_0 (sk) )
// for one block counter i, with its own XOF (XOF1 or XOF2) and its own MatGen,
// MatMul, VecAdd and Mix & S-box stages.
//
// How it works. The state starts as the key, x_L || x_R = sk. For each affine
// layer j = 0 .. R the controller
//   1. takes T elements from the XOF as the first row of M_L (LOAD),
//      lets MatGen produce the T rows while MatMul forms M_L . x_L (MUL),
//      and writes the product back to x_L (WB);
//   2. does the same for M_R . x_R;
//   3. takes T round constants and adds them to x_L (VecAdd), then T more for
//      x_R;
//   4. mixes the halves and applies S' (j < R-1), S (j = R-1) or nothing
//      (j = R) in one cycle (MIX).
// After layer R the left half is the keystream block. The XOF keeps squeezing
// into its FIFO while the arithmetic runs, which is the overlap of XOF and
// MatGen/MatMul time slots drawn in the paper's pipeline figure.
//
// Interface: `start` (one cycle, accepted when `busy` is low) latches
// `counter` and the key; `halt` returns the lane to idle at once (the XOF is
// re-seeded by the next `start`); `nonce` must be stable while the lane is busy.
// `ks_valid` rises when `ks` is ready and stays high until `ack` or the next
// `start`. Timing: per layer 2*(T+2) arithmetic cycles plus
// the cycles spent waiting for 4*T accepted XOF elements, which dominate.
//
// From the paper: the layer structure of Pasta-pi, the S-boxes, the order
// M_L, M_R, then round constants of L and R (its Fig. 4). This design's
// choices: one element per cycle into the vector buffer, the state encoding
// and the handshake.
module pasta_lane
  import pasta_pkg::*;
#(
  parameter int unsigned XOF_FIFO_DEPTH = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        halt,
  input  logic [63:0] nonce,
  input  logic [63:0] counter,
  input  vec_t        key_l,
  input  vec_t        key_r,
  output logic        busy,
  output logic        ks_valid,
  input  logic        ack,
  output vec_t        ks
);

  typedef enum logic [2:0] { L_IDLE, L_LOAD, L_MUL, L_WB, L_MIX, L_DONE } lstate_e;
  typedef enum logic [1:0] { PH_ML, PH_MR, PH_RCL, PH_RCR } phase_e;

  localparam int unsigned IW = $clog2(T);

  lstate_e state;
  phase_e  phase;
  logic [$clog2(R+1)-1:0] layer;
  logic [IW-1:0]          cnt;

  vec_t  xl, xr, vbuf, vbuf_next, mrow, my, va_y, ms_l, ms_r;
  logic  e_valid, e_ready;
  word_t e_data;
  logic  g_load, g_step, m_en;
  sbox_e sel;

  pasta_xof #(.FIFO_DEPTH(XOF_FIFO_DEPTH)) u_xof (
    .clk, .rst_n,
    .init      (start),
    .nonce     (nonce),
    .counter   (counter),
    .elem_valid(e_valid),
    .elem_ready(e_ready),
    .elem      (e_data)
  );

  pasta_matgen u_matgen (
    .clk, .rst_n,
    .load (g_load),
    .v_in (vbuf_next),
    .step (g_step),
    .row  (mrow)
  );

  pasta_matmul u_matmul (
    .clk, .rst_n,
    .en  (m_en),
    .idx (cnt),
    .row (mrow),
    .x   ((phase == PH_ML) ? xl : xr),
    .y   (my)
  );

  pasta_vecadd u_vecadd (
    .a (phase == PH_RCL ? xl : xr),
    .b (vbuf_next),
    .y (va_y)
  );

  pasta_mix_sbox u_mix (
    .xl (xl),
    .xr (xr),
    .sel(sel),
    .yl (ms_l),
    .yr (ms_r)
  );

  always_comb begin
    if (layer == ($clog2(R+1))'(R))          sel = SB_NONE;
    else if (layer == ($clog2(R+1))'(R - 1)) sel = SB_CUBE;
    else                                     sel = SB_FEISTEL;
  end

  // Vector buffer including the element arriving this cycle.
  always_comb begin
    vbuf_next      = vbuf;
    vbuf_next[cnt] = e_data;
  end

  logic last_elem;
  assign e_ready   = (state == L_LOAD);
  assign last_elem = (state == L_LOAD) && e_valid && (cnt == IW'(T - 1));
  assign g_load    = last_elem && (phase == PH_ML || phase == PH_MR);
  assign g_step    = (state == L_MUL);
  assign m_en      = (state == L_MUL);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= L_IDLE;
      phase <= PH_ML;
      layer <= '0;
      cnt   <= '0;
      xl    <= '0;
      xr    <= '0;
      vbuf  <= '0;
    end else if (halt) begin
      state <= L_IDLE;
    end else if (start && !busy) begin
      xl    <= key_l;
      xr    <= key_r;
      layer <= '0;
      phase <= PH_ML;
      cnt   <= '0;
      state <= L_LOAD;
    end else begin
      case (state)
        L_IDLE: ;
        L_LOAD: if (e_valid) begin
          vbuf <= vbuf_next;
          if (cnt == IW'(T - 1)) begin
            cnt <= '0;
            case (phase)
              PH_ML, PH_MR: state <= L_MUL;
              PH_RCL: begin
                xl    <= va_y;
                phase <= PH_RCR;
              end
              default: begin   // PH_RCR
                xr    <= va_y;
                state <= L_MIX;
              end
            endcase
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        L_MUL: begin
          if (cnt == IW'(T - 1)) begin
            cnt   <= '0;
            state <= L_WB;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        L_WB: begin
          if (phase == PH_ML) begin
            xl    <= my;
            phase <= PH_MR;
          end else begin
            xr    <= my;
            phase <= PH_RCL;
          end
          state <= L_LOAD;
        end
        L_MIX: begin
          xl    <= ms_l;
          xr    <= ms_r;
          phase <= PH_ML;
          if (layer == ($clog2(R+1))'(R)) begin
            state <= L_DONE;
          end else begin
            layer <= layer + 1'b1;
            state <= L_LOAD;
          end
        end
        L_DONE: if (ack) state <= L_IDLE;
        default: state <= L_IDLE;
      endcase
    end
  end

  assign busy     = (state != L_IDLE) && (state != L_DONE);
  assign ks_valid = (state == L_DONE);
  assign ks       = xl;

  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy)
    else $error("pasta_lane: start while not idle");

endmodule
