// pasta_xof: SHAKE128 extendable-output function that feeds one Pasta lane with
// field elements (the XOF1 / XOF2 boxes of the accelerator).
//
// How it works. A pulse on `init` seeds the sponge with the public nonce N and
// the block counter i (8 bytes each, big-endian, absorbed as one padded
// SHAKE128 block of 168 bytes) and starts Keccak-f[1600]. The XOF then
// squeezes the 21 rate lanes one per cycle; each 64-bit lane is byte-swapped to
// a big-endian integer, masked to PBITS bits and kept only if it is below p
// (rejection sampling). After the 21st lane the permutation runs again. The
// XOF runs ahead of its consumer into a small FIFO and stalls when that FIFO is
// full, so keystream generation overlaps the arithmetic of the lane.
//
// Element schedule. Each affine layer takes 4*T elements in the order: first
// row of the left matrix, first row of the right matrix, left round constants,
// right round constants. The 2*T matrix elements must be non-zero, the 4*T
// element counter here enforces that; constants may be zero.
//
// Interface: `elem_valid`/`elem_ready` handshake on `elem`; `init` discards
// anything buffered. Timing: 24 cycles per permutation plus one cycle per lane.
//
// From the paper: SHAKE128 as XOF, seeded from nonce and block counter, one XOF
// per lane. This design's choices: byte order, 64-bit draws, rejection
// sampling, non-zero matrix elements, FIFO depth (as in the Pasta reference).
module pasta_xof
  import pasta_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        init,
  input  logic [63:0] nonce,
  input  logic [63:0] counter,
  output logic        elem_valid,
  input  logic        elem_ready,
  output word_t       elem
);

  localparam int unsigned RATE_LANES = 21;          // 1344-bit rate
  localparam int unsigned PER_LAYER  = 4 * T;
  localparam logic [63:0] MASK       = (64'd1 << PBITS) - 64'd1;

  typedef enum logic [1:0] { S_IDLE, S_PERM, S_SQUEEZE } state_e;
  state_e state;

  logic              k_start, k_busy, k_done;
  logic [24:0][63:0] k_in, k_out;
  logic [4:0]        lane_idx;
  logic [$clog2(PER_LAYER)-1:0] elem_cnt;

  logic        f_full, f_empty, f_push;
  logic [$clog2(FIFO_DEPTH+1)-1:0] f_count;
  logic [63:0] cand;
  logic        allow_zero, accept;

  keccak_f1600 u_keccak (
    .clk, .rst_n,
    .start    (k_start),
    .state_in (k_in),
    .busy     (k_busy),
    .done     (k_done),
    .state_out(k_out)
  );

  function automatic logic [63:0] bswap64(logic [63:0] v);
    logic [63:0] r;
    for (int b = 0; b < 8; b++) r[8*b +: 8] = v[8*(7-b) +: 8];
    return r;
  endfunction

  // Absorb block: nonce || counter, SHAKE padding 0x1F ... 0x80.
  function automatic logic [24:0][63:0] seed_state(logic [63:0] n, logic [63:0] c);
    logic [24:0][63:0] s;
    s     = '0;
    s[0]  = bswap64(n);
    s[1]  = bswap64(c);
    s[2]  = 64'h0000_0000_0000_001F;
    s[20] = 64'h8000_0000_0000_0000;
    return s;
  endfunction

  assign cand       = bswap64(k_out[lane_idx]) & MASK;
  assign allow_zero = (elem_cnt >= ($clog2(PER_LAYER))'(2 * T));
  assign accept     = (cand < 64'(P)) && (allow_zero || cand != 64'd0);
  assign f_push     = (state == S_SQUEEZE) && !f_full && accept;

  always_comb begin
    k_start = 1'b0;
    k_in    = k_out;
    if (init) begin
      k_start = 1'b1;
      k_in    = seed_state(nonce, counter);
    end else if (state == S_SQUEEZE && !f_full && lane_idx == 5'(RATE_LANES - 1)) begin
      k_start = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      lane_idx <= '0;
      elem_cnt <= '0;
    end else if (init) begin
      state    <= S_PERM;
      lane_idx <= '0;
      elem_cnt <= '0;
    end else begin
      case (state)
        S_PERM: if (k_done) begin
          state    <= S_SQUEEZE;
          lane_idx <= '0;
        end
        S_SQUEEZE: if (!f_full) begin
          if (accept)
            elem_cnt <= (elem_cnt == ($clog2(PER_LAYER))'(PER_LAYER - 1)) ? '0 : elem_cnt + 1'b1;
          if (lane_idx == 5'(RATE_LANES - 1)) state <= S_PERM;
          else lane_idx <= lane_idx + 5'd1;
        end
        default: ;
      endcase
    end
  end

  sync_fifo #(.WIDTH(W), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .clr    (init),
    .wr_en  (f_push),
    .wr_data(word_t'(cand)),
    .full   (f_full),
    .rd_en  (elem_valid && elem_ready),
    .rd_data(elem),
    .empty  (f_empty),
    .count  (f_count)
  );

  assign elem_valid = !f_empty;

endmodule
