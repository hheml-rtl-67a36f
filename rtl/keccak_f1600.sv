// keccak_f1600: the Keccak-f[1600] permutation (FIPS 202) behind the SHAKE128
// XOF, computed one round per clock.
//
// A pulse on `start` takes `state_in` through round 0 at that clock edge; the
// remaining rounds (theta, rho, pi, chi, iota each) run on the following
// cycles and `done` pulses for one cycle when `state_out` holds the permuted
// state. `state_out` keeps its value until the next `start`. Latency: `done`
// and the result come 24 clock edges after the edge that samples `start`;
// `busy` is high in between. Lane (x, y) of the state is element x + 5*y of the packed array,
// bit 0 of a lane is the least significant bit, as in FIPS 202.
//
// The paper names SHAKE128 as its XOF but does not describe its hardware; the
// round-per-cycle structure is this design's choice.
module keccak_f1600 (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [24:0][63:0] state_in,
  output logic              busy,
  output logic              done,
  output logic [24:0][63:0] state_out
);

  localparam int unsigned NROUNDS = 24;

  localparam logic [63:0] RC [NROUNDS] = '{
    64'h0000000000000001, 64'h0000000000008082, 64'h800000000000808A,
    64'h8000000080008000, 64'h000000000000808B, 64'h0000000080000001,
    64'h8000000080008081, 64'h8000000000008009, 64'h000000000000008A,
    64'h0000000000000088, 64'h0000000080008009, 64'h000000008000000A,
    64'h000000008000808B, 64'h800000000000008B, 64'h8000000000008089,
    64'h8000000000008003, 64'h8000000000008002, 64'h8000000000000080,
    64'h000000000000800A, 64'h800000008000000A, 64'h8000000080008081,
    64'h8000000000008080, 64'h0000000080000001, 64'h8000000080008008
  };

  // rho rotation offsets, indexed x + 5*y
  localparam int unsigned ROT [25] = '{
     0,  1, 62, 28, 27,
    36, 44,  6, 55, 20,
     3, 10, 43, 25, 39,
    41, 45, 15, 21,  8,
    18,  2, 61, 56, 14
  };

  function automatic logic [63:0] rotl(logic [63:0] v, int unsigned n);
    return (n == 0) ? v : ((v << n) | (v >> (64 - n)));
  endfunction

  function automatic logic [24:0][63:0] round_fn(logic [24:0][63:0] a, logic [63:0] rc);
    logic [4:0][63:0]  c, d;
    logic [24:0][63:0] b, e;
    for (int x = 0; x < 5; x++)
      c[x] = a[x] ^ a[x+5] ^ a[x+10] ^ a[x+15] ^ a[x+20];
    for (int x = 0; x < 5; x++)
      d[x] = c[(x+4)%5] ^ rotl(c[(x+1)%5], 1);
    // theta, then rho and pi: B[y, 2x+3y] = rot(A[x, y])
    for (int x = 0; x < 5; x++)
      for (int y = 0; y < 5; y++)
        b[y + 5*((2*x + 3*y) % 5)] = rotl(a[x + 5*y] ^ d[x], ROT[x + 5*y]);
    // chi
    for (int x = 0; x < 5; x++)
      for (int y = 0; y < 5; y++)
        e[x + 5*y] = b[x + 5*y] ^ (~b[(x+1)%5 + 5*y] & b[(x+2)%5 + 5*y]);
    // iota
    e[0] = e[0] ^ rc;
    return e;
  endfunction

  logic [4:0]        rnd;
  logic [24:0][63:0] rnd_in, rnd_out;

  // one round-function instance, fed from the input on `start`
  assign rnd_in  = start ? state_in : state_out;
  assign rnd_out = round_fn(rnd_in, start ? RC[0] : RC[rnd]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_out <= '0;
      rnd       <= '0;
      busy      <= 1'b0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        state_out <= rnd_out;
        rnd       <= 5'd1;
        busy      <= 1'b1;
      end else if (busy) begin
        state_out <= rnd_out;
        if (rnd == 5'(NROUNDS - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
        rnd <= rnd + 5'd1;
      end
    end
  end

endmodule
