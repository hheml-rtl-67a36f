// sync_fifo: single-clock first-in first-out buffer, used as the input FIFO and
// output FIFO of the stream wrapper and as the small element buffer behind
// each XOF.
//
// Words are written with `wr_en` while `full` is low and read with `rd_en`
// while `empty` is low. The read port is show-ahead: `rd_data` is the oldest
// word whenever `empty` is low, and `rd_en` pops it at the clock edge. A write
// and a read in the same cycle are both accepted. `clr` empties the FIFO
// synchronously. The storage is a plain array that synthesis may map to block
// RAM; `count` gives the fill level.
//
// The paper states that input and output FIFOs stage the streams but gives no
// depth or interface; both are this design's choice.
module sync_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 1024
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clr,
  input  logic                     wr_en,
  input  logic [WIDTH-1:0]         wr_data,
  output logic                     full,
  input  logic                     rd_en,
  output logic [WIDTH-1:0]         rd_data,
  output logic                     empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;
  logic             do_wr, do_rd;

  assign full    = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign empty   = (count == '0);
  assign do_wr   = wr_en && !full;
  assign do_rd   = rd_en && !empty;
  assign rd_data = mem[rd_ptr];

  function automatic logic [AW-1:0] inc(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + AW'(1);
  endfunction

  always_ff @(posedge clk) begin
    if (do_wr) mem[wr_ptr] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else if (clr) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_wr) wr_ptr <= inc(wr_ptr);
      if (do_rd) rd_ptr <= inc(rd_ptr);
      case ({do_wr, do_rd})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(wr_en && full))
    else $error("sync_fifo: write while full");
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(rd_en && empty))
    else $error("sync_fifo: read while empty");

endmodule
