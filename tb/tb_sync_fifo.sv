// tb_sync_fifo: random pushes and pops against a queue model, with checks of
// the full/empty flags, the fill count, simultaneous push and pop, and clear.
module tb_sync_fifo;
  localparam int unsigned WIDTH = 16, DEPTH = 8;
  logic clk = 1'b0, rst_n = 1'b0, clr = 1'b0, wr_en = 1'b0, rd_en = 1'b0, full, empty;
  logic [WIDTH-1:0] wr_data = '0, rd_data;
  logic [$clog2(DEPTH+1)-1:0] count;
  int checks = 0, failures = 0;
  logic [WIDTH-1:0] q [$];

  sync_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    int n_full = 0, n_both = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      check(count == q.size(), "count");
      check(empty == (q.size() == 0), "empty");
      check(full == (q.size() == DEPTH), "full");
      if (q.size() > 0) check(rd_data == q[0], "data");
      if (full) n_full++;
      // bias towards filling in the first half, draining in the second
      wr_en   = !full && ($urandom_range(99, 0) < ((it % 400) < 200 ? 80 : 30));
      rd_en   = !empty && ($urandom_range(99, 0) < ((it % 400) < 200 ? 30 : 80));
      wr_data = WIDTH'($urandom);
      clr     = (it == 1500);
      if (wr_en && rd_en) n_both++;
      @(posedge clk);
      #1;
      if (clr) q.delete();
      else begin
        if (rd_en) void'(q.pop_front());
        if (wr_en) q.push_back(wr_data);
      end
    end
    check(n_full > 0, "full reached");
    check(n_both > 0, "push and pop together");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
