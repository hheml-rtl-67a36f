// tb_pasta_xof: draws five affine layers' worth of field elements (5 * 4 * T)
// from the XOF under random consumer stalls and compares each with the
// reference SHAKE128 sampler, for two nonce/counter seeds; the second seed is
// applied while elements of the first are still buffered, so re-seeding must
// discard them. Also checks that rejections and re-squeezes happened.
module tb_pasta_xof;
  import pasta_pkg::*;
  import pasta_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, init = 1'b0, elem_valid, elem_ready = 1'b0;
  logic [63:0] nonce = '0, counter = '0;
  word_t elem;
  int checks = 0, failures = 0;

  pasta_xof dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input bit [63:0] n, input bit [63:0] c);
    Shake128 sh;
    int rej = 0, got = 0, exp;
    sh = new(n, c);
    nonce = n;
    counter = c;
    @(negedge clk) init = 1'b1;
    @(negedge clk) init = 1'b0;
    while (got < 5 * 4 * T) begin
      elem_ready = ($urandom_range(3, 0) != 0);
      @(posedge clk);
      if (elem_valid && elem_ready) begin
        exp = sh.next_elem((got % (4 * T)) >= 2 * T, rej);
        checks++;
        if (elem !== word_t'(exp)) begin
          failures++;
          $display("elem %0d: got %0d expected %0d", got, elem, exp);
        end
        got++;
      end
      @(negedge clk);
    end
    elem_ready = 1'b0;
    checks++;
    if (rej == 0 || sh.perms < 2) begin
      failures++;
      $display("no rejection or no re-squeeze exercised");
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run(64'h0123_4567_89AB_CDEF, 64'd0);
    repeat (200) @(negedge clk);          // let the element FIFO fill up
    run(64'h0123_4567_89AB_CDEF, 64'd7);
    run({$urandom, $urandom}, {$urandom, $urandom});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
