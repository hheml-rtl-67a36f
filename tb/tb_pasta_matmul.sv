// tb_pasta_matmul: writes all T result elements from random rows and state
// vectors and compares with reference dot products, including all-(p-1)
// operands for the widest intermediate sum.
module tb_pasta_matmul;
  import pasta_pkg::*;
  import pasta_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  logic [$clog2(T)-1:0] idx = '0;
  vec_t row = '0, x = '0, y;
  int checks = 0, failures = 0;

  pasta_matmul dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    uvec_t xv, rv;
    int unsigned exp [T];
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 8; t++) begin
      xv = random_vec(1'b0);
      if (t == 0) for (int j = 0; j < T; j++) xv[j] = int'(P) - 1;
      for (int j = 0; j < T; j++) x[j] = word_t'(xv[j]);
      for (int i = 0; i < T; i++) begin
        longint unsigned acc;
        acc = 0;
        rv = random_vec(1'b0);
        if (t == 0) for (int j = 0; j < T; j++) rv[j] = int'(P) - 1;
        for (int j = 0; j < T; j++) begin
          row[j] = word_t'(rv[j]);
          acc = acc + longint'(rv[j]) * longint'(xv[j]);
        end
        exp[i] = int'(acc % longint'(P));
        idx = ($clog2(T))'(i);
        en  = 1'b1;
        @(negedge clk) en = 1'b0;
      end
      for (int i = 0; i < T; i++) begin
        checks++;
        if (y[i] !== word_t'(exp[i])) begin
          failures++;
          $display("test %0d y[%0d]: got %0d expected %0d", t, i, y[i], exp[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
