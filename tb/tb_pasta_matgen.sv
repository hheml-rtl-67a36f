// tb_pasta_matgen: loads random first rows and compares every generated row
// with the rows of the full reference matrix.
module tb_pasta_matgen;
  import pasta_pkg::*;
  import pasta_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, load = 1'b0, step = 1'b0;
  vec_t v_in = '0, row;
  int checks = 0, failures = 0;

  pasta_matgen dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    uvec_t v;
    int unsigned m [T][T];
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 6; t++) begin
      v = random_vec(1'b1);
      if (t == 0) for (int j = 0; j < T; j++) v[j] = int'(P) - 1 - j;   // large values
      make_matrix(v, m);
      for (int j = 0; j < T; j++) v_in[j] = word_t'(v[j]);
      @(negedge clk) load = 1'b1;
      @(negedge clk) load = 1'b0;
      for (int i = 0; i < T; i++) begin
        for (int j = 0; j < T; j++) begin
          checks++;
          if (row[j] !== word_t'(m[i][j])) begin
            failures++;
            $display("test %0d row %0d col %0d: got %0d expected %0d", t, i, j, row[j], m[i][j]);
          end
        end
        step = 1'b1;
        @(negedge clk) step = 1'b0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
