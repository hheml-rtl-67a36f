// tb_pasta_vecadd: random and boundary operands (0, p-1) against the reference
// modular addition.
module tb_pasta_vecadd;
  import pasta_pkg::*;
  import pasta_ref_pkg::*;

  vec_t a, b, y;
  int checks = 0, failures = 0;

  pasta_vecadd dut (.*);

  initial begin
    uvec_t av, bv;
    for (int t = 0; t < 50; t++) begin
      av = random_vec(1'b0);
      bv = random_vec(1'b0);
      if (t == 0) begin av[0] = int'(P) - 1; bv[0] = int'(P) - 1; av[1] = 0; bv[1] = 0;
                        av[2] = int'(P) - 1; bv[2] = 1; end
      for (int j = 0; j < T; j++) begin a[j] = word_t'(av[j]); b[j] = word_t'(bv[j]); end
      #1;
      for (int j = 0; j < T; j++) begin
        checks++;
        if (y[j] !== word_t'(fadd(av[j], bv[j]))) begin
          failures++;
          $display("y[%0d] = %0d for %0d + %0d", j, y[j], av[j], bv[j]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
