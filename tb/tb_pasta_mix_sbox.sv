// tb_pasta_mix_sbox: random half-states through the mix and each of the three
// S-box selections, against the reference mix, Feistel S-box and cube.
module tb_pasta_mix_sbox;
  import pasta_pkg::*;
  import pasta_ref_pkg::*;

  vec_t xl, xr, yl, yr;
  sbox_e sel;
  int checks = 0, failures = 0;

  pasta_mix_sbox dut (.*);

  initial begin
    uvec_t l, r;
    int unsigned s;
    for (int t = 0; t < 60; t++) begin
      l = random_vec(1'b0);
      r = random_vec(1'b0);
      sel = sbox_e'(t % 3);
      for (int j = 0; j < T; j++) begin xl[j] = word_t'(l[j]); xr[j] = word_t'(r[j]); end
      #1;
      for (int j = 0; j < T; j++) begin
        s    = fadd(l[j], r[j]);
        l[j] = fadd(l[j], s);
        r[j] = fadd(r[j], s);
      end
      case (sel)
        SB_FEISTEL: begin sbox_feistel(l); sbox_feistel(r); end
        SB_CUBE:    begin sbox_cube(l);    sbox_cube(r);    end
        default: ;
      endcase
      for (int j = 0; j < T; j++) begin
        checks += 2;
        if (yl[j] !== word_t'(l[j]) || yr[j] !== word_t'(r[j])) begin
          failures++;
          $display("sel %0d element %0d: got %0d/%0d expected %0d/%0d", sel, j, yl[j], yr[j], l[j], r[j]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
