// tb_bernoulli_sampler: checks the 64 comparators and the weight code.
//
// Random (p, r) pairs, plus the edge cases p = r, p = 0 and p = 255, are
// compared with w = +1 (2'b01) when p > r and -1 (2'b11) otherwise. A second
// phase holds p fixed and draws r at random to check that the fraction of +1
// weights is p/256.
module tb_bernoulli_sampler;
  import bsnn_pkg::*;

  rn_t p [64], r [64];
  wt_t w [64];
  int checks = 0, failures = 0;

  bernoulli_sampler dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      for (int i = 0; i < 64; i++) begin
        case (t % 4)
          0: begin p[i] = $urandom; r[i] = p[i]; end
          1: begin p[i] = (i % 2) ? 8'd0 : 8'd255; r[i] = $urandom; end
          default: begin p[i] = $urandom; r[i] = $urandom; end
        endcase
      end
      #1;
      for (int i = 0; i < 64; i++) begin
        logic [1:0] exp;
        exp = (int'(p[i]) > int'(r[i])) ? 2'b01 : 2'b11;
        checks++;
        if (w[i] !== exp) begin
          failures++;
          if (failures < 10) $display("FAIL p=%0d r=%0d w=%b", p[i], r[i], w[i]);
        end
      end
    end
    // statistics: Pr(w=+1) = p/256
    begin
      int ones [64];
      for (int i = 0; i < 64; i++) begin ones[i] = 0; p[i] = 8'(i * 4); end
      for (int t = 0; t < 4096; t++) begin
        for (int i = 0; i < 64; i++) r[i] = $urandom;
        #1;
        for (int i = 0; i < 64; i++) if (w[i] == 2'b01) ones[i]++;
      end
      for (int i = 0; i < 64; i++) begin
        int expn;
        expn = i * 4 * 16;   // 4096 * p / 256
        checks++;
        if (ones[i] < expn - 200 || ones[i] > expn + 200) begin
          failures++; $display("FAIL stats p=%0d ones=%0d exp=%0d", p[i], ones[i], expn);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
