// tb_neuron: random sums, BN coefficients, potentials and thresholds against
// an integer model of BN (v = (a*acc >>> 4) + b), saturating integration,
// the U >= theta firing rule and reset-by-subtraction. Also counts that
// firing, saturation and first-timestep cases were all exercised.
module tb_neuron;
  import bsnn_pkg::*;

  acc_t acc;
  bn_coef_t bn;
  mem_t theta, u_in, u_out;
  logic first, spike;
  int checks = 0, failures = 0;
  int n_spk = 0, n_sat = 0, n_first = 0;

  neuron dut (.*);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 50000; t++) begin
      int prod, v, u, s, es;
      acc   = acc_t'($urandom_range(0, 200)) - acc_t'(100);
      if (t % 10 == 0) acc = acc_t'($urandom_range(0, 9000)) - acc_t'(4500);
      bn.a  = bn_t'($urandom);
      bn.b  = bn_t'($urandom);
      theta = mem_t'($urandom_range(1, 127));
      u_in  = mem_t'($urandom);
      first = ($urandom_range(0, 7) == 0);
      #1;
      prod = int'(bn.a) * int'(acc);
      v = (prod >>> 4) + int'(bn.b);
      u = first ? 0 : int'(u_in);
      s = u + v;
      if (s > 127) begin s = 127; n_sat++; end
      if (s < -128) begin s = -128; n_sat++; end
      es = (s >= int'(theta));
      if (es) begin s = s - int'(theta); n_spk++; end
      if (first) n_first++;
      checks++;
      if (int'(spike) != es || int'(u_out) != s) begin
        failures++;
        if (failures < 10) $display("FAIL acc=%0d a=%0d b=%0d th=%0d u=%0d first=%b -> %b %0d exp %0d %0d",
                                    acc, bn.a, bn.b, theta, u_in, first, spike, u_out, es, s);
      end
    end
    checks++; if (n_spk == 0 || n_sat == 0 || n_first == 0) failures++;
    $display("spikes=%0d saturations=%0d first=%0d", n_spk, n_sat, n_first);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
