// tb_lif_unit: random currents, potentials and thresholds against the
// reference LIF step (tau_m = 2, reset to zero on a spike); also checks that
// both spiking and non-spiking cases occur.
module tb_lif_unit;
  import ref_pkg::*;
  logic [15:0] i_cur, v_prev, v_th, v_next;
  logic spike;
  int checks = 0, failures = 0, nspk = 0;
  lif_unit dut (.i_cur, .v_prev, .v_th, .v_next, .spike);
  initial begin
    for (int n = 0; n < 20000; n++) begin
      h_t ev; bit es;
      i_cur  = hrand(1, 20);
      v_prev = hrand(1, 18);
      v_th   = {1'b0, 5'(12 + $urandom_range(5)), 10'($urandom)};
      if (n % 7 == 0) v_prev = 16'h0000;
      #1;
      rlif(i_cur, v_prev, v_th, ev, es);
      checks += 2;
      if (spike !== es) begin failures++; if (failures < 10) $display("FAIL spike i=%h v=%h th=%h", i_cur, v_prev, v_th); end
      if (!heq(v_next, ev)) begin failures++; if (failures < 10) $display("FAIL v i=%h v=%h -> %h exp %h", i_cur, v_prev, v_next, ev); end
      nspk += es;
    end
    checks++;
    if (nspk == 0 || nspk == 20000) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
