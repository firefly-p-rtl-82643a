// tb_trace_unit: trace recurrences S <- lambda*S + s for random decay
// constants and spike trains (and real-valued inputs), against the
// reference.
module tb_trace_unit;
  import ref_pkg::*;
  logic [15:0] s_prev, lambda_, x, s_next;
  int checks = 0, failures = 0;
  trace_unit dut (.s_prev, .lambda_, .x, .s_next);
  initial begin
    for (int run = 0; run < 200; run++) begin
      h_t s;
      s = 0;
      lambda_ = {1'b0, 5'(13 + $urandom_range(1)), 10'($urandom)};  // 0.25 .. <1
      for (int t = 0; t < 50; t++) begin
        x = (run % 4 == 3) ? hrand(8, 16) : (($urandom_range(2) == 0) ? 16'h3C00 : 16'h0000);
        s_prev = s;
        #1;
        s = rtrace(s, lambda_, x);
        checks++;
        if (!heq(s_next, s)) begin failures++; if (failures < 10) $display("FAIL trace %h*%h+%h = %h exp %h", lambda_, s_prev, x, s_next, s); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
