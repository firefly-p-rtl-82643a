// tb_psum_pe: streams random weight/input pairs (a quarter of the inputs
// zero) into both PE variants and compares each psum with a reference
// accumulation; checks that zero inputs are gated and that clr empties the
// register.
module tb_psum_pe;
  import ref_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0, en = 0;
  logic [15:0] w, x, xs, psum_m, psum_s;
  logic gated_m, gated_s;
  int checks = 0, failures = 0, ngated = 0;
  h_t ref_m, ref_s;

  always #5 clk = ~clk;

  psum_pe #(.SPIKE_INPUT(1'b0)) dut_m (.clk, .rst_n, .clr, .en, .w, .x, .psum(psum_m), .gated(gated_m));
  psum_pe #(.SPIKE_INPUT(1'b1)) dut_s (.clk, .rst_n, .clr, .en, .w, .x(xs), .psum(psum_s), .gated(gated_s));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    w = 0; x = 0; xs = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    ref_m = 0; ref_s = 0;
    for (int blk = 0; blk < 40; blk++) begin
      @(negedge clk); clr = 1; en = 0;
      @(negedge clk); clr = 0;
      chk(heq(psum_m, 0) && heq(psum_s, 0), "clear");
      ref_m = 0; ref_s = 0;
      for (int i = 0; i < 32; i++) begin
        w  = hrand(8, 18);
        x  = ($urandom_range(3) == 0) ? 16'h0000 : hrand(10, 17);
        xs = ($urandom_range(1) == 0) ? 16'h0000 : 16'h3C00;
        en = 1'b1;
        #1;
        chk(gated_m == (x[14:10] == 0), "gated flag");
        if (gated_m) ngated++;
        if (x[14:10] != 0)  ref_m = radd(ref_m, rmul(w, x));
        if (xs[14:10] != 0) ref_s = radd(ref_s, w);
        @(negedge clk);
        en = 1'b0;
        chk(heq(psum_m, ref_m), "mac psum");
        chk(heq(psum_s, ref_s), "spike psum");
      end
    end
    chk(ngated > 0, "gating exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
