// tb_plasticity_pe: feeds a new random synapse every cycle (with random
// bubbles) and checks w_new and dw against the reference rule exactly three
// cycles after each input, and that out_valid is high only then.
module tb_plasticity_pe;
  import ref_pkg::*;
  import fp16_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0;
  prm_t prm;
  logic [15:0] s_pre, s_post, w_old, dw, w_new;
  logic out_valid;
  int checks = 0, failures = 0;
  h_t exp_w [$];
  h_t exp_dw [$];
  int exp_t [$];
  int cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  plasticity_pe dut (.clk, .rst_n, .in_valid, .prm, .s_pre, .s_post, .w_old, .out_valid, .dw, .w_new);

  always @(negedge clk) if (rst_n) begin
    if (out_valid) begin
      checks += 3;
      if (exp_w.size() == 0) begin failures++; $display("FAIL unexpected out_valid"); end
      else begin
        h_t ew, ed; int et;
        ew = exp_w.pop_front(); ed = exp_dw.pop_front(); et = exp_t.pop_front();
        if (!heq(w_new, ew)) begin failures++; if (failures < 10) $display("FAIL w_new %h exp %h", w_new, ew); end
        if (!heq(dw, ed))    begin failures++; if (failures < 10) $display("FAIL dw %h exp %h", dw, ed); end
        if (cyc - et != 3)   begin failures++; if (failures < 10) $display("FAIL latency %0d", cyc - et); end
      end
    end
  end

  initial begin
    prm = '0; s_pre = 0; s_post = 0; w_old = 0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      in_valid = ($urandom_range(4) != 0);
      prm.alpha = hrand(5, 15); prm.beta = hrand(5, 15); prm.gamma = hrand(5, 15); prm.delta = hrand(3, 12);
      s_pre  = ($urandom_range(5) == 0) ? 16'h0000 : {1'b0, 5'(12 + $urandom_range(5)), 10'($urandom)};
      s_post = ($urandom_range(5) == 0) ? 16'h0000 : {1'b0, 5'(12 + $urandom_range(5)), 10'($urandom)};
      w_old  = hrand(8, 16);
      if (in_valid) begin
        h_t a, bc;
        a  = radd(rmul(prm.alpha, rmul(s_pre, s_post)), prm.delta);
        bc = radd(rmul(prm.beta, s_pre), rmul(prm.gamma, s_post));
        exp_dw.push_back(radd(a, bc));
        exp_w.push_back(rplast(prm.alpha, prm.beta, prm.gamma, prm.delta, s_pre, s_post, w_old));
        exp_t.push_back(cyc);
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (6) @(negedge clk);
    checks++;
    if (exp_w.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
