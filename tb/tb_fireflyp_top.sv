// tb_fireflyp_top: the whole accelerator, end to end, at reduced size
// (P = 4, 6 inputs, 12 hidden, 3 outputs) for 8 time steps, against a
// sequential reference of the two layers (forward then update, layer 1 then
// layer 2, every step). Plasticity coefficients are loaded through the host
// port; weights start at zero and grow under the learned rule, so the
// network begins silent and starts to spike. The input handshake is
// throttled at random. Checked: the output spikes of every step, every
// weight of both layers at the end, and that each mechanism of the design
// occurred: prologue, phase A (layer-1 update beside layer-2 forward),
// phase B (layer-2 update beside layer-1 forward), epilogue, a forward pass
// overlapping its own layer's update, write-priority holds of weight reads,
// zero-gated MACs, spikes in both layers and input back-pressure.
module tb_fireflyp_top;
  import ref_pkg::*;
  import fp16_pkg::*;
  import sched_pkg::*;
  localparam int P = 4, N_IN = 6, N_HID = 12, N_OUT = 3, T = 8;
  localparam int NT1 = (N_HID + P - 1) / P, NT2 = (N_OUT + P - 1) / P;
  logic clk = 0, rst_n = 0, start = 0;
  logic [15:0] num_steps = 16'(T);
  logic busy, done, in_valid = 0, in_ready, out_valid;
  phase_t phase;
  fp16_t v_th = 16'h3400, lambda_ = 16'h3A00;   // 0.25, 0.75
  logic [N_IN-1:0][15:0] in_data = '0;
  logic [N_OUT-1:0] out_spikes;
  logic prm_we = 0, prm_layer = 0;
  logic [15:0] prm_addr = 0;
  logic [7:0] prm_lane = 0;
  prm_t prm_data = '0;
  logic [31:0] stat_w_stall, stat_tr_stall, stat_gated, stat_overlap;
  int checks = 0, failures = 0;
  int n_pro = 0, n_a = 0, n_b = 0, n_epi = 0, n_bp = 0, n_spk1 = 0, n_spk2 = 0, n_out = 0;
  int t_in = 0, cyc = 0, step_start [T + 1], step_len_max = 0;
  h_t xs [T][];
  layer_ref m1, m2;

  always #5 clk = ~clk;

  fireflyp_top #(.P(P), .N_IN(N_IN), .N_HID(N_HID), .N_OUT(N_OUT)) dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 12) $display("FAIL %s", what); end
  endtask

  // input source: presents step t_in's vector, with random idle cycles
  always @(negedge clk) if (rst_n) begin
    in_valid = (t_in < T) && ($urandom_range(3) != 0);
    if (t_in < T) for (int j = 0; j < N_IN; j++) in_data[j] = xs[t_in][j];
  end

  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (in_ready && in_valid) begin
      if (t_in > 0) step_len_max = (cyc - step_start[t_in - 1] > step_len_max && t_in > 1) ? cyc - step_start[t_in - 1] : step_len_max;
      step_start[t_in] = cyc;
      t_in <= t_in + 1;
    end
    if (busy && t_in < T && !in_valid && dut.u_sched.f1s == dut.u_sched.f1d && dut.u_sched.f1s < T && dut.u_sched.ctl == 2'd2) n_bp++;
    if (phase == PH_PROLOGUE && dut.l1f_busy) n_pro++;
    if (phase == PH_EPILOGUE && dut.l2u_busy) n_epi++;
    if (dut.l1u_busy && dut.l2f_busy) n_a++;
    if (dut.l2u_busy && dut.l1f_busy) n_b++;
    if (dut.l1f_done) n_spk1 += $countones(dut.spk1);
  end

  // reference outputs per step, computed ahead
  bit exp_spk [T][];
  initial begin
    m1 = new(N_IN, N_HID, 1'b0);
    m2 = new(N_HID, N_OUT, 1'b1);
    for (int t = 0; t < T; t++) begin
      xs[t] = new[N_IN];
      foreach (xs[t][j]) xs[t][j] = ($urandom_range(4) == 0) ? 16'h0000 : {1'b0, 5'(14 + $urandom_range(1)), 10'($urandom)};
    end
    foreach (m1.al[j, i]) begin
      m1.al[j][i] = hrand(10, 13); m1.be[j][i] = hrand(8, 11); m1.ga[j][i] = hrand(8, 11);
      m1.de[j][i] = {1'b0, 5'(9 + $urandom_range(2)), 10'($urandom)};
    end
    foreach (m2.al[j, i]) begin
      m2.al[j][i] = hrand(10, 13); m2.be[j][i] = hrand(8, 11); m2.ga[j][i] = hrand(8, 11);
      m2.de[j][i] = {1'b0, 5'(9 + $urandom_range(2)), 10'($urandom)};
    end
    for (int t = 0; t < T; t++) begin
      h_t s1 [] = new[N_HID];
      m1.forward(xs[t], v_th, lambda_);
      foreach (s1[i]) s1[i] = m1.spk[i] ? 16'h3C00 : 16'h0000;
      m1.update();
      m2.forward(s1, v_th, lambda_);
      exp_spk[t] = new[N_OUT];
      foreach (exp_spk[t][i]) begin exp_spk[t][i] = m2.spk[i]; n_spk2 += m2.spk[i]; end
      m2.update();
    end
  end

  // compare the outputs of each step in order
  always @(posedge clk) if (rst_n && out_valid) begin
    for (int i = 0; i < N_OUT; i++)
      chk(out_spikes[i] == exp_spk[n_out][i], $sformatf("output spike %0d of step %0d", i, n_out));
    n_out++;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // host loads the coefficients of both layers
    for (int i = 0; i < N_HID; i++) for (int j = 0; j < N_IN; j++) begin
      @(negedge clk);
      prm_we = 1; prm_layer = 0; prm_addr = 16'((i/P)*N_IN + j); prm_lane = 8'(i%P);
      prm_data = '{alpha: m1.al[j][i], beta: m1.be[j][i], gamma: m1.ga[j][i], delta: m1.de[j][i]};
    end
    for (int i = 0; i < N_OUT; i++) for (int j = 0; j < N_HID; j++) begin
      @(negedge clk);
      prm_we = 1; prm_layer = 1; prm_addr = 16'((i/P)*N_HID + j); prm_lane = 8'(i%P);
      prm_data = '{alpha: m2.al[j][i], beta: m2.be[j][i], gamma: m2.ga[j][i], delta: m2.de[j][i]};
    end
    @(negedge clk) prm_we = 0;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    while (!done) @(negedge clk);
    @(negedge clk);
    chk(n_out == T, $sformatf("%0d output vectors", n_out));
    for (int j = 0; j < N_IN; j++) for (int i = 0; i < N_HID; i++)
      chk(heq(dut.u_l1.u_wram.mem[(i/P)*N_IN + j][(i%P)*16 +: 16], m1.w[j][i]), $sformatf("L1 weight %0d,%0d", j, i));
    for (int j = 0; j < N_HID; j++) for (int i = 0; i < N_OUT; i++)
      chk(heq(dut.u_l2.u_wram.mem[(i/P)*N_HID + j][(i%P)*16 +: 16], m2.w[j][i]), $sformatf("L2 weight %0d,%0d", j, i));
    $display("mechanisms: prologue=%0d phaseA=%0d phaseB=%0d epilogue=%0d overlap=%0d w_hold=%0d tr_hold=%0d gated=%0d spikes L1=%0d L2=%0d backpressure=%0d",
             n_pro, n_a, n_b, n_epi, stat_overlap, stat_w_stall, stat_tr_stall, stat_gated, n_spk1, n_spk2, n_bp);
    $display("longest steady-state step: %0d cycles", step_len_max);
    chk(n_pro > 0, "prologue");
    chk(n_a > 0, "phase A");
    chk(n_b > 0, "phase B");
    chk(n_epi > 0, "epilogue");
    chk(stat_overlap > 0, "forward overlapping an update");
    chk(stat_w_stall > 0, "write-priority weight holds");
    chk(stat_gated > 0, "zero-gated MACs");
    chk(n_spk1 > 0 && n_spk2 > 0, "spikes in both layers");
    chk(n_bp > 0, "input back-pressure");
    // 8 us per inference-and-learning step at 200 MHz
    chk(step_len_max > 0 && step_len_max <= 1600, $sformatf("step length %0d cycles", step_len_max));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
