// tb_layer_unit: a whole layer (P = 4, 5 real-valued inputs, 10 neurons)
// for eight time steps against the reference layer. Parameters are loaded
// through the host port, the layer is cleared, and every step runs the
// forward pass and then the update; from the second step on the next forward
// pass is started while the previous update is still running, so that the
// write-priority holds and the valid-data check are exercised. The results
// must still equal the sequential reference: spikes every step, weights and
// traces at the end.
module tb_layer_unit;
  import ref_pkg::*;
  import fp16_pkg::*;
  localparam int P = 4, N_PRE = 5, N_POST = 10, NT = 3;
  logic clk = 0, rst_n = 0;
  fp16_t v_th = 16'h3800, lambda_ = 16'h3A00;   // 0.5, 0.75
  logic clear = 0, clear_done, fwd_start = 0, fwd_busy, fwd_done, upd_start = 0, upd_busy, upd_done;
  logic [2:0] x_idx;
  fp16_t x_val;
  logic [N_POST-1:0] spikes;
  logic prm_we = 0;
  logic [3:0] prm_addr = 0;
  logic [1:0] prm_lane = 0;
  prm_t prm_data = '0;
  logic ev_w_stall, ev_tr_stall, ev_gated, ev_overlap;
  h_t x [] = new[N_PRE];
  int checks = 0, failures = 0, n_ws = 0, n_ts = 0, n_ov = 0, n_g = 0;
  layer_ref m;

  always #5 clk = ~clk;
  layer_unit #(.P(P), .N_PRE(N_PRE), .N_POST(N_POST)) dut (.*);
  assign x_val = x[x_idx];

  always @(posedge clk) if (rst_n) begin
    n_ws += ev_w_stall; n_ts += ev_tr_stall; n_ov += ev_overlap; n_g += ev_gated;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 12) $display("FAIL %s", what); end
  endtask

  initial begin
    m = new(N_PRE, N_POST, 1'b0);
    repeat (2) @(negedge clk);
    rst_n = 1;
    // host loads the plasticity coefficients
    for (int j = 0; j < N_PRE; j++) for (int i = 0; i < N_POST; i++) begin
      m.al[j][i] = {1'b0, 5'(13 + $urandom_range(2)), 10'($urandom)};
      m.be[j][i] = hrand(9, 13); m.ga[j][i] = hrand(9, 13); m.de[j][i] = hrand(6, 11);
      @(negedge clk);
      prm_we = 1; prm_addr = 4'((i/P)*N_PRE + j); prm_lane = 2'(i%P);
      prm_data = '{alpha: m.al[j][i], beta: m.be[j][i], gamma: m.ga[j][i], delta: m.de[j][i]};
    end
    @(negedge clk) prm_we = 0;
    @(negedge clk) clear = 1;
    @(negedge clk) clear = 0;
    while (!clear_done) @(negedge clk);
    m.clear();
    for (int t = 0; t < 8; t++) begin
      foreach (x[j]) x[j] = ($urandom_range(4) == 0) ? 16'h0000 : {1'b0, 5'(14 + $urandom_range(1)), 10'($urandom)};
      m.forward(x, v_th, lambda_);
      // forward pass; from t = 1 it overlaps the update of t-1
      @(negedge clk) fwd_start = 1;
      @(negedge clk) fwd_start = 0;
      while (!fwd_done) @(negedge clk);
      for (int i = 0; i < N_POST; i++) chk(spikes[i] == m.spk[i], $sformatf("spike %0d step %0d", i, t));
      while (upd_busy) @(negedge clk);
      m.update();
      upd_start = 1;
      @(negedge clk) upd_start = 0;
      repeat (t % 3) @(negedge clk);  // the next forward pass starts 1-3 cycles into this update
    end
    while (upd_busy) @(negedge clk);
    repeat (2) @(negedge clk);
    for (int j = 0; j < N_PRE; j++) for (int i = 0; i < N_POST; i++)
      chk(heq(dut.u_wram.mem[(i/P)*N_PRE+j][(i%P)*16 +: 16], m.w[j][i]), $sformatf("weight %0d,%0d", j, i));
    for (int i = 0; i < N_POST; i++) chk(heq(dut.u_post_ram.mem[i/P][(i%P)*16 +: 16], m.post_tr[i]), "post trace");
    for (int j = 0; j < N_PRE; j++) chk(heq(dut.u_pre_ram.mem[j], m.pre_tr[j]), "pre trace");
    chk(n_ws > 0, "weight read held by write priority");
    // Trace-port holds are counted but not required: the update always runs
    // ahead of the forward pass, so the forward engine's trace writes never
    // meet a trace read of the update in this schedule.
    $display("trace-port holds: %0d, weight-port holds: %0d", n_ts, n_ws);
    chk(n_ov == 7, $sformatf("forward passes overlapping an update: %0d", n_ov));
    chk(n_g > 0, "gated MACs");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
