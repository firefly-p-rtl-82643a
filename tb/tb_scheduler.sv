// tb_scheduler: the scheduler driving four engine models whose passes take
// random times. Both settings of OVERLAP are run. The testbench checks the
// dependency rules on every start (L1U(t) after L1F(t), L2F(t) after L1F(t),
// L1F(t+1) after L2F(t) and after L1U(t) finished or, with overlap, started,
// and so on), that every item runs exactly once, that no engine is started
// while busy, that the prologue and the epilogue are seen, that without
// overlap phases A and B show the pairs (L1U,L2F) and (L2U,L1F) running
// together, and that with overlap a forward pass does start during its own
// layer's update.
module tb_scheduler;
  import sched_pkg::*;
  localparam int T = 6;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 12) $display("FAIL %s at %0t", what, $time); end
  endtask

  // engine model: busy for a random 3..20 cycles after start, done pulse at end
  class eng;
    int left = 0;
    int starts = 0, dones = 0;
  endclass

  for (genvar g = 0; g < 2; g++) begin : g_run
    logic start = 0, busy, done, in_ready, out_valid, clear;
    logic in_valid = 0;
    phase_t phase;
    logic c1 = 0, c2 = 0;
    logic [3:0] st, dn;         // l1f, l1u, l2f, l2u
    int left [4], ns [4], nd [4];
    bit seen_pro = 0, seen_epi = 0, seen_a = 0, seen_b = 0, seen_ov = 0;
    int n_out = 0;
    bit fin = 0;

    scheduler #(.OVERLAP(g == 1)) dut (
      .clk, .rst_n, .start, .num_steps(16'(T)), .busy, .done, .phase,
      .in_valid, .in_ready, .out_valid, .clear, .l1_clear_done(c1), .l2_clear_done(c2),
      .l1f_start(st[0]), .l1f_done(dn[0]), .l1u_start(st[1]), .l1u_done(dn[1]),
      .l2f_start(st[2]), .l2f_done(dn[2]), .l2u_start(st[3]), .l2u_done(dn[3])
    );

    always @(posedge clk) begin
      c1 <= clear; c2 <= clear;
      for (int e = 0; e < 4; e++) begin
        dn[e] <= 1'b0;
        if (left[e] == 1) dn[e] <= 1'b1;
        if (left[e] > 0) left[e] <= left[e] - 1;
      end
      if (rst_n) begin
        if (st[1]) chk(nd[0] > ns[1], "L1U before its L1F");
        if (st[2]) chk(nd[0] > ns[2], "L2F before its L1F");
        if (st[3]) chk(nd[2] > ns[3], "L2U before its L2F");
        if (st[0] && ns[0] > 0) begin
          chk(nd[2] >= ns[0], "L1F before L2F consumed the spikes");
          if (g == 0) chk(nd[1] >= ns[0], "L1F before L1U finished");
          else        chk(ns[1] >= ns[0], "L1F before L1U started");
          if (left[1] > 0 && !dn[1]) seen_ov = 1;
        end
        if (st[2] && ns[2] > 0) begin
          if (g == 0) chk(nd[3] >= ns[2], "L2F before L2U finished");
          else        chk(ns[3] >= ns[2], "L2F before L2U started");
        end
        for (int e = 0; e < 4; e++) if (st[e]) begin
          chk(left[e] == 0 && !dn[e], "start while busy");
          left[e] <= 3 + $urandom_range(17);
          ns[e]++;
        end
        for (int e = 0; e < 4; e++) if (dn[e]) nd[e]++;
        if (phase == PH_PROLOGUE && left[0] > 0) seen_pro = 1;
        if (phase == PH_EPILOGUE && left[3] > 0) seen_epi = 1;
        if (left[1] > 0 && left[2] > 0) seen_a = 1;
        if (left[3] > 0 && left[0] > 0) seen_b = 1;
        if (out_valid) n_out++;
        in_valid <= ($urandom_range(3) != 0);
      end
    end

    initial begin
      foreach (left[e]) begin left[e] = 0; ns[e] = 0; nd[e] = 0; end
      st = '0;
      repeat (3) @(negedge clk);
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      while (!done) @(negedge clk);
      for (int e = 0; e < 4; e++) chk(ns[e] == T && nd[e] == T, $sformatf("engine %0d ran %0d/%0d times", e, ns[e], nd[e]));
      chk(n_out == T, "one output per step");
      chk(seen_pro && seen_epi, "prologue and epilogue");
      chk(seen_a && seen_b, "phases A and B overlap the layers");
      if (g == 1) chk(seen_ov, "forward overlapping its layer's update");
      fin = 1;
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    wait (g_run[0].fin && g_run[1].fin);
    repeat (3) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
