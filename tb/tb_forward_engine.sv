// tb_forward_engine: one layer's forward engine (P = 4, 5 inputs, 10
// neurons, so the last tile is partly empty) against the reference layer
// model. The testbench plays the RAMs, grants weight reads at random to
// provoke holds, changes the weights between passes, and after each of six
// passes compares spikes, membrane potentials and both trace memories. One
// pass with every read granted must raise done NT*(N_PRE+2)+1 clock edges
// after the edge that samples start.
module tb_forward_engine;
  import ref_pkg::*;
  import fp16_pkg::*;
  localparam int P = 4, N_PRE = 5, N_POST = 10, NT = 3;
  logic clk = 0, rst_n = 0, start = 0;
  fp16_t v_th = 16'h3C00, lambda_ = 16'h3A00;  // 1.0, 0.75
  logic busy, done, mac_gated;
  logic [2:0] x_idx;
  fp16_t x_val;
  logic w_rd_req, w_rd_gnt, v_rd_en, v_wr_en, post_rd_en, post_wr_req, pre_rd_en, pre_wr_req;
  logic [3:0] w_rd_addr;
  logic [1:0] v_rd_addr, v_wr_addr, post_rd_addr, post_wr_addr;
  logic [2:0] pre_rd_addr, pre_wr_addr;
  logic [P*16-1:0] w_rd_data, v_rd_data, v_wr_data, post_rd_data, post_wr_data;
  fp16_t pre_rd_data, pre_wr_data;
  logic [NT*P-1:0] spikes;
  logic [P*16-1:0] wmem [NT*N_PRE], vmem [NT], postm [NT];
  fp16_t prem [N_PRE];
  h_t x [] = new[N_PRE];
  bit allow = 1;
  int checks = 0, failures = 0, nstall = 0, ngated = 0, nspk = 0;
  layer_ref m;

  always #5 clk = ~clk;

  forward_engine #(.P(P), .N_PRE(N_PRE), .N_POST(N_POST)) dut (.*);

  assign x_val    = x[x_idx];
  assign w_rd_gnt = w_rd_req && allow;
  always @(posedge clk) begin
    if (w_rd_gnt)   w_rd_data    <= wmem[w_rd_addr];
    if (v_rd_en)    v_rd_data    <= vmem[v_rd_addr];
    if (post_rd_en) post_rd_data <= postm[post_rd_addr];
    if (pre_rd_en)  pre_rd_data  <= prem[pre_rd_addr];
    if (v_wr_en && rst_n)     vmem[v_wr_addr]   <= v_wr_data;
    if (post_wr_req && rst_n) postm[post_wr_addr] <= post_wr_data;
    if (pre_wr_req && rst_n)  prem[pre_wr_addr]  <= pre_wr_data;
    if (w_rd_req && !w_rd_gnt) nstall++;
    if (mac_gated) ngated++;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 12) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    m = new(N_PRE, N_POST, 1'b0);
    for (int t = 0; t < NT; t++) begin vmem[t] = '0; postm[t] = '0; end
    foreach (prem[j]) prem[j] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int pass = 0; pass < 6; pass++) begin
      int cyc;
      // new weights (as if updated) and inputs
      for (int j = 0; j < N_PRE; j++) for (int i = 0; i < N_POST; i++) m.w[j][i] = hrand(12, 15);
      for (int t = 0; t < NT; t++) for (int j = 0; j < N_PRE; j++) for (int k = 0; k < P; k++)
        wmem[t*N_PRE+j][k*16 +: 16] = (t*P+k < N_POST) ? m.w[j][t*P+k] : 16'h0000;
      foreach (x[j]) x[j] = ($urandom_range(3) == 0) ? 16'h0000 : {1'b0, 5'(13 + $urandom_range(2)), 10'($urandom)};
      m.forward(x, v_th, lambda_);
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin
        allow = (pass == 0) ? 1'b1 : ($urandom_range(2) != 0);
        @(negedge clk); cyc++;
      end
      allow = 1;
      if (pass == 0) chk(cyc == NT*(N_PRE+2) + 1, $sformatf("pass latency %0d", cyc));
      @(negedge clk);
      for (int i = 0; i < N_POST; i++) begin
        chk(spikes[i] == m.spk[i], $sformatf("spike %0d pass %0d", i, pass));
        chk(heq(vmem[i/P][(i%P)*16 +: 16], m.v[i]), $sformatf("membrane %0d: %h vs %h", i, vmem[i/P][(i%P)*16 +: 16], m.v[i]));
        chk(heq(postm[i/P][(i%P)*16 +: 16], m.post_tr[i]), $sformatf("post trace %0d", i));
        nspk += m.spk[i];
      end
      for (int j = 0; j < N_PRE; j++) chk(heq(prem[j], m.pre_tr[j]), $sformatf("pre trace %0d", j));
    end
    chk(nstall > 0 && ngated > 0 && nspk > 0, "holds, gating and spikes exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
