// tb_plasticity_engine: one layer's update pass (P = 4, 5 inputs, 10
// neurons) against the reference rule. The testbench plays the RAMs, holds
// trace reads at random, and checks every final weight, that weight words are
// written once each in address order (which the layer's valid-data check
// relies on), the final wr_cnt, and the cycle count of a pass without holds.
module tb_plasticity_engine;
  import ref_pkg::*;
  import fp16_pkg::*;
  localparam int P = 4, N_PRE = 5, N_POST = 10, NT = 3, NW = NT * N_PRE;
  logic clk = 0, rst_n = 0, start = 0;
  logic busy, done;
  logic [4:0] wr_cnt;
  logic w_rd_en, p_rd_en, pre_rd_req, pre_rd_gnt, post_rd_req, post_rd_gnt, w_wr_req;
  logic [3:0] w_rd_addr, p_rd_addr, w_wr_addr;
  logic [2:0] pre_rd_addr;
  logic [1:0] post_rd_addr;
  logic [P*16-1:0] w_rd_data, post_rd_data, w_wr_data;
  logic [P*64-1:0] p_rd_data;
  fp16_t pre_rd_data;
  logic [P*16-1:0] wmem [NW], postm [NT];
  logic [P*64-1:0] pmem [NW];
  fp16_t prem [N_PRE];
  bit allow = 1;
  int checks = 0, failures = 0, nstall = 0, next_wr = 0;
  layer_ref m;

  always #5 clk = ~clk;
  plasticity_engine #(.P(P), .N_PRE(N_PRE), .N_POST(N_POST)) dut (.*);

  assign pre_rd_gnt  = pre_rd_req && allow;
  assign post_rd_gnt = post_rd_req && allow;
  always @(posedge clk) begin
    if (w_rd_en)     w_rd_data    <= wmem[w_rd_addr];
    if (p_rd_en)     p_rd_data    <= pmem[p_rd_addr];
    if (pre_rd_gnt)  pre_rd_data  <= prem[pre_rd_addr];
    if (post_rd_gnt) post_rd_data <= postm[post_rd_addr];
    if (rst_n && w_wr_req) begin
      wmem[w_wr_addr] <= w_wr_data;
      checks++;
      if (int'(w_wr_addr) != next_wr) begin failures++; $display("FAIL write order %0d exp %0d", w_wr_addr, next_wr); end
      next_wr++;
    end
    if ((pre_rd_req && !pre_rd_gnt) || (post_rd_req && !post_rd_gnt)) nstall++;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 12) $display("FAIL %s", what); end
  endtask

  initial begin
    m = new(N_PRE, N_POST, 1'b0);
    for (int j = 0; j < N_PRE; j++) for (int i = 0; i < N_POST; i++) begin
      m.w[j][i] = hrand(10, 15);
      m.al[j][i] = hrand(5, 14); m.be[j][i] = hrand(5, 14); m.ga[j][i] = hrand(5, 14); m.de[j][i] = hrand(3, 10);
    end
    foreach (m.pre_tr[j])  m.pre_tr[j]  = ($urandom_range(4) == 0) ? 16'h0 : {1'b0, 5'(12 + $urandom_range(3)), 10'($urandom)};
    foreach (m.post_tr[i]) m.post_tr[i] = ($urandom_range(4) == 0) ? 16'h0 : {1'b0, 5'(12 + $urandom_range(3)), 10'($urandom)};
    for (int t = 0; t < NT; t++) begin
      postm[t] = '0;
      for (int j = 0; j < N_PRE; j++) begin wmem[t*N_PRE+j] = '0; pmem[t*N_PRE+j] = '0; end
      for (int k = 0; k < P; k++) if (t*P+k < N_POST) begin
        postm[t][k*16 +: 16] = m.post_tr[t*P+k];
        for (int j = 0; j < N_PRE; j++) begin
          wmem[t*N_PRE+j][k*16 +: 16] = m.w[j][t*P+k];
          pmem[t*N_PRE+j][k*64 +: 64] = {m.al[j][t*P+k], m.be[j][t*P+k], m.ga[j][t*P+k], m.de[j][t*P+k]};
        end
      end
    end
    foreach (prem[j]) prem[j] = m.pre_tr[j];
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int pass = 0; pass < 3; pass++) begin
      int cyc;
      m.update();
      next_wr = 0;
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin
        allow = (pass == 0) ? 1'b1 : ($urandom_range(2) != 0);
        @(negedge clk); cyc++;
      end
      allow = 1;
      if (pass == 0) chk(cyc == NT*(N_PRE+2) + 6, $sformatf("pass latency %0d", cyc));
      chk(int'(wr_cnt) == NW, "wr_cnt");
      for (int j = 0; j < N_PRE; j++) for (int i = 0; i < N_POST; i++)
        chk(heq(wmem[(i/P)*N_PRE+j][(i%P)*16 +: 16], m.w[j][i]), $sformatf("weight %0d,%0d pass %0d", j, i, pass));
    end
    chk(nstall > 0, "holds exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
