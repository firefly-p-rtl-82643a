// tb_dp_ram: random lane-masked writes and reads on port A and reads on port
// B against a reference array; checks the one-cycle read latency and the
// read-first behaviour of port A.
module tb_dp_ram;
  localparam int LANES = 4, LANE_W = 16, DEPTH = 24;
  logic clk = 0;
  logic a_en = 0, b_en = 0;
  logic [LANES-1:0] a_we = '0;
  logic [4:0] a_addr = '0, b_addr = '0;
  logic [LANES*LANE_W-1:0] a_wdata = '0, a_rdata, b_rdata;
  logic [LANES*LANE_W-1:0] model [DEPTH];
  logic [LANES*LANE_W-1:0] exp_a, exp_b;
  bit chk_a, chk_b;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  dp_ram #(.LANES(LANES), .LANE_W(LANE_W), .DEPTH(DEPTH)) dut (.*);

  initial begin
    // fill every word through port A
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      a_en = 1; a_we = '1; a_addr = 5'(i); a_wdata = {$urandom, $urandom};
      model[i] = a_wdata;
    end
    @(negedge clk); a_en = 0; a_we = '0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      if (chk_a) begin checks++; if (a_rdata !== exp_a) begin failures++; if (failures < 10) $display("FAIL port A"); end end
      if (chk_b) begin checks++; if (b_rdata !== exp_b) begin failures++; if (failures < 10) $display("FAIL port B"); end end
      a_en = $urandom_range(1); a_we = a_en ? 4'($urandom) : '0; a_addr = 5'($urandom_range(DEPTH - 1));
      a_wdata = {$urandom, $urandom};
      b_en = $urandom_range(1); b_addr = 5'($urandom_range(DEPTH - 1));
      chk_a = a_en; exp_a = model[a_addr];   // read-first
      chk_b = b_en; exp_b = model[b_addr];   // old value if written in the same cycle
      if (a_en) for (int l = 0; l < LANES; l++) if (a_we[l]) model[a_addr][l*LANE_W +: LANE_W] = a_wdata[l*LANE_W +: LANE_W];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
