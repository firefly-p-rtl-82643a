// tb_wp_arbiter: random write and read requests with a random valid-data
// allow; checks that writes always win, reads are granted only when allowed
// and the port is free, and that the RAM port carries the served request.
module tb_wp_arbiter;
  logic clk = 0, rst_n = 0;
  logic wr_req = 0, rd_req = 0, rd_allow = 0;
  logic [7:0] wr_addr = 0, rd_addr = 0, ram_addr;
  logic [31:0] wr_data = 0, ram_wdata;
  logic [3:0] wr_mask = 0, ram_we;
  logic rd_gnt, rd_stall, ram_en;
  int checks = 0, failures = 0, nstall = 0;
  always #5 clk = ~clk;
  wp_arbiter #(.AW(8), .DW(32), .LANES(4)) dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      // a stalled reader holds its request and address
      if (!(rd_req && !rd_gnt)) begin
        rd_req = $urandom_range(1);
        rd_addr = 8'($urandom);
      end
      wr_req = $urandom_range(1); wr_addr = 8'($urandom); wr_data = $urandom; wr_mask = 4'($urandom);
      rd_allow = ($urandom_range(3) != 0);
      #1;
      chk(rd_gnt == (rd_req && rd_allow && !wr_req), "grant rule");
      chk(rd_stall == (rd_req && !(rd_allow && !wr_req)), "stall flag");
      chk(ram_en == (wr_req || (rd_req && rd_allow)), "port enable");
      if (wr_req) chk(ram_addr == wr_addr && ram_we == wr_mask && ram_wdata == wr_data, "write served");
      else if (rd_gnt) chk(ram_addr == rd_addr && ram_we == 4'b0, "read served");
      if (rd_stall) nstall++;
    end
    chk(nstall > 0, "stalls exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
