// wp_arbiter: write-priority sharing of one RAM port.
//
// Two engines share port A of a dual-port RAM: one writes (for the weight RAM
// the plasticity engine, for the trace RAMs the forward engine) and the other
// reads. A write always goes through; a read in the same cycle is paused and
// must be held until rd_gnt. A read is also held while rd_allow is low: the
// layer drives rd_allow from its valid-data check, so that a reader never sees
// a word the writer has still to update in the current pass. Because writes
// are never delayed and the reader only waits, the two engines cannot
// deadlock.
//
// Interface: combinational; the RAM port signals are driven from whichever
// requester is served. rd_stall flags a cycle in which a read was held back.
module wp_arbiter #(
  parameter int unsigned AW    = 8,
  parameter int unsigned DW    = 256,
  parameter int unsigned LANES = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_req,
  input  logic [AW-1:0]    wr_addr,
  input  logic [DW-1:0]    wr_data,
  input  logic [LANES-1:0] wr_mask,
  input  logic             rd_req,
  input  logic [AW-1:0]    rd_addr,
  input  logic             rd_allow,
  output logic             rd_gnt,
  output logic             rd_stall,
  output logic             ram_en,
  output logic [LANES-1:0] ram_we,
  output logic [AW-1:0]    ram_addr,
  output logic [DW-1:0]    ram_wdata
);

  assign rd_gnt    = rd_req && rd_allow && !wr_req;
  assign rd_stall  = rd_req && !rd_gnt;
  assign ram_en    = wr_req || rd_gnt;
  assign ram_we    = wr_req ? wr_mask : '0;
  assign ram_addr  = wr_req ? wr_addr : rd_addr;
  assign ram_wdata = wr_data;

  // A granted read never shares the port with a write.
  a_excl: assert property (@(posedge clk) disable iff (!rst_n) !(rd_gnt && wr_req));
  // A read that is held keeps asking for the same address.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           rd_stall |=> rd_req && $stable(rd_addr));

endmodule
