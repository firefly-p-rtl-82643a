// dp_ram: dual-port block RAM with lane write enables.
//
// Every memory of the design is one of these: the weight RAM, the packed
// plasticity-parameter RAM, the pre- and postsynaptic trace RAMs and the
// membrane-potential RAM of each layer. A word holds LANES lanes of LANE_W
// bits, one lane per PE, so that one access serves a whole tile of
// neurons. Port A reads and writes (read-first: a read in the same cycle as a
// write to the same address returns the old word); port B only reads. Both
// ports have a read latency of one cycle. The contents are not reset, as in a
// block RAM; the layer clears them with a write sweep.
module dp_ram #(
  parameter int unsigned LANES  = 16,
  parameter int unsigned LANE_W = 16,
  parameter int unsigned DEPTH  = 256,
  parameter int unsigned AW     = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                      clk,
  input  logic                      a_en,
  input  logic [LANES-1:0]          a_we,
  input  logic [AW-1:0]             a_addr,
  input  logic [LANES*LANE_W-1:0]   a_wdata,
  output logic [LANES*LANE_W-1:0]   a_rdata,
  input  logic                      b_en,
  input  logic [AW-1:0]             b_addr,
  output logic [LANES*LANE_W-1:0]   b_rdata
);

  logic [LANES*LANE_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (a_en) begin
      a_rdata <= mem[a_addr];
      for (int l = 0; l < int'(LANES); l++) begin
        if (a_we[l]) mem[a_addr][l*LANE_W +: LANE_W] <= a_wdata[l*LANE_W +: LANE_W];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (b_en) b_rdata <= mem[b_addr];
  end

endmodule
