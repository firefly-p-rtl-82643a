// plasticity_engine: synaptic-update engine of one layer.
//
// One pass applies the learning rule to every synapse of the layer once,
// using the traces left by the forward pass of the same time step. The engine
// walks the weight words in the same order as the forward engine (tile by
// tile, input by input). At the start of each tile it loads the tile's P
// postsynaptic traces into registers. Then, each cycle, it reads the
// presynaptic trace of input j, the weight word and the packed parameter word
// ({alpha, beta, gamma, delta} for each of the P synapses, one wide access) and
// hands them to the P plasticity PEs; three cycles later the P new weights are
// written back as one word. wr_cnt counts the words written in the current
// pass; because words are written in address order, every address below
// wr_cnt already holds its updated weight, which is what the layer's
// valid-data check needs.
//
// Timing: the trace reads share a RAM port with the forward engine's trace
// writes and are held while those write. Without holds a pass takes
// NT*(N_PRE + 2) + 6 clock edges from the edge that samples start to done.
module plasticity_engine
  import fp16_pkg::*;
#(
  parameter int unsigned P      = 16,
  parameter int unsigned N_PRE  = 32,
  parameter int unsigned N_POST = 128,
  parameter int unsigned NT     = (N_POST + P - 1) / P,
  parameter int unsigned WAW    = (N_PRE * NT > 1) ? $clog2(N_PRE * NT) : 1,
  parameter int unsigned TW     = (NT > 1) ? $clog2(NT) : 1,
  parameter int unsigned JW     = (N_PRE > 1) ? $clog2(N_PRE) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  output logic               busy,
  output logic               done,
  output logic [WAW:0]       wr_cnt,
  // weight RAM, private read port
  output logic               w_rd_en,
  output logic [WAW-1:0]     w_rd_addr,
  input  logic [P*16-1:0]    w_rd_data,
  // parameter RAM read port: P packed {alpha,beta,gamma,delta}
  output logic               p_rd_en,
  output logic [WAW-1:0]     p_rd_addr,
  input  logic [P*64-1:0]    p_rd_data,
  // presynaptic trace RAM, shared port (held while !pre_rd_gnt)
  output logic               pre_rd_req,
  output logic [JW-1:0]      pre_rd_addr,
  input  logic               pre_rd_gnt,
  input  fp16_t              pre_rd_data,
  // postsynaptic trace RAM, shared port (held while !post_rd_gnt)
  output logic               post_rd_req,
  output logic [TW-1:0]      post_rd_addr,
  input  logic               post_rd_gnt,
  input  logic [P*16-1:0]    post_rd_data,
  // weight RAM, shared port with write priority
  output logic               w_wr_req,
  output logic [WAW-1:0]     w_wr_addr,
  output logic [P*16-1:0]    w_wr_data
);

  typedef enum logic [2:0] {U_IDLE, U_LDPOST, U_LDWAIT, U_STREAM, U_DRAIN} state_t;
  state_t state;

  logic [TW-1:0]  tile;
  logic [JW-1:0]  j;
  logic [WAW-1:0] addr;
  logic [P*16-1:0] si_q;
  logic           v1;
  logic [WAW-1:0] a1, a2, a3, a4;
  logic [7:0]     inflight;
  logic [P-1:0]   pe_ov;
  logic           issue;

  assign addr         = WAW'(32'(tile) * N_PRE + 32'(j));
  assign busy         = (state != U_IDLE);
  assign post_rd_req  = (state == U_LDPOST);
  assign post_rd_addr = tile;
  assign pre_rd_req   = (state == U_STREAM);
  assign pre_rd_addr  = j;
  assign issue        = (state == U_STREAM) && pre_rd_gnt;
  assign w_rd_en      = issue;
  assign w_rd_addr    = addr;
  assign p_rd_en      = issue;
  assign p_rd_addr    = addr;

  for (genvar l = 0; l < int'(P); l++) begin : g_pe
    fp16_t w_new_l, dw_l;
    plasticity_pe u_pe (
      .clk, .rst_n,
      .in_valid (v1),
      .prm      (prm_t'(p_rd_data[l*64 +: 64])),
      .s_pre    (pre_rd_data),
      .s_post   (si_q[l*16 +: 16]),
      .w_old    (w_rd_data[l*16 +: 16]),
      .out_valid(pe_ov[l]),
      .dw       (dw_l),
      .w_new    (w_new_l)
    );
    assign w_wr_data[l*16 +: 16] = w_new_l;
  end

  assign w_wr_req  = pe_ov[0];
  assign w_wr_addr = a4;

  always_ff @(posedge clk) begin
    if (state == U_LDWAIT) si_q <= post_rd_data;
    a1 <= addr;
    a2 <= a1;
    a3 <= a2;
    a4 <= a3;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= U_IDLE;
      tile     <= '0;
      j        <= '0;
      v1       <= 1'b0;
      inflight <= '0;
      wr_cnt   <= '0;
      done     <= 1'b0;
    end else begin
      done     <= 1'b0;
      v1       <= issue;
      inflight <= inflight + 8'(issue) - 8'(w_wr_req);
      if (w_wr_req) wr_cnt <= wr_cnt + 1'b1;
      unique case (state)
        U_IDLE: if (start) begin
          tile   <= '0;
          j      <= '0;
          wr_cnt <= '0;
          state  <= U_LDPOST;
        end
        U_LDPOST: if (post_rd_gnt) state <= U_LDWAIT;
        U_LDWAIT: state <= U_STREAM;
        U_STREAM: if (pre_rd_gnt) begin
          if (32'(j) == N_PRE - 1) begin
            j <= '0;
            if (32'(tile) == NT - 1) begin
              state <= U_DRAIN;
            end else begin
              tile  <= tile + 1'b1;
              state <= U_LDPOST;
            end
          end else begin
            j <= j + 1'b1;
          end
        end
        U_DRAIN: if (inflight == 8'd0 && !v1) begin
          state <= U_IDLE;
          done  <= 1'b1;
        end
        default: state <= U_IDLE;
      endcase
    end
  end

  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> state == U_IDLE);

endmodule
