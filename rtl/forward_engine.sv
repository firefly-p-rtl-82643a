// forward_engine: inference engine of one layer (psum, neuron dynamics,
// trace update).
//
// The layer's N_POST neurons are processed in tiles of P, one neuron per PE.
// For a tile the engine streams the N_PRE inputs: each cycle it reads one
// weight word (the P weights from input j to the tile's neurons, at address
// tile*N_PRE + j) and every PE accumulates w*x in its own register
// (output-stationary psum, zero inputs gated). After the last input the tile's
// membrane potentials and postsynaptic traces are read, the P LIF lanes form
// the new potentials and spikes, and the P trace lanes form the new traces;
// both are written back in the same cycle and the spikes land in the layer's
// spike vector. The presynaptic (input) traces are updated while the last tile
// streams, one per input. Doing them last, and the postsynaptic traces of a
// tile only after all of the tile's weights have been read, lets the
// plasticity engine of the previous step still be reading the old traces while
// this pass runs (see layer_unit).
//
// Timing: a weight read may be held by the layer (write priority, valid-data
// check); without holds a tile takes N_PRE + 2 cycles, and done rises
// NT*(N_PRE + 2) + 1 clock edges after the edge that samples start.
// The tiling, the order of the trace updates and the reset of the potential
// after a spike are this design's choices; the three-stage structure, the
// psum-stationary PEs, the tau_m = 2 LIF model and the trace rule follow the
// architecture being implemented.
module forward_engine
  import fp16_pkg::*;
#(
  parameter int unsigned P           = 16,
  parameter int unsigned N_PRE       = 32,
  parameter int unsigned N_POST      = 128,
  parameter bit          SPIKE_INPUT = 1'b0,
  parameter int unsigned NT          = (N_POST + P - 1) / P,
  parameter int unsigned WAW         = (N_PRE * NT > 1) ? $clog2(N_PRE * NT) : 1,
  parameter int unsigned TW          = (NT > 1) ? $clog2(NT) : 1,
  parameter int unsigned JW          = (N_PRE > 1) ? $clog2(N_PRE) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  fp16_t              v_th,
  input  fp16_t              lambda_,
  output logic               busy,
  output logic               done,
  // input activations (value of input x_idx, combinational)
  output logic [JW-1:0]      x_idx,
  input  fp16_t              x_val,
  // weight RAM, shared port (held while !w_rd_gnt)
  output logic               w_rd_req,
  output logic [WAW-1:0]     w_rd_addr,
  input  logic               w_rd_gnt,
  input  logic [P*16-1:0]    w_rd_data,
  // membrane RAM
  output logic               v_rd_en,
  output logic [TW-1:0]      v_rd_addr,
  input  logic [P*16-1:0]    v_rd_data,
  output logic               v_wr_en,
  output logic [TW-1:0]      v_wr_addr,
  output logic [P*16-1:0]    v_wr_data,
  // postsynaptic trace RAM: private read port, shared write port (priority)
  output logic               post_rd_en,
  output logic [TW-1:0]      post_rd_addr,
  input  logic [P*16-1:0]    post_rd_data,
  output logic               post_wr_req,
  output logic [TW-1:0]      post_wr_addr,
  output logic [P*16-1:0]    post_wr_data,
  // presynaptic trace RAM: private read port, shared write port (priority)
  output logic               pre_rd_en,
  output logic [JW-1:0]      pre_rd_addr,
  input  fp16_t              pre_rd_data,
  output logic               pre_wr_req,
  output logic [JW-1:0]      pre_wr_addr,
  output fp16_t              pre_wr_data,
  // results and activity
  output logic [NT*P-1:0]    spikes,
  output logic               mac_gated
);

  typedef enum logic [1:0] {S_IDLE, S_ACC, S_DRAIN, S_LIF} state_t;
  state_t state;

  logic [TW-1:0] tile;
  logic [JW-1:0] j;
  logic          last_tile;
  // one-cycle read pipeline
  logic          v1, last1;
  logic [JW-1:0] j1;
  fp16_t         x1;

  logic [P-1:0]  pe_gated, lif_spk;
  fp16_t         psum   [P];
  fp16_t         v_next [P];
  fp16_t         tr_next[P];

  assign last_tile = (32'(tile) == NT - 1);
  assign busy      = (state != S_IDLE);
  assign x_idx     = j;
  assign w_rd_req  = (state == S_ACC);
  assign w_rd_addr = WAW'(32'(tile) * N_PRE + 32'(j));

  assign pre_rd_en   = (state == S_ACC) && w_rd_gnt && last_tile;
  assign pre_rd_addr = j;
  assign pre_wr_req  = v1 && last1;
  assign pre_wr_addr = j1;
  trace_unit u_pre_trace (.s_prev(pre_rd_data), .lambda_(lambda_), .x(x1), .s_next(pre_wr_data));

  assign v_rd_en      = (state == S_DRAIN);
  assign v_rd_addr    = tile;
  assign post_rd_en   = (state == S_DRAIN);
  assign post_rd_addr = tile;

  for (genvar l = 0; l < int'(P); l++) begin : g_lane
    psum_pe #(.SPIKE_INPUT(SPIKE_INPUT)) u_pe (
      .clk, .rst_n,
      .clr   (start || state == S_LIF),
      .en    (v1),
      .w     (w_rd_data[l*16 +: 16]),
      .x     (x1),
      .psum  (psum[l]),
      .gated (pe_gated[l])
    );
    lif_unit u_lif (
      .i_cur (psum[l]),
      .v_prev(v_rd_data[l*16 +: 16]),
      .v_th,
      .v_next(v_next[l]),
      .spike (lif_spk[l])
    );
    trace_unit u_post_trace (
      .s_prev (post_rd_data[l*16 +: 16]),
      .lambda_,
      .x      (lif_spk[l] ? FP16_ONE : FP16_ZERO),
      .s_next (tr_next[l])
    );
    assign v_wr_data[l*16 +: 16]    = v_next[l];
    assign post_wr_data[l*16 +: 16] = tr_next[l];
  end

  assign mac_gated    = pe_gated[0];
  assign v_wr_en      = (state == S_LIF);
  assign v_wr_addr    = tile;
  assign post_wr_req  = (state == S_LIF);
  assign post_wr_addr = tile;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      tile   <= '0;
      j      <= '0;
      v1     <= 1'b0;
      last1  <= 1'b0;
      j1     <= '0;
      x1     <= FP16_ZERO;
      done   <= 1'b0;
      spikes <= '0;
    end else begin
      done <= 1'b0;
      v1   <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          tile  <= '0;
          j     <= '0;
          state <= S_ACC;
        end
        S_ACC: if (w_rd_gnt) begin
          v1    <= 1'b1;
          last1 <= last_tile;
          j1    <= j;
          x1    <= x_val;
          if (32'(j) == N_PRE - 1) begin
            j     <= '0;
            state <= S_DRAIN;
          end else begin
            j <= j + 1'b1;
          end
        end
        S_DRAIN: state <= S_LIF;
        S_LIF: begin
          for (int l = 0; l < int'(P); l++) begin
            spikes[32'(tile) * P + 32'(l)] <= lif_spk[l] && (32'(tile) * P + 32'(l) < N_POST);
          end
          if (last_tile) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            tile  <= tile + 1'b1;
            state <= S_ACC;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> state == S_IDLE);

endmodule
