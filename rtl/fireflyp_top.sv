// fireflyp_top: two-layer spiking controller with online plasticity.
//
// N_IN real-valued inputs feed N_HID LIF neurons (layer 1), whose spikes feed
// N_OUT LIF neurons (layer 2); the output spikes drive the actuators. Every
// time step each layer also updates all of its synapses with the learned
// four-term rule, so the network keeps adapting while it controls. The
// scheduler overlaps the layers' forward and update passes (see scheduler);
// each layer keeps its own memories (see layer_unit).
//
// Interface
//   start/num_steps   begin a run of num_steps steps; weights, traces and
//                     potentials are cleared to zero first. busy/done frame it.
//   in_valid/in_ready/in_data   one input vector per step; it is latched when
//                     in_ready and in_valid are both high.
//   out_valid/out_spikes        the output spikes of a step (one-cycle pulse).
//   prm_*             host writes of the plasticity coefficients of one
//                     synapse: layer (0/1), word address tile*N_PRE+j, lane =
//                     neuron within the tile. Load them before start.
//   v_th, lambda_     firing threshold and trace decay, FP16, shared by all
//                     neurons.
//   stat_*            event counters of the current run, for observation.
// Timing without holds (P = 16, N_IN = 32, N_HID = 128, N_OUT = 8): layer-1
// forward 8*(32+2)+1 cycles, layer-1 update 8*(32+2)+6, layer-2 forward 131,
// layer-2 update 136; a steady-state step measures 542 cycles, 2.7 us at
// 200 MHz. N_IN and N_OUT are this design's choice.
module fireflyp_top
  import fp16_pkg::*;
  import sched_pkg::*;
#(
  parameter int unsigned P       = 16,
  parameter int unsigned N_IN    = 32,
  parameter int unsigned N_HID   = 128,
  parameter int unsigned N_OUT   = 8,
  parameter bit          OVERLAP = 1'b1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [15:0]           num_steps,
  output logic                  busy,
  output logic                  done,
  output phase_t                phase,
  input  fp16_t                 v_th,
  input  fp16_t                 lambda_,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [N_IN-1:0][15:0] in_data,
  output logic                  out_valid,
  output logic [N_OUT-1:0]      out_spikes,
  input  logic                  prm_we,
  input  logic                  prm_layer,
  input  logic [15:0]           prm_addr,
  input  logic [7:0]            prm_lane,
  input  prm_t                  prm_data,
  output logic [31:0]           stat_w_stall,
  output logic [31:0]           stat_tr_stall,
  output logic [31:0]           stat_gated,
  output logic [31:0]           stat_overlap
);

  localparam int unsigned NT1  = (N_HID + P - 1) / P;
  localparam int unsigned NT2  = (N_OUT + P - 1) / P;
  localparam int unsigned WAW1 = (N_IN * NT1 > 1) ? $clog2(N_IN * NT1) : 1;
  localparam int unsigned WAW2 = (N_HID * NT2 > 1) ? $clog2(N_HID * NT2) : 1;
  localparam int unsigned JW1  = (N_IN > 1) ? $clog2(N_IN) : 1;
  localparam int unsigned JW2  = (N_HID > 1) ? $clog2(N_HID) : 1;
  localparam int unsigned LW   = (P > 1) ? $clog2(P) : 1;

  logic clear, c1_done, c2_done;
  logic l1f_start, l1f_busy, l1f_done, l1u_start, l1u_busy, l1u_done;
  logic l2f_start, l2f_busy, l2f_done, l2u_start, l2u_busy, l2u_done;
  logic [JW1-1:0] x1_idx;
  logic [JW2-1:0] x2_idx;
  logic [N_HID-1:0] spk1;
  logic [N_OUT-1:0] spk2;
  logic [N_IN-1:0][15:0] in_buf;
  logic sched_out_valid;
  logic [1:0] ev_ws, ev_ts, ev_g, ev_ov;

  scheduler #(.OVERLAP(OVERLAP)) u_sched (
    .clk, .rst_n, .start, .num_steps, .busy, .done, .phase,
    .in_valid, .in_ready, .out_valid(sched_out_valid),
    .clear, .l1_clear_done(c1_done), .l2_clear_done(c2_done),
    .l1f_start, .l1f_done, .l1u_start, .l1u_done,
    .l2f_start, .l2f_done, .l2u_start, .l2u_done
  );

  always_ff @(posedge clk) begin
    if (in_ready) in_buf <= in_data;
  end

  layer_unit #(.P(P), .N_PRE(N_IN), .N_POST(N_HID), .SPIKE_INPUT(1'b0)) u_l1 (
    .clk, .rst_n, .v_th, .lambda_,
    .clear, .clear_done(c1_done),
    .fwd_start(l1f_start), .fwd_busy(l1f_busy), .fwd_done(l1f_done),
    .upd_start(l1u_start), .upd_busy(l1u_busy), .upd_done(l1u_done),
    .x_idx(x1_idx), .x_val(in_buf[x1_idx]), .spikes(spk1),
    .prm_we(prm_we && !prm_layer), .prm_addr(prm_addr[WAW1-1:0]), .prm_lane(prm_lane[LW-1:0]), .prm_data,
    .ev_w_stall(ev_ws[0]), .ev_tr_stall(ev_ts[0]), .ev_gated(ev_g[0]), .ev_overlap(ev_ov[0])
  );

  layer_unit #(.P(P), .N_PRE(N_HID), .N_POST(N_OUT), .SPIKE_INPUT(1'b1)) u_l2 (
    .clk, .rst_n, .v_th, .lambda_,
    .clear, .clear_done(c2_done),
    .fwd_start(l2f_start), .fwd_busy(l2f_busy), .fwd_done(l2f_done),
    .upd_start(l2u_start), .upd_busy(l2u_busy), .upd_done(l2u_done),
    .x_idx(x2_idx), .x_val(spk1[x2_idx] ? FP16_ONE : FP16_ZERO), .spikes(spk2),
    .prm_we(prm_we && prm_layer), .prm_addr(prm_addr[WAW2-1:0]), .prm_lane(prm_lane[LW-1:0]), .prm_data,
    .ev_w_stall(ev_ws[1]), .ev_tr_stall(ev_ts[1]), .ev_gated(ev_g[1]), .ev_overlap(ev_ov[1])
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid  <= 1'b0;
      out_spikes <= '0;
      {stat_w_stall, stat_tr_stall, stat_gated, stat_overlap} <= '0;
    end else begin
      out_valid <= sched_out_valid;
      if (sched_out_valid) out_spikes <= spk2;
      if (start && !busy) begin
        {stat_w_stall, stat_tr_stall, stat_gated, stat_overlap} <= '0;
      end else begin
        stat_w_stall  <= stat_w_stall  + 32'(ev_ws[0]) + 32'(ev_ws[1]);
        stat_tr_stall <= stat_tr_stall + 32'(ev_ts[0]) + 32'(ev_ts[1]);
        stat_gated    <= stat_gated    + 32'(ev_g[0])  + 32'(ev_g[1]);
        stat_overlap  <= stat_overlap  + 32'(ev_ov[0]) + 32'(ev_ov[1]);
      end
    end
  end

endmodule
