// scheduler: orders the four engines of a two-layer network over time.
//
// For num_steps time steps t = 0..T-1 the work items are L1F(t) (layer-1
// forward), L1U(t) (layer-1 update), L2F(t) and L2U(t). The scheduler keeps a
// started and a finished count per engine and starts an item as soon as its
// engine is idle and its data are ready:
//   L1F(t): input t presented (in_valid), L2F(t-1) finished (layer-1 spikes
//           of t-1 consumed), L1U(t-1) finished, or with OVERLAP only started
//   L1U(t): L1F(t) finished
//   L2F(t): L1F(t) finished, L2U(t-1) finished, or with OVERLAP only started
//   L2U(t): L2F(t) finished
// With OVERLAP = 0 this is exactly the three-part schedule of the
// architecture: a prologue (L1F(0) alone), a main loop whose phase A runs
// L1U(t) beside L2F(t) and whose phase B runs L2U(t) beside L1F(t+1), and an
// epilogue (L2U(T-1) alone). With OVERLAP = 1 (default) a forward pass may
// also begin while its own layer's previous update is still running; the
// layer's valid-data check then holds each weight read until that weight has
// been updated, so results are identical and only the timing changes.
// A run starts with a clear of both layers. in_ready pulses when the input of
// a step is taken (the top latches it), out_valid when layer 2 has produced
// the output spikes of a step, done after the last update.
module scheduler
  import sched_pkg::*;
#(
  parameter bit OVERLAP = 1'b1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [15:0] num_steps,
  output logic        busy,
  output logic        done,
  output phase_t      phase,
  input  logic        in_valid,
  output logic        in_ready,
  output logic        out_valid,
  output logic        clear,
  input  logic        l1_clear_done,
  input  logic        l2_clear_done,
  output logic        l1f_start,
  input  logic        l1f_done,
  output logic        l1u_start,
  input  logic        l1u_done,
  output logic        l2f_start,
  input  logic        l2f_done,
  output logic        l2u_start,
  input  logic        l2u_done
);

  typedef enum logic [1:0] {C_IDLE, C_CLEAR, C_RUN} ctl_t;
  ctl_t ctl;

  logic [15:0] steps;
  logic [15:0] f1s, f1d, u1s, u1d, f2s, f2d, u2s, u2d;
  logic        c1, c2;

  always_comb begin
    l1f_start = (ctl == C_RUN) && f1s == f1d && f1s < steps && in_valid &&
                (f1s == 16'd0 || (f2d >= f1s && (u1d >= f1s || (OVERLAP && u1s >= f1s))));
    l1u_start = (ctl == C_RUN) && u1s == u1d && u1s < f1d;
    l2f_start = (ctl == C_RUN) && f2s == f2d && f2s < f1d &&
                (f2s == 16'd0 || u2d >= f2s || (OVERLAP && u2s >= f2s));
    l2u_start = (ctl == C_RUN) && u2s == u2d && u2s < f2d;
  end

  assign in_ready  = l1f_start;
  assign out_valid = l2f_done;
  assign busy      = (ctl != C_IDLE);

  always_comb begin
    unique case (ctl)
      C_IDLE:  phase = PH_IDLE;
      C_CLEAR: phase = PH_CLEAR;
      default: begin
        if (f1d == 16'd0)                                       phase = PH_PROLOGUE;
        else if (f2d == steps)                                  phase = PH_EPILOGUE;
        else                                                    phase = PH_MAIN;
      end
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctl   <= C_IDLE;
      steps <= '0;
      {f1s, f1d, u1s, u1d, f2s, f2d, u2s, u2d} <= '0;
      {c1, c2} <= '0;
      clear <= 1'b0;
      done  <= 1'b0;
    end else begin
      clear <= 1'b0;
      done  <= 1'b0;
      unique case (ctl)
        C_IDLE: if (start) begin
          steps <= num_steps;
          {f1s, f1d, u1s, u1d, f2s, f2d, u2s, u2d} <= '0;
          {c1, c2} <= '0;
          clear <= 1'b1;
          ctl   <= C_CLEAR;
        end
        C_CLEAR: begin
          if (l1_clear_done) c1 <= 1'b1;
          if (l2_clear_done) c2 <= 1'b1;
          if ((c1 || l1_clear_done) && (c2 || l2_clear_done)) ctl <= C_RUN;
        end
        C_RUN: begin
          f1s <= f1s + 16'(l1f_start);  f1d <= f1d + 16'(l1f_done);
          u1s <= u1s + 16'(l1u_start);  u1d <= u1d + 16'(l1u_done);
          f2s <= f2s + 16'(l2f_start);  f2d <= f2d + 16'(l2f_done);
          u2s <= u2s + 16'(l2u_start);  u2d <= u2d + 16'(l2u_done);
          if (u1d == steps && u2d == steps) begin
            ctl  <= C_IDLE;
            done <= 1'b1;
          end
        end
        default: ctl <= C_IDLE;
      endcase
    end
  end

  a_l1u_after_l1f: assert property (@(posedge clk) disable iff (!rst_n) l1u_start |-> u1s < f1d);
  a_l2f_after_l1f: assert property (@(posedge clk) disable iff (!rst_n) l2f_start |-> f2s < f1d);

endmodule
