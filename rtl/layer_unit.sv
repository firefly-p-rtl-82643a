// layer_unit: one fully connected spiking layer with on-chip plasticity.
//
// A layer owns its memories and both engines:
//   weight RAM      NT*N_PRE words of P FP16 weights (word = tile, input)
//   parameter RAM   same addressing, P packed {alpha,beta,gamma,delta}
//   post-trace RAM  NT words of P traces; pre-trace RAM N_PRE single traces
//   membrane RAM    NT words of P potentials
//   forward_engine  inference pass; plasticity_engine  update pass
// The two engines may run at the same time: the update of step t while the
// forward pass of step t+1 (when the scheduler allows it) and, always, while
// the other layer works. They share RAM ports as follows, each shared port
// being a write-priority arbiter (wp_arbiter):
//   weight RAM port A: plasticity writes (priority) / forward reads
//   weight RAM port B: plasticity reads
//   trace RAMs port A: forward writes (priority) / plasticity reads
//   trace RAMs port B: forward reads
// Valid-data check: while an update pass is running, a forward read of weight
// word a is held until the update has written word a (a < wr_cnt). The
// forward engine therefore always uses the newest weights; and because it
// writes a tile's postsynaptic traces only after reading all of the tile's
// words, and the input traces only in the last tile, the update pass has
// always read a trace before the forward pass overwrites it. No RAM is double
// buffered. With the scheduler used here the update pass always starts ahead
// of the forward pass of the same layer and reads each trace before the
// forward pass comes to write it, so the trace arbiters never actually hold a
// read; they are kept as a safeguard for other schedules.
// Port A read data of the parameter and membrane RAMs is left unused
// (p_a_rdata_unused, v_a_rdata_unused): those ports only write.
//
// clear starts a sweep that writes zero to every weight, trace and membrane
// word (one word per cycle, max(NT*N_PRE, N_PRE) cycles), giving the
// zero-initialised state the online learning starts from; clear_done pulses at
// its end. The parameter RAM is written by the host through prm_*.
module layer_unit
  import fp16_pkg::*;
#(
  parameter int unsigned P           = 16,
  parameter int unsigned N_PRE       = 32,
  parameter int unsigned N_POST      = 128,
  parameter bit          SPIKE_INPUT = 1'b0,
  parameter int unsigned NT          = (N_POST + P - 1) / P,
  parameter int unsigned WAW         = (N_PRE * NT > 1) ? $clog2(N_PRE * NT) : 1,
  parameter int unsigned TW          = (NT > 1) ? $clog2(NT) : 1,
  parameter int unsigned JW          = (N_PRE > 1) ? $clog2(N_PRE) : 1,
  parameter int unsigned LW          = (P > 1) ? $clog2(P) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  fp16_t             v_th,
  input  fp16_t             lambda_,
  input  logic              clear,
  output logic              clear_done,
  input  logic              fwd_start,
  output logic              fwd_busy,
  output logic              fwd_done,
  input  logic              upd_start,
  output logic              upd_busy,
  output logic              upd_done,
  output logic [JW-1:0]     x_idx,
  input  fp16_t             x_val,
  output logic [N_POST-1:0] spikes,
  input  logic              prm_we,
  input  logic [WAW-1:0]    prm_addr,
  input  logic [LW-1:0]     prm_lane,
  input  prm_t              prm_data,
  // activity, one pulse per event
  output logic              ev_w_stall,
  output logic              ev_tr_stall,
  output logic              ev_gated,
  output logic              ev_overlap
);

  localparam int unsigned WDEPTH = N_PRE * NT;
  localparam int unsigned CLRN   = (WDEPTH > N_PRE) ? WDEPTH : N_PRE;

  // ---------------- clear sweep
  logic          clearing;
  logic [WAW:0]  clr_cnt;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clearing   <= 1'b0;
      clr_cnt    <= '0;
      clear_done <= 1'b0;
    end else begin
      clear_done <= 1'b0;
      if (clear && !clearing) begin
        clearing <= 1'b1;
        clr_cnt  <= '0;
      end else if (clearing) begin
        if (32'(clr_cnt) == CLRN - 1) begin
          clearing   <= 1'b0;
          clear_done <= 1'b1;
        end
        clr_cnt <= clr_cnt + 1'b1;
      end
    end
  end
  logic clr_w, clr_t, clr_pre;
  assign clr_w   = clearing && (32'(clr_cnt) < WDEPTH);
  assign clr_t   = clearing && (32'(clr_cnt) < NT);
  assign clr_pre = clearing && (32'(clr_cnt) < N_PRE);

  // ---------------- engine signals
  logic               f_w_req, f_w_gnt, f_v_rd, f_v_wr, f_post_rd, f_post_wr, f_pre_rd, f_pre_wr;
  logic [WAW-1:0]     f_w_addr;
  logic [TW-1:0]      f_v_rd_a, f_v_wr_a, f_post_rd_a, f_post_wr_a;
  logic [JW-1:0]      f_pre_rd_a, f_pre_wr_a;
  logic [P*16-1:0]    f_v_wd, f_post_wd;
  fp16_t              f_pre_wd;
  logic [NT*P-1:0]    f_spikes;

  logic               u_w_rd, u_p_rd, u_pre_req, u_pre_gnt, u_post_req, u_post_gnt, u_w_wr;
  logic [WAW-1:0]     u_w_rd_a, u_p_rd_a, u_w_wr_a;
  logic [JW-1:0]      u_pre_a;
  logic [TW-1:0]      u_post_a;
  logic [P*16-1:0]    u_w_wd;
  logic [WAW:0]       u_wr_cnt;

  logic [P*16-1:0]    w_a_rdata, w_b_rdata, v_b_rdata, post_a_rdata, post_b_rdata;
  logic [P*64-1:0]    p_b_rdata, p_a_rdata_unused;
  logic [15:0]        pre_a_rdata, pre_b_rdata;

  forward_engine #(.P(P), .N_PRE(N_PRE), .N_POST(N_POST), .SPIKE_INPUT(SPIKE_INPUT)) u_fwd (
    .clk, .rst_n, .start(fwd_start), .v_th, .lambda_, .busy(fwd_busy), .done(fwd_done),
    .x_idx, .x_val,
    .w_rd_req(f_w_req), .w_rd_addr(f_w_addr), .w_rd_gnt(f_w_gnt), .w_rd_data(w_a_rdata),
    .v_rd_en(f_v_rd), .v_rd_addr(f_v_rd_a), .v_rd_data(v_b_rdata),
    .v_wr_en(f_v_wr), .v_wr_addr(f_v_wr_a), .v_wr_data(f_v_wd),
    .post_rd_en(f_post_rd), .post_rd_addr(f_post_rd_a), .post_rd_data(post_b_rdata),
    .post_wr_req(f_post_wr), .post_wr_addr(f_post_wr_a), .post_wr_data(f_post_wd),
    .pre_rd_en(f_pre_rd), .pre_rd_addr(f_pre_rd_a), .pre_rd_data(pre_b_rdata),
    .pre_wr_req(f_pre_wr), .pre_wr_addr(f_pre_wr_a), .pre_wr_data(f_pre_wd),
    .spikes(f_spikes), .mac_gated(ev_gated)
  );

  plasticity_engine #(.P(P), .N_PRE(N_PRE), .N_POST(N_POST)) u_upd (
    .clk, .rst_n, .start(upd_start), .busy(upd_busy), .done(upd_done), .wr_cnt(u_wr_cnt),
    .w_rd_en(u_w_rd), .w_rd_addr(u_w_rd_a), .w_rd_data(w_b_rdata),
    .p_rd_en(u_p_rd), .p_rd_addr(u_p_rd_a), .p_rd_data(p_b_rdata),
    .pre_rd_req(u_pre_req), .pre_rd_addr(u_pre_a), .pre_rd_gnt(u_pre_gnt), .pre_rd_data(pre_a_rdata),
    .post_rd_req(u_post_req), .post_rd_addr(u_post_a), .post_rd_gnt(u_post_gnt), .post_rd_data(post_a_rdata),
    .w_wr_req(u_w_wr), .w_wr_addr(u_w_wr_a), .w_wr_data(u_w_wd)
  );

  assign spikes = f_spikes[N_POST-1:0];

  // ---------------- weight RAM
  logic             wa_en;
  logic [P-1:0]     wa_we;
  logic [WAW-1:0]   wa_addr;
  logic [P*16-1:0]  wa_wdata;
  logic             w_allow, w_stall;
  assign w_allow = !upd_busy || ({1'b0, f_w_addr} < u_wr_cnt);

  wp_arbiter #(.AW(WAW), .DW(P*16), .LANES(P)) u_w_arb (
    .clk, .rst_n,
    .wr_req(u_w_wr), .wr_addr(u_w_wr_a), .wr_data(u_w_wd), .wr_mask('1),
    .rd_req(f_w_req), .rd_addr(f_w_addr), .rd_allow(w_allow),
    .rd_gnt(f_w_gnt), .rd_stall(w_stall),
    .ram_en(wa_en), .ram_we(wa_we), .ram_addr(wa_addr), .ram_wdata(wa_wdata)
  );

  dp_ram #(.LANES(P), .LANE_W(16), .DEPTH(WDEPTH)) u_wram (
    .clk,
    .a_en   (clr_w ? 1'b1 : wa_en),
    .a_we   (clr_w ? '1 : wa_we),
    .a_addr (clr_w ? clr_cnt[WAW-1:0] : wa_addr),
    .a_wdata(clr_w ? '0 : wa_wdata),
    .a_rdata(w_a_rdata),
    .b_en   (u_w_rd), .b_addr(u_w_rd_a), .b_rdata(w_b_rdata)
  );

  // ---------------- plasticity parameter RAM
  logic [P-1:0] prm_we_lane;
  always_comb begin
    prm_we_lane = '0;
    prm_we_lane[prm_lane] = prm_we;
  end
  dp_ram #(.LANES(P), .LANE_W(64), .DEPTH(WDEPTH)) u_pram (
    .clk,
    .a_en(prm_we), .a_we(prm_we_lane), .a_addr(prm_addr), .a_wdata({P{prm_data}}),
    .a_rdata(p_a_rdata_unused),
    .b_en(u_p_rd), .b_addr(u_p_rd_a), .b_rdata(p_b_rdata)
  );

  // ---------------- membrane RAM (forward engine only)
  logic [P*16-1:0]  v_a_rdata_unused;   // port A is write-only here
  dp_ram #(.LANES(P), .LANE_W(16), .DEPTH(NT), .AW(TW)) u_vram (
    .clk,
    .a_en   (clr_t || f_v_wr),
    .a_we   ((clr_t || f_v_wr) ? '1 : '0),
    .a_addr (clr_t ? clr_cnt[TW-1:0] : f_v_wr_a),
    .a_wdata(clr_t ? '0 : f_v_wd),
    .a_rdata(v_a_rdata_unused),
    .b_en(f_v_rd), .b_addr(f_v_rd_a), .b_rdata(v_b_rdata)
  );

  // ---------------- postsynaptic trace RAM
  logic             ta_en, post_stall;
  logic [P-1:0]     ta_we;
  logic [TW-1:0]    ta_addr;
  logic [P*16-1:0]  ta_wdata;
  wp_arbiter #(.AW(TW), .DW(P*16), .LANES(P)) u_post_arb (
    .clk, .rst_n,
    .wr_req(f_post_wr), .wr_addr(f_post_wr_a), .wr_data(f_post_wd), .wr_mask('1),
    .rd_req(u_post_req), .rd_addr(u_post_a), .rd_allow(1'b1),
    .rd_gnt(u_post_gnt), .rd_stall(post_stall),
    .ram_en(ta_en), .ram_we(ta_we), .ram_addr(ta_addr), .ram_wdata(ta_wdata)
  );
  dp_ram #(.LANES(P), .LANE_W(16), .DEPTH(NT), .AW(TW)) u_post_ram (
    .clk,
    .a_en   (clr_t ? 1'b1 : ta_en),
    .a_we   (clr_t ? '1 : ta_we),
    .a_addr (clr_t ? clr_cnt[TW-1:0] : ta_addr),
    .a_wdata(clr_t ? '0 : ta_wdata),
    .a_rdata(post_a_rdata),
    .b_en(f_post_rd), .b_addr(f_post_rd_a), .b_rdata(post_b_rdata)
  );

  // ---------------- presynaptic trace RAM
  logic             pa_en, pa_we, pre_stall;
  logic [JW-1:0]    pa_addr;
  logic [15:0]      pa_wdata;
  wp_arbiter #(.AW(JW), .DW(16), .LANES(1)) u_pre_arb (
    .clk, .rst_n,
    .wr_req(f_pre_wr), .wr_addr(f_pre_wr_a), .wr_data(f_pre_wd), .wr_mask(1'b1),
    .rd_req(u_pre_req), .rd_addr(u_pre_a), .rd_allow(1'b1),
    .rd_gnt(u_pre_gnt), .rd_stall(pre_stall),
    .ram_en(pa_en), .ram_we(pa_we), .ram_addr(pa_addr), .ram_wdata(pa_wdata)
  );
  dp_ram #(.LANES(1), .LANE_W(16), .DEPTH(N_PRE), .AW(JW)) u_pre_ram (
    .clk,
    .a_en   (clr_pre ? 1'b1 : pa_en),
    .a_we   (clr_pre ? 1'b1 : pa_we),
    .a_addr (clr_pre ? clr_cnt[JW-1:0] : pa_addr),
    .a_wdata(clr_pre ? 16'd0 : pa_wdata),
    .a_rdata(pre_a_rdata),
    .b_en(f_pre_rd), .b_addr(f_pre_rd_a), .b_rdata(pre_b_rdata)
  );

  assign ev_w_stall  = w_stall;
  assign ev_tr_stall = post_stall || pre_stall;
  assign ev_overlap  = fwd_start && upd_busy;

  a_no_clear_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
                                          clearing |-> !fwd_busy && !upd_busy);

endmodule
