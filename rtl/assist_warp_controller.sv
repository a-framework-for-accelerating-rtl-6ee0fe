// assist_warp_controller (AWC): triggers, tracks and deploys assist warps.
//
// The controller keeps a programmable map from trigger events to
// subroutines (base SR.ID, whether the line's compression encoding is added
// to it, priority) and the end index (SR.End) of every subroutine; both are
// written through the cfg_* port together with the code in the assist warp
// store. A trigger (event, parent warp, encoding, live registers, active
// mask) becomes an instance in the assist warp table. Every cycle the
// table's round-robin pick among eligible instances is deployed: its
// {SR.ID, Inst.ID} addresses the assist warp store, and one clock later the
// instruction is pushed into the assist warp buffer with the warp ID,
// priority and active mask. At most one instruction is deployed per cycle.
//
// Eligibility implements the paper's priorities and throttling:
// a high-priority instance needs a free slot in its parent warp's buffer
// partition; a low-priority one needs a free slot in the low-priority
// partition and a pipeline utilization (pipe_util, e.g. the number of busy
// functional units reported by the core) below cfg_util_thresh. A
// trigger whose event is disabled is accepted and dropped. A kill flushes
// the warp's instances and any instruction of that warp in flight.
// warp_has_high marks warps with a live high-priority instance; the buffer
// uses it to stop taking new parent instructions for such a warp.
// The one-instruction deploy width, the utilization threshold test, the
// parent hold and the configuration port are this design's choices.
module assist_warp_controller
  import caba_pkg::*;
#(
  parameter int unsigned NUM_WARPS   = 48,
  parameter int unsigned AWT_ENTRIES = 48,
  parameter int unsigned NUM_EVENTS  = 4,
  parameter int unsigned UTIL_W      = 4,
  parameter int unsigned FREE_W      = 2,   // width of the buffers' free-slot counts
  localparam int unsigned WID_W = $clog2(NUM_WARPS),
  localparam int unsigned EV_W  = $clog2(NUM_EVENTS),
  localparam int unsigned IDX_W = $clog2(AWT_ENTRIES)
) (
  input  logic               clk,
  input  logic               rst_n,
  // configuration: event map, subroutine ends, throttle threshold
  input  logic               cfg_ev_we,
  input  logic [EV_W-1:0]    cfg_ev_idx,
  input  logic               cfg_ev_enable,
  input  sr_id_t             cfg_ev_sr_base,
  input  logic               cfg_ev_use_enc,
  input  prio_e              cfg_ev_prio,
  input  logic               cfg_end_we,
  input  sr_id_t             cfg_end_sr,
  input  inst_id_t           cfg_end_val,
  input  logic [UTIL_W-1:0]  cfg_util_thresh,
  // trigger (Fig. 4, 1)
  input  logic               trig_valid,
  output logic               trig_ready,
  output sr_id_t             trig_sr,       // subroutine the trigger maps to
  input  logic [EV_W-1:0]    trig_event,
  input  logic [WID_W-1:0]   trig_warp,
  input  logic [ENC_W-1:0]   trig_enc,
  input  live_regs_t         trig_live,
  input  lane_mask_t         trig_mask,
  // pipeline utilization (Fig. 4, 7)
  input  logic [UTIL_W-1:0]  pipe_util,
  // assist warp store read port (Fig. 4, 3)
  output logic               aws_rd_en,
  output sr_id_t             aws_rd_sr,
  output inst_id_t           aws_rd_inst,
  input  inst_word_t         aws_rd_data,
  // buffer space
  input  logic [NUM_WARPS-1:0][FREE_W-1:0] awb_free,
  input  logic [FREE_W-1:0]  lp_free,
  // deployment into the assist warp buffer (Fig. 4, 5/6)
  output logic               dep_valid,
  output logic [WID_W-1:0]   dep_warp,
  output aw_inst_t           dep_inst,
  // kill
  input  logic               kill_valid,
  input  logic [WID_W-1:0]   kill_warp,
  // status
  output logic [NUM_WARPS-1:0] warp_has_high,  // a high-priority instance is live
  output logic               throttled        // a low-priority instance waited on utilization
);
  typedef struct packed {
    logic   enable;
    sr_id_t sr_base;
    logic   use_enc;
    prio_e  prio;
  } ev_cfg_t;

  ev_cfg_t  ev_tbl [NUM_EVENTS];
  inst_id_t sr_end [NUM_SR];
  logic [UTIL_W-1:0] util_thresh;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_EVENTS; i++) ev_tbl[i] <= '0;
      for (int i = 0; i < NUM_SR; i++) sr_end[i] <= '0;
      util_thresh <= '0;
    end else begin
      if (cfg_ev_we) ev_tbl[cfg_ev_idx] <= '{cfg_ev_enable, cfg_ev_sr_base, cfg_ev_use_enc, cfg_ev_prio};
      if (cfg_end_we) sr_end[cfg_end_sr] <= cfg_end_val;
      util_thresh <= cfg_util_thresh;
    end
  end

  // trigger decode
  ev_cfg_t ev;
  logic    ins_ready;
  assign ev      = ev_tbl[trig_event];
  assign trig_sr = ev.sr_base + (ev.use_enc ? sr_id_t'(trig_enc) : '0);
  assign trig_ready = !ev.enable || ins_ready;

  // AWT
  logic [AWT_ENTRIES-1:0]            ent_valid, eligible;
  logic [AWT_ENTRIES-1:0][WID_W-1:0] ent_warp;
  prio_e [AWT_ENTRIES-1:0]           ent_prio;
  logic             sel_valid, sel_last, adv;
  logic [IDX_W-1:0] sel_idx;
  logic [WID_W-1:0] sel_warp;
  live_regs_t       sel_live;
  lane_mask_t       sel_mask;
  prio_e            sel_prio;
  sr_id_t           sel_sr;
  inst_id_t         sel_inst;

  assist_warp_table #(.ENTRIES(AWT_ENTRIES), .NUM_WARPS(NUM_WARPS)) u_awt (
    .clk, .rst_n,
    .ins_valid (trig_valid && ev.enable), .ins_ready,
    .ins_warp  (trig_warp), .ins_live(trig_live), .ins_mask(trig_mask),
    .ins_prio  (ev.prio), .ins_sr(trig_sr), .ins_sr_end(sr_end[trig_sr]),
    .ent_valid, .ent_warp, .ent_prio, .eligible,
    .sel_valid, .sel_idx, .sel_warp, .sel_live, .sel_mask, .sel_prio, .sel_sr, .sel_inst, .sel_last,
    .adv,
    .kill_valid, .kill_warp
  );

  // one instruction in flight between the store read and the buffer push
  logic             f_valid;
  logic [WID_W-1:0] f_warp;
  prio_e            f_prio;
  aw_inst_t         f_meta;

  logic util_ok;
  assign util_ok = pipe_util < util_thresh;

  always_comb begin
    for (int i = 0; i < AWT_ENTRIES; i++) begin
      if (ent_prio[i] == PRIO_HIGH)
        eligible[i] = 32'(awb_free[ent_warp[i]]) >
                      ((f_valid && f_prio == PRIO_HIGH && f_warp == ent_warp[i]) ? 32'd1 : 32'd0);
      else
        eligible[i] = util_ok &&
                      32'(lp_free) > ((f_valid && f_prio == PRIO_LOW) ? 32'd1 : 32'd0);
      if (kill_valid && ent_warp[i] == kill_warp) eligible[i] = 1'b0;
    end
  end

  assign adv         = sel_valid;
  assign aws_rd_en   = sel_valid;
  assign aws_rd_sr   = sel_sr;
  assign aws_rd_inst = sel_inst;

  always_comb begin
    throttled = 1'b0;
    for (int i = 0; i < AWT_ENTRIES; i++)
      if (ent_valid[i] && ent_prio[i] == PRIO_LOW && !util_ok) throttled = 1'b1;
  end

  always_comb begin
    warp_has_high = '0;
    for (int i = 0; i < AWT_ENTRIES; i++)
      if (ent_valid[i] && ent_prio[i] == PRIO_HIGH) warp_has_high[ent_warp[i]] = 1'b1;
    if (f_valid && f_prio == PRIO_HIGH) warp_has_high[f_warp] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      f_valid <= 1'b0;
      f_warp  <= '0;
      f_prio  <= PRIO_LOW;
      f_meta  <= '0;
    end else begin
      f_valid <= sel_valid;
      if (sel_valid) begin
        f_warp <= sel_warp;
        f_prio <= sel_prio;
        f_meta <= '{inst: '0, sr_id: sel_sr, inst_id: sel_inst, is_last: sel_last,
                    prio: sel_prio, mask: sel_mask, live: sel_live};
      end
    end
  end

  always_comb begin
    dep_valid = f_valid && !(kill_valid && f_warp == kill_warp);
    dep_warp  = f_warp;
    dep_inst  = f_meta;
    dep_inst.inst = aws_rd_data;
  end
endmodule
