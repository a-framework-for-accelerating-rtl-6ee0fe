// caba_top: the assist-warp additions of one GPU streaming multiprocessor,
// applied to bandwidth compression, plus the metadata cache of one memory
// controller.
//
// Data path of the walkthrough:
//  * Loads. A line returning from L2/memory carries a "compressed" bit and,
//    at its head, its encoding. A compressed line triggers, for the warp
//    that asked for it, the decompression subroutine selected by the
//    encoding (event 0, high priority); the load waits in the load replay
//    buffer and is replayed when the assist warp reports completion.
//  * Stores. Stores wait in the buffered store unit, which asks for a
//    low-priority compression assist warp (event 1) and releases the line,
//    compressed or not, to L2; on overflow it releases uncompressed; a
//    partial store into a line found compressed below is fixed up by a
//    decompression assist warp (event 0) and sent again.
//  * Triggers from the three sources are merged here with fixed priority:
//    load decompression, store-path decompression, compression.
//  * The assist warp controller deploys instructions from the assist warp
//    store into the assist warp buffer (inside the instruction buffer), and
//    the issue select gives high-priority assist warps precedence over
//    parent warps and issues low-priority ones only in idle cycles. While a
//    warp has a live high-priority assist warp, decode is held off for
//    that warp (par_ready low) so the assist instructions can enter.
//  * The global predicate register is written and read by the SIMT lanes.
//  * The metadata cache stands alone: it sits at the memory controller,
//    reached through L2 and the crossbar, which are outside this design.
// The core pipeline (fetch/decode, scoreboard, register file, ALUs, LSU),
// L1, L2, crossbar and DRAM are not part of this design; their signals are
// ports. Assist-warp execution is reported back on aw_done_*: a completion
// whose SR.ID has the store bit set finishes a compression; one without it
// finishes the oldest matching waiting load, or else a store-path
// decompression. The event numbering and this routing are this design's.
module caba_top
  import caba_pkg::*;
#(
  parameter int unsigned NUM_WARPS   = 48,
  parameter int unsigned AWT_ENTRIES = 48,
  parameter int unsigned NUM_EVENTS  = 4,
  parameter int unsigned IB_DEPTH    = 2,
  parameter int unsigned LP_DEPTH    = 2,
  parameter int unsigned LRB_ENTRIES = 16,
  parameter int unsigned SB_ENTRIES  = 8,
  parameter int unsigned LINE_BYTES  = 128,
  parameter int unsigned ADDR_W      = 25,
  parameter int unsigned LD_INFO_W   = 32,
  parameter int unsigned UTIL_W      = 4,
  parameter int unsigned MD_BYTES    = 8192,
  parameter int unsigned MD_WAYS     = 4,
  localparam int unsigned WID_W  = $clog2(NUM_WARPS),
  localparam int unsigned EV_W   = $clog2(NUM_EVENTS),
  localparam int unsigned LINE_W = LINE_BYTES * 8,
  localparam int unsigned LANE_W = $clog2(WARP_SIZE),
  localparam int unsigned MD_BA_W = ADDR_W - 7
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // ---- configuration (loaded before the kernel runs)
  input  logic                  aws_ld_en,
  input  sr_id_t                aws_ld_sr,
  input  inst_id_t              aws_ld_inst,
  input  inst_word_t            aws_ld_data,
  input  logic                  cfg_ev_we,
  input  logic [EV_W-1:0]       cfg_ev_idx,
  input  logic                  cfg_ev_enable,
  input  sr_id_t                cfg_ev_sr_base,
  input  logic                  cfg_ev_use_enc,
  input  prio_e                 cfg_ev_prio,
  input  logic                  cfg_end_we,
  input  sr_id_t                cfg_end_sr,
  input  inst_id_t              cfg_end_val,
  input  logic [UTIL_W-1:0]     cfg_util_thresh,
  input  logic                  cmp_enable,
  input  live_regs_t            st_live,       // live registers of store-path assist warps
  // ---- decode -> instruction buffer
  input  logic                  par_valid,
  output logic                  par_ready,
  input  logic [WID_W-1:0]      par_warp,
  input  inst_word_t            par_inst,
  // ---- scoreboard / issue
  input  logic [NUM_WARPS-1:0]  sb_par_ready,
  input  logic [NUM_WARPS-1:0]  sb_aw_ready,
  input  logic                  sb_lp_ready,
  input  logic                  issue_en,
  input  logic [UTIL_W-1:0]     pipe_util,
  output logic                  issue_valid,
  output logic [1:0]            issue_kind,
  output logic [WID_W-1:0]      issue_warp,
  output aw_inst_t              issue_inst,
  // ---- assist-warp completion from the pipeline
  input  logic                  aw_done_valid,
  input  logic [WID_W-1:0]      aw_done_warp,
  input  sr_id_t                aw_done_sr,
  input  logic                  aw_done_ok,    // compression: line compressible
  input  logic [ENC_W-1:0]      aw_done_enc,
  input  logic [LINE_W-1:0]     aw_done_data,
  // ---- kill
  input  logic                  kill_valid,
  input  logic [WID_W-1:0]      kill_warp,
  // ---- global predicate (SIMT lanes)
  input  logic                  gp_we,
  input  logic [WID_W-1:0]      gp_wr_warp,
  input  lane_mask_t            gp_lane_pred,
  input  lane_mask_t            gp_active_mask,
  input  logic [WID_W-1:0]      gp_rd_warp,
  output logic                  gp_pred,
  output logic                  gp_first_fail_valid,
  output logic [LANE_W-1:0]     gp_first_fail_lane,
  // ---- load data returning from L2 (also written into L1 outside)
  input  logic                  ld_fill_valid,
  output logic                  ld_fill_ready,
  input  logic [WID_W-1:0]      ld_fill_warp,
  input  logic [ADDR_W-1:0]     ld_fill_addr,
  input  logic                  ld_fill_compressed,
  input  logic [ENC_W-1:0]      ld_fill_enc,
  input  lane_mask_t            ld_fill_mask,
  input  live_regs_t            ld_fill_live,
  input  logic [LD_INFO_W-1:0]  ld_fill_info,
  output logic                  replay_valid,
  input  logic                  replay_ready,
  output logic [WID_W-1:0]      replay_warp,
  output logic [ADDR_W-1:0]     replay_addr,
  output logic [LD_INFO_W-1:0]  replay_info,
  // ---- stores from the load/store unit and their path to L2
  input  logic                  st_valid,
  output logic                  st_ready,
  input  logic [WID_W-1:0]      st_warp,
  input  logic [ADDR_W-1:0]     st_addr,
  input  logic [LINE_W-1:0]     st_data,
  input  logic [LINE_BYTES-1:0] st_bmask,
  output logic                  rel_valid,
  input  logic                  rel_ready,
  output logic [ADDR_W-1:0]     rel_addr,
  output logic [LINE_W-1:0]     rel_data,
  output logic [LINE_BYTES-1:0] rel_bmask,
  output logic                  rel_compressed,
  output logic [ENC_W-1:0]      rel_enc,
  input  logic                  rel_resp_valid,
  input  logic [ADDR_W-1:0]     rel_resp_addr,
  input  logic                  rel_resp_target_compressed,
  output logic                  st_fetch_valid,
  input  logic                  st_fetch_ready,
  output logic [ADDR_W-1:0]     st_fetch_addr,
  input  logic                  st_fill_valid,
  input  logic [ADDR_W-1:0]     st_fill_addr,
  input  logic [ENC_W-1:0]      st_fill_enc,
  // ---- memory-controller metadata cache
  input  logic                  md_req_valid,
  output logic                  md_req_ready,
  input  logic                  md_req_write,
  input  logic [ADDR_W-1:0]     md_req_addr,
  input  logic [2:0]            md_req_bursts,
  output logic                  md_resp_valid,
  output logic [2:0]            md_resp_bursts,
  output logic                  md_resp_hit,
  output logic                  md_mem_rd_valid,
  input  logic                  md_mem_rd_ready,
  output logic [MD_BA_W-1:0]    md_mem_rd_addr,
  input  logic                  md_mem_fill_valid,
  input  logic [255:0]          md_mem_fill_data,
  output logic                  md_mem_wr_valid,
  input  logic                  md_mem_wr_ready,
  output logic [MD_BA_W-1:0]    md_mem_wr_addr,
  output logic [255:0]          md_mem_wr_data,
  output logic [31:0]           md_hits,
  output logic [31:0]           md_misses,
  // ---- events
  output logic [ADDR_W-1:0]     trig_line_addr, // line the accepted trigger works on
  output logic [$clog2(LRB_ENTRIES):0] lrb_occupancy,
  output logic [$clog2(SB_ENTRIES):0]  sb_occupancy,
  output logic                  sb_overflow,
  output logic                  aw_throttled,
  output logic [NUM_WARPS-1:0]  warp_has_high
);
  localparam logic [EV_W-1:0] EV_DCMP = EV_W'(0);
  localparam logic [EV_W-1:0] EV_CMP  = EV_W'(1);
  localparam int unsigned FREE_W = $clog2((IB_DEPTH > LP_DEPTH ? IB_DEPTH : LP_DEPTH) + 1);

  // ---------------- trigger merge
  logic             trig_valid, trig_ready;
  sr_id_t           trig_sr;
  logic [EV_W-1:0]  trig_event;
  logic [WID_W-1:0] trig_warp;
  logic [ENC_W-1:0] trig_enc;
  live_regs_t       trig_live;
  lane_mask_t       trig_mask;

  logic             lrb_alloc_ready;
  logic             cmp_req_valid, cmp_req_ready, dcmp_req_valid, dcmp_req_ready;
  logic [WID_W-1:0] cmp_req_warp, dcmp_req_warp;
  logic [ENC_W-1:0] dcmp_req_enc;
  logic [ADDR_W-1:0] cmp_req_addr, dcmp_req_addr;
  logic             ld_trig;

  assign ld_trig = ld_fill_valid && ld_fill_compressed && lrb_alloc_ready;

  always_comb begin
    trig_valid = 1'b0;
    trig_event = EV_DCMP;
    trig_warp  = ld_fill_warp;
    trig_enc   = ld_fill_enc;
    trig_live  = ld_fill_live;
    trig_mask  = ld_fill_mask;
    trig_line_addr = ld_fill_addr;
    if (ld_trig) begin
      trig_valid = 1'b1;
    end else if (dcmp_req_valid) begin
      trig_valid = 1'b1;
      trig_warp  = dcmp_req_warp;
      trig_line_addr = dcmp_req_addr;
      trig_enc   = dcmp_req_enc;
      trig_live  = st_live;
      trig_mask  = '1;
    end else if (cmp_req_valid) begin
      trig_valid = 1'b1;
      trig_event = EV_CMP;
      trig_warp  = cmp_req_warp;
      trig_line_addr = cmp_req_addr;
      trig_enc   = '0;
      trig_live  = st_live;
      trig_mask  = '1;
    end
  end

  assign ld_fill_ready  = !ld_fill_compressed || (lrb_alloc_ready && trig_ready);
  assign dcmp_req_ready = !ld_trig && trig_ready;
  assign cmp_req_ready  = !ld_trig && !dcmp_req_valid && trig_ready;

  // ---------------- assist warp store and controller
  logic       aws_rd_en;
  sr_id_t     aws_rd_sr;
  inst_id_t   aws_rd_inst;
  inst_word_t aws_rd_data;

  assist_warp_store u_aws (
    .clk,
    .ld_en(aws_ld_en), .ld_sr(aws_ld_sr), .ld_inst(aws_ld_inst), .ld_data(aws_ld_data),
    .rd_en(aws_rd_en), .rd_sr(aws_rd_sr), .rd_inst(aws_rd_inst), .rd_data(aws_rd_data)
  );

  logic [NUM_WARPS-1:0][FREE_W-1:0] ib_free;
  logic [FREE_W-1:0] lp_free;
  logic              dep_valid;
  logic [WID_W-1:0]  dep_warp;
  aw_inst_t          dep_inst;

  assist_warp_controller #(
    .NUM_WARPS(NUM_WARPS), .AWT_ENTRIES(AWT_ENTRIES), .NUM_EVENTS(NUM_EVENTS),
    .UTIL_W(UTIL_W), .FREE_W(FREE_W)
  ) u_awc (
    .clk, .rst_n,
    .cfg_ev_we, .cfg_ev_idx, .cfg_ev_enable, .cfg_ev_sr_base, .cfg_ev_use_enc, .cfg_ev_prio,
    .cfg_end_we, .cfg_end_sr, .cfg_end_val, .cfg_util_thresh,
    .trig_valid, .trig_ready, .trig_sr, .trig_event, .trig_warp, .trig_enc, .trig_live, .trig_mask,
    .pipe_util,
    .aws_rd_en, .aws_rd_sr, .aws_rd_inst, .aws_rd_data,
    .awb_free(ib_free), .lp_free,
    .dep_valid, .dep_warp, .dep_inst,
    .kill_valid, .kill_warp,
    .warp_has_high, .throttled(aw_throttled)
  );

  // ---------------- instruction buffer with the assist warp buffer
  logic [NUM_WARPS-1:0]       head_par_valid, head_aw_valid;
  inst_word_t [NUM_WARPS-1:0] head_par_inst;
  aw_inst_t [NUM_WARPS-1:0]   head_aw;
  logic                       lp_valid;
  logic [WID_W-1:0]           lp_warp;
  aw_inst_t                   lp_inst;

  assist_warp_buffer #(.NUM_WARPS(NUM_WARPS), .IB_DEPTH(IB_DEPTH), .LP_DEPTH(LP_DEPTH)) u_awb (
    .clk, .rst_n,
    .par_valid, .par_ready, .par_warp, .par_inst,
    .aw_valid(dep_valid), .aw_warp(dep_warp), .aw_inst(dep_inst), .par_hold(warp_has_high),
    .ib_free, .lp_free,
    .head_par_valid, .head_par_inst, .head_aw_valid, .head_aw,
    .lp_valid, .lp_warp, .lp_inst,
    .pop_valid(issue_valid), .pop_kind(issue_kind), .pop_warp(issue_warp),
    .flush_valid(kill_valid), .flush_warp(kill_warp)
  );

  caba_issue_select #(.NUM_WARPS(NUM_WARPS)) u_sel (
    .clk, .rst_n,
    .head_par_valid, .head_par_inst, .head_aw_valid, .head_aw,
    .lp_valid, .lp_warp, .lp_inst,
    .sb_par_ready, .sb_aw_ready, .sb_lp_ready, .issue_en,
    .issue_valid, .issue_kind, .issue_warp, .issue_inst
  );

  global_predicate #(.NUM_WARPS(NUM_WARPS)) u_gp (
    .clk, .rst_n,
    .we(gp_we), .wr_warp(gp_wr_warp), .lane_pred(gp_lane_pred), .active_mask(gp_active_mask),
    .rd_warp(gp_rd_warp), .gpred(gp_pred),
    .first_fail_valid(gp_first_fail_valid), .first_fail_lane(gp_first_fail_lane)
  );

  // ---------------- completion routing
  logic done_is_cmp, lrb_match;
  assign done_is_cmp = aw_done_sr[SR_ID_W-1];

  load_replay_buffer #(
    .ENTRIES(LRB_ENTRIES), .NUM_WARPS(NUM_WARPS), .ADDR_W(ADDR_W), .LD_INFO_W(LD_INFO_W)
  ) u_lrb (
    .clk, .rst_n,
    .alloc_valid(ld_fill_valid && ld_fill_compressed && trig_ready), .alloc_ready(lrb_alloc_ready),
    .alloc_warp(ld_fill_warp), .alloc_sr(trig_sr),
    .alloc_addr(ld_fill_addr), .alloc_info(ld_fill_info),
    .done_valid(aw_done_valid && !done_is_cmp), .done_warp(aw_done_warp), .done_sr(aw_done_sr),
    .done_match(lrb_match),
    .kill_valid, .kill_warp,
    .replay_valid, .replay_ready, .replay_warp, .replay_addr, .replay_info,
    .occupancy(lrb_occupancy)
  );

  buffered_store_unit #(
    .ENTRIES(SB_ENTRIES), .NUM_WARPS(NUM_WARPS), .LINE_BYTES(LINE_BYTES), .ADDR_W(ADDR_W)
  ) u_sb (
    .clk, .rst_n, .cmp_enable,
    .st_valid, .st_ready, .st_warp, .st_addr, .st_data, .st_bmask,
    .cmp_req_valid, .cmp_req_ready, .cmp_req_warp, .cmp_req_addr,
    .cmp_done_valid(aw_done_valid && done_is_cmp), .cmp_done_warp(aw_done_warp),
    .cmp_done_ok(aw_done_ok), .cmp_done_enc(aw_done_enc), .cmp_done_data(aw_done_data),
    .rel_valid, .rel_ready, .rel_addr, .rel_data, .rel_bmask, .rel_compressed, .rel_enc,
    .resp_valid(rel_resp_valid), .resp_addr(rel_resp_addr),
    .resp_target_compressed(rel_resp_target_compressed),
    .fetch_valid(st_fetch_valid), .fetch_ready(st_fetch_ready), .fetch_addr(st_fetch_addr),
    .fill_valid(st_fill_valid), .fill_addr(st_fill_addr), .fill_enc(st_fill_enc),
    .dcmp_req_valid, .dcmp_req_ready, .dcmp_req_warp, .dcmp_req_enc, .dcmp_req_addr,
    .dcmp_done_valid(aw_done_valid && !done_is_cmp && !lrb_match), .dcmp_done_warp(aw_done_warp),
    .dcmp_done_data(aw_done_data),
    .kill_valid, .kill_warp,
    .overflow(sb_overflow), .occupancy(sb_occupancy)
  );

  // ---------------- memory-controller metadata cache
  md_cache #(.SIZE_BYTES(MD_BYTES), .WAYS(MD_WAYS), .BLOCK_BYTES(32), .ADDR_W(ADDR_W)) u_md (
    .clk, .rst_n,
    .req_valid(md_req_valid), .req_ready(md_req_ready), .req_write(md_req_write),
    .req_addr(md_req_addr), .req_bursts(md_req_bursts),
    .resp_valid(md_resp_valid), .resp_bursts(md_resp_bursts), .resp_hit(md_resp_hit),
    .mem_rd_valid(md_mem_rd_valid), .mem_rd_ready(md_mem_rd_ready), .mem_rd_addr(md_mem_rd_addr),
    .mem_fill_valid(md_mem_fill_valid), .mem_fill_data(md_mem_fill_data),
    .mem_wr_valid(md_mem_wr_valid), .mem_wr_ready(md_mem_wr_ready), .mem_wr_addr(md_mem_wr_addr),
    .mem_wr_data(md_mem_wr_data), .hits(md_hits), .misses(md_misses)
  );

endmodule
