// assist_warp_table (AWT): the table of live assist-warp instances, held
// inside the assist warp controller.
//
// Each entry keeps the fields the paper lists for the table: parent Warp ID,
// live-in/out register IDs, active mask, priority, SR.ID, Inst.ID (the next
// instruction to deploy) and SR.End (the last instruction of the subroutine).
// A trigger fills the lowest free entry. Every cycle the table offers, in
// round-robin order starting after the last entry served, one entry among
// those the controller marks eligible; when the controller takes it (adv),
// Inst.ID moves to the next instruction, or the entry is freed if the end of
// the subroutine was reached. A kill frees every entry of one warp.
// As the paper requires, at most one instance of a subroutine is live per
// parent warp: a second trigger of the same (warp, SR.ID) is held off with
// ins_ready low. Round-robin start point and lowest-free allocation are this
// design's choices.
//
// Timing: insert, advance and kill take effect at the next clock edge; the
// selection (sel_*) is combinational from the table and the eligible mask.
module assist_warp_table
  import caba_pkg::*;
#(
  parameter int unsigned ENTRIES   = 48,
  parameter int unsigned NUM_WARPS = 48,
  localparam int unsigned IDX_W  = $clog2(ENTRIES),
  localparam int unsigned WID_W  = $clog2(NUM_WARPS)
) (
  input  logic              clk,
  input  logic              rst_n,
  // insert a triggered instance
  input  logic              ins_valid,
  output logic              ins_ready,
  input  logic [WID_W-1:0]  ins_warp,
  input  live_regs_t        ins_live,
  input  lane_mask_t        ins_mask,
  input  prio_e             ins_prio,
  input  sr_id_t            ins_sr,
  input  inst_id_t          ins_sr_end,
  // per-entry view for the controller's eligibility logic
  output logic [ENTRIES-1:0]            ent_valid,
  output logic [ENTRIES-1:0][WID_W-1:0] ent_warp,
  output prio_e [ENTRIES-1:0]           ent_prio,
  input  logic [ENTRIES-1:0]            eligible,
  // round-robin selection
  output logic              sel_valid,
  output logic [IDX_W-1:0]  sel_idx,
  output logic [WID_W-1:0]  sel_warp,
  output live_regs_t        sel_live,
  output lane_mask_t        sel_mask,
  output prio_e             sel_prio,
  output sr_id_t            sel_sr,
  output inst_id_t          sel_inst,
  output logic              sel_last,
  input  logic              adv,
  // kill all instances of a warp
  input  logic              kill_valid,
  input  logic [WID_W-1:0]  kill_warp
);
  typedef struct packed {
    logic             valid;
    logic [WID_W-1:0] warp;
    live_regs_t       live;
    lane_mask_t       mask;
    prio_e            prio;
    sr_id_t           sr;
    inst_id_t         inst;
    inst_id_t         sr_end;
  } awt_entry_t;

  awt_entry_t tbl [ENTRIES];
  logic [IDX_W-1:0] rr_ptr;

  // allocation: lowest free entry, no duplicate (warp, SR.ID)
  logic             have_free, dup;
  logic [IDX_W-1:0] free_idx;
  always_comb begin
    have_free = 1'b0;
    free_idx  = '0;
    dup       = 1'b0;
    for (int i = ENTRIES - 1; i >= 0; i--) begin
      if (!tbl[i].valid) begin
        have_free = 1'b1;
        free_idx  = IDX_W'(i);
      end
      if (tbl[i].valid && tbl[i].warp == ins_warp && tbl[i].sr == ins_sr) dup = 1'b1;
    end
  end
  assign ins_ready = have_free && !dup;

  always_comb begin
    for (int i = 0; i < ENTRIES; i++) begin
      ent_valid[i] = tbl[i].valid;
      ent_warp[i]  = tbl[i].warp;
      ent_prio[i]  = tbl[i].prio;
    end
  end

  // round-robin pick among valid & eligible entries, starting at rr_ptr+1
  always_comb begin
    logic [IDX_W-1:0] k;
    sel_valid = 1'b0;
    sel_idx   = '0;
    for (int n = ENTRIES; n >= 1; n--) begin
      k = IDX_W'((32'(rr_ptr) + 32'(n)) % ENTRIES);
      if (tbl[k].valid && eligible[k]) begin
        sel_valid = 1'b1;
        sel_idx   = k;
      end
    end
  end
  assign sel_warp = tbl[sel_idx].warp;
  assign sel_live = tbl[sel_idx].live;
  assign sel_mask = tbl[sel_idx].mask;
  assign sel_prio = tbl[sel_idx].prio;
  assign sel_sr   = tbl[sel_idx].sr;
  assign sel_inst = tbl[sel_idx].inst;
  assign sel_last = (tbl[sel_idx].inst == tbl[sel_idx].sr_end);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr_ptr <= IDX_W'(ENTRIES - 1);
      for (int i = 0; i < ENTRIES; i++) tbl[i] <= '0;
    end else begin
      if (adv && sel_valid) begin
        rr_ptr <= sel_idx;
        if (sel_last) tbl[sel_idx].valid <= 1'b0;
        else          tbl[sel_idx].inst  <= tbl[sel_idx].inst + 1'b1;
      end
      if (ins_valid && ins_ready) begin
        tbl[free_idx] <= '{valid: 1'b1, warp: ins_warp, live: ins_live, mask: ins_mask,
                           prio: ins_prio, sr: ins_sr, inst: '0, sr_end: ins_sr_end};
      end
      if (kill_valid) begin
        for (int i = 0; i < ENTRIES; i++)
          if (tbl[i].valid && tbl[i].warp == kill_warp) tbl[i].valid <= 1'b0;
      end
    end
  end

  // an instance never advances past its end
  a_inst_in_range: assert property (@(posedge clk) disable iff (!rst_n)
      sel_valid |-> tbl[sel_idx].inst <= tbl[sel_idx].sr_end);
endmodule
