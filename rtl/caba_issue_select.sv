// caba_issue_select: the warp scheduler's choice between parent-warp and
// assist-warp instructions.
//
// The paper keeps the baseline greedy-then-oldest (GTO) scheduler and adds
// priorities: a high-priority assist instruction always goes ahead of parent
// instructions, and a low-priority assist instruction is issued only in a
// cycle in which nothing else could issue (an idle cycle). This block makes
// that choice each cycle, from the buffer heads and from per-warp readiness
// reported by the scoreboard (which tracks assist instructions exactly like
// parent ones):
//   1. high-priority assist heads, round robin over warps;
//   2. parent heads, GTO: the warp issued last if still ready, else the
//      lowest-numbered ready warp (warp number stands in for age);
//   3. the low-priority partition's head, only if 1 and 2 found nothing.
// The round robin among assist heads and the use of the warp number as age
// are this design's choices. Purely combinational except for the GTO and
// round-robin pointers, which move at the clock edge after an issue.
module caba_issue_select
  import caba_pkg::*;
#(
  parameter int unsigned NUM_WARPS = 48,
  localparam int unsigned WID_W = $clog2(NUM_WARPS)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [NUM_WARPS-1:0]  head_par_valid,
  input  inst_word_t [NUM_WARPS-1:0] head_par_inst,
  input  logic [NUM_WARPS-1:0]  head_aw_valid,
  input  aw_inst_t [NUM_WARPS-1:0] head_aw,
  input  logic                  lp_valid,
  input  logic [WID_W-1:0]      lp_warp,
  input  aw_inst_t              lp_inst,
  // scoreboard: operands of the head instruction are ready
  input  logic [NUM_WARPS-1:0]  sb_par_ready,
  input  logic [NUM_WARPS-1:0]  sb_aw_ready,
  input  logic                  sb_lp_ready,
  // the issue stage can accept an instruction this cycle
  input  logic                  issue_en,
  // chosen instruction; pop_* is the same choice sent back to the buffer
  output logic                  issue_valid,
  output logic [1:0]            issue_kind,  // 0 parent, 1 high-priority assist, 2 low-priority assist
  output logic [WID_W-1:0]      issue_warp,
  output aw_inst_t              issue_inst
);
  logic [WID_W-1:0] gto_warp, rr_ptr;
  logic [NUM_WARPS-1:0] hi_cand, par_cand;

  assign hi_cand  = head_aw_valid & sb_aw_ready;
  assign par_cand = head_par_valid & sb_par_ready;

  always_comb begin
    logic found;
    logic [WID_W-1:0] k;
    found       = 1'b0;
    issue_kind  = 2'd0;
    issue_warp  = '0;
    // 1. high-priority assist, round robin after rr_ptr
    for (int n = NUM_WARPS; n >= 1; n--) begin
      k = WID_W'((32'(rr_ptr) + 32'(n)) % NUM_WARPS);
      if (hi_cand[k]) begin
        found = 1'b1;
        issue_kind = 2'd1;
        issue_warp = k;
      end
    end
    // 2. parent warps, greedy then oldest
    if (!found) begin
      if (par_cand[gto_warp]) begin
        found = 1'b1;
        issue_warp = gto_warp;
      end else begin
        for (int w = NUM_WARPS - 1; w >= 0; w--)
          if (par_cand[w]) begin
            found = 1'b1;
            issue_warp = WID_W'(w);
          end
      end
    end
    // 3. idle cycle: low-priority assist
    if (!found && lp_valid && sb_lp_ready) begin
      found = 1'b1;
      issue_kind = 2'd2;
      issue_warp = lp_warp;
    end
    issue_valid = found && issue_en;
  end

  always_comb begin
    unique case (issue_kind)
      2'd1:    issue_inst = head_aw[issue_warp];
      2'd2:    issue_inst = lp_inst;
      default: begin
        issue_inst      = '0;
        issue_inst.inst = head_par_inst[issue_warp];
        issue_inst.mask = '1;
      end
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gto_warp <= '0;
      rr_ptr   <= WID_W'(NUM_WARPS - 1);
    end else if (issue_valid) begin
      if (issue_kind == 2'd0) gto_warp <= issue_warp;
      if (issue_kind == 2'd1) rr_ptr   <= issue_warp;
    end
  end

  a_lp_only_idle: assert property (@(posedge clk) disable iff (!rst_n)
      (issue_valid && issue_kind == 2'd2) |-> (hi_cand == '0 && par_cand == '0));
endmodule
