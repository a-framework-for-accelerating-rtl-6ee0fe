// assist_warp_buffer (AWB): the instruction buffer partitions that stage
// decoded parent-warp and assist-warp instructions for the scheduler.
//
// As in the paper, the assist warp buffer lives inside the instruction
// buffer: each warp owns one partition of IB_DEPTH slots, and a
// high-priority assist instruction is written into the partition of its
// parent warp, next to the parent's own decoded instructions, so it can be
// issued under the parent's warp ID. A separate partition of LP_DEPTH (two)
// slots holds low-priority assist instructions of any warp; the scheduler
// only takes from it in idle cycles. Each partition keeps its entries in
// arrival order. The scheduler sees, per warp, the oldest parent entry and
// the oldest assist entry, and the head of the low-priority partition.
// A flush (kill) removes every assist entry of one warp from both places.
//
// Push ports: one parent instruction (from decode) and one assist instruction
// (from the controller) per cycle; the assist push wins a contested last slot
// (par_ready drops). While a warp has a live high-priority assist warp
// (par_hold) no new parent instructions enter its partition: slots freed by
// the parent's issue go to the assist warp, which otherwise could wait
// forever behind a partition full of parent instructions.
// One pop per cycle. All updates at the clock edge.
// IB_DEPTH = 2 is this design's choice (the paper does not give the size of
// a warp's partition); LP_DEPTH = 2 is the paper's.
module assist_warp_buffer
  import caba_pkg::*;
#(
  parameter int unsigned NUM_WARPS = 48,
  parameter int unsigned IB_DEPTH  = 2,
  parameter int unsigned LP_DEPTH  = 2,
  localparam int unsigned WID_W  = $clog2(NUM_WARPS),
  localparam int unsigned FREE_W = $clog2((IB_DEPTH > LP_DEPTH ? IB_DEPTH : LP_DEPTH) + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // parent instruction from decode
  input  logic                  par_valid,
  output logic                  par_ready,
  input  logic [WID_W-1:0]      par_warp,
  input  inst_word_t            par_inst,
  // assist instruction from the controller
  input  logic                  aw_valid,
  input  logic [WID_W-1:0]      aw_warp,
  input  aw_inst_t              aw_inst,
  input  logic [NUM_WARPS-1:0]  par_hold,   // warp has a live high-priority assist warp
  // free slots
  output logic [NUM_WARPS-1:0][FREE_W-1:0] ib_free,
  output logic [FREE_W-1:0]     lp_free,
  // heads seen by the scheduler
  output logic [NUM_WARPS-1:0]  head_par_valid,
  output inst_word_t [NUM_WARPS-1:0] head_par_inst,
  output logic [NUM_WARPS-1:0]  head_aw_valid,
  output aw_inst_t [NUM_WARPS-1:0] head_aw,
  output logic                  lp_valid,
  output logic [WID_W-1:0]      lp_warp,
  output aw_inst_t              lp_inst,
  // pop by the scheduler
  input  logic                  pop_valid,
  input  logic [1:0]            pop_kind,   // 0 parent, 1 assist (warp partition), 2 low-priority
  input  logic [WID_W-1:0]      pop_warp,
  // flush the assist entries of a warp
  input  logic                  flush_valid,
  input  logic [WID_W-1:0]      flush_warp
);
  typedef struct packed {
    logic     valid;
    logic     is_aw;
    aw_inst_t e;       // parent entries use only e.inst
  } slot_t;

  typedef struct packed {
    logic             valid;
    logic [WID_W-1:0] warp;
    aw_inst_t         e;
  } lp_slot_t;

  slot_t    part    [NUM_WARPS][IB_DEPTH];
  lp_slot_t lp      [LP_DEPTH];

  function automatic int unsigned occ_of(input slot_t s [IB_DEPTH]);
    int unsigned n = 0;
    for (int i = 0; i < IB_DEPTH; i++) if (s[i].valid) n++;
    return n;
  endfunction

  logic aw_hi, aw_lo;
  assign aw_hi = aw_valid && aw_inst.prio == PRIO_HIGH;
  assign aw_lo = aw_valid && aw_inst.prio == PRIO_LOW;

  always_comb begin
    int unsigned n;
    for (int w = 0; w < NUM_WARPS; w++) begin
      ib_free[w]        = FREE_W'(IB_DEPTH - occ_of(part[w]));
      head_par_valid[w] = 1'b0;
      head_par_inst[w]  = '0;
      head_aw_valid[w]  = 1'b0;
      head_aw[w]        = '0;
      for (int i = IB_DEPTH - 1; i >= 0; i--) begin
        if (part[w][i].valid && !part[w][i].is_aw) begin
          head_par_valid[w] = 1'b1;
          head_par_inst[w]  = part[w][i].e.inst;
        end
        if (part[w][i].valid && part[w][i].is_aw) begin
          head_aw_valid[w] = 1'b1;
          head_aw[w]       = part[w][i].e;
        end
      end
    end
    n = 0;
    for (int i = 0; i < LP_DEPTH; i++) if (lp[i].valid) n++;
    lp_free  = FREE_W'(LP_DEPTH - n);
    lp_valid = lp[0].valid;
    lp_warp  = lp[0].warp;
    lp_inst  = lp[0].e;
  end

  assign par_ready = !par_hold[par_warp] &&
                     32'(ib_free[par_warp]) > ((aw_hi && aw_warp == par_warp) ? 32'd1 : 32'd0);

  // next state of each partition: drop popped / flushed entries, compact,
  // then append the pushes (assist first, then parent)
  slot_t    part_n [NUM_WARPS][IB_DEPTH];
  lp_slot_t lp_n   [LP_DEPTH];

  always_comb begin
    for (int w = 0; w < NUM_WARPS; w++) begin
      int unsigned k;
      logic popped;
      k = 0;
      popped = 1'b0;
      for (int i = 0; i < IB_DEPTH; i++) part_n[w][i] = '0;
      for (int i = 0; i < IB_DEPTH; i++) begin
        logic keep;
        keep = part[w][i].valid;
        if (keep && pop_valid && !popped && pop_warp == WID_W'(w) &&
            ((pop_kind == 2'd0 && !part[w][i].is_aw) || (pop_kind == 2'd1 && part[w][i].is_aw))) begin
          keep = 1'b0;
          popped = 1'b1;
        end
        if (keep && flush_valid && flush_warp == WID_W'(w) && part[w][i].is_aw) keep = 1'b0;
        if (keep) begin
          part_n[w][k] = part[w][i];
          k++;
        end
      end
      if (aw_hi && aw_warp == WID_W'(w) && !(flush_valid && flush_warp == aw_warp) && k < IB_DEPTH) begin
        part_n[w][k] = '{valid: 1'b1, is_aw: 1'b1, e: aw_inst};
        k++;
      end
      if (par_valid && par_ready && par_warp == WID_W'(w) && k < IB_DEPTH) begin
        part_n[w][k] = '0;
        part_n[w][k].valid = 1'b1;
        part_n[w][k].e.inst = par_inst;
      end
    end
  end

  always_comb begin
    int unsigned k;
    k = 0;
    for (int i = 0; i < LP_DEPTH; i++) lp_n[i] = '0;
    for (int i = 0; i < LP_DEPTH; i++) begin
      logic keep;
      keep = lp[i].valid;
      if (i == 0 && pop_valid && pop_kind == 2'd2) keep = 1'b0;
      if (keep && flush_valid && flush_warp == lp[i].warp) keep = 1'b0;
      if (keep) begin
        lp_n[k] = lp[i];
        k++;
      end
    end
    if (aw_lo && !(flush_valid && flush_warp == aw_warp) && k < LP_DEPTH)
      lp_n[k] = '{valid: 1'b1, warp: aw_warp, e: aw_inst};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int w = 0; w < NUM_WARPS; w++)
        for (int i = 0; i < IB_DEPTH; i++) part[w][i] <= '0;
      for (int i = 0; i < LP_DEPTH; i++) lp[i] <= '0;
    end else begin
      part <= part_n;
      lp   <= lp_n;
    end
  end

  a_no_hi_overflow: assert property (@(posedge clk) disable iff (!rst_n)
      aw_hi |-> ib_free[aw_warp] != '0);
  a_no_lo_overflow: assert property (@(posedge clk) disable iff (!rst_n)
      aw_lo |-> lp_free != '0);
endmodule
