// global_predicate: the per-warp global predicate register added for
// warp-wide compression tests.
//
// An assist warp that tests an encoding sets one predicate per lane (the
// lane's word fits the encoding). The encoding is usable only if every lane
// passed, so the register stores the AND of the per-lane predicates. Lanes
// switched off by the active mask are not counted (this design's choice).
// The same write also records the lowest active lane whose predicate is
// false, which the C-Pack compression routine uses to find the next word
// not yet covered by a dictionary value. Registers are per warp, because an
// assist warp runs under its parent's warp ID.
//
// Timing: a write (we) updates the warp's register at the clock edge; the
// read port (rd_warp) is combinational.
module global_predicate
  import caba_pkg::*;
#(
  parameter int unsigned NUM_WARPS = 48,
  localparam int unsigned WID_W  = $clog2(NUM_WARPS),
  localparam int unsigned LANE_W = $clog2(WARP_SIZE)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              we,
  input  logic [WID_W-1:0]  wr_warp,
  input  lane_mask_t        lane_pred,
  input  lane_mask_t        active_mask,
  input  logic [WID_W-1:0]  rd_warp,
  output logic              gpred,        // all active lanes true
  output logic              first_fail_valid,
  output logic [LANE_W-1:0] first_fail_lane
);
  logic [NUM_WARPS-1:0]             gp;
  logic [NUM_WARPS-1:0]             ff_v;
  logic [NUM_WARPS-1:0][LANE_W-1:0] ff_l;

  lane_mask_t fail;
  logic              w_ff_v;
  logic [LANE_W-1:0] w_ff_l;
  assign fail = active_mask & ~lane_pred;

  always_comb begin
    w_ff_v = 1'b0;
    w_ff_l = '0;
    for (int i = WARP_SIZE - 1; i >= 0; i--)
      if (fail[i]) begin
        w_ff_v = 1'b1;
        w_ff_l = LANE_W'(i);
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gp   <= '0;
      ff_v <= '0;
      ff_l <= '0;
    end else if (we) begin
      gp[wr_warp]   <= (fail == '0);
      ff_v[wr_warp] <= w_ff_v;
      ff_l[wr_warp] <= w_ff_l;
    end
  end

  assign gpred            = gp[rd_warp];
  assign first_fail_valid = ff_v[rd_warp];
  assign first_fail_lane  = ff_l[rd_warp];
endmodule
