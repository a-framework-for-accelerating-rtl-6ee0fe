// load_replay_buffer: holds loads whose cache line came back compressed
// ("Load Replays" next to the coalescing unit in the walkthrough).
//
// When a line returns from L2/memory in compressed form, the load that asked
// for it cannot complete; its information (warp, line address, and the
// per-thread load details that the coalescing unit keeps, carried here as an
// opaque LD_INFO_W-bit word) is written into this buffer, tagged with the
// decompression subroutine that was triggered. When that assist warp reports
// the end of its execution (done_*), the oldest waiting entry with the same
// (warp, SR.ID) becomes ready and is sent out again on the replay port, so
// the original load resumes on the now-decompressed line in L1.
// Age order uses an age matrix. Entry count, the opaque load-info word and
// the valid/ready handshakes are this design's choices.
//
// Timing: allocation and completion take effect at the clock edge; a ready
// entry is offered on replay_* from the next cycle and leaves when
// replay_ready is high.
module load_replay_buffer
  import caba_pkg::*;
#(
  parameter int unsigned ENTRIES   = 16,
  parameter int unsigned NUM_WARPS = 48,
  parameter int unsigned ADDR_W    = 32,
  parameter int unsigned LD_INFO_W = 32,
  localparam int unsigned WID_W = $clog2(NUM_WARPS),
  localparam int unsigned IDX_W = $clog2(ENTRIES)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 alloc_valid,
  output logic                 alloc_ready,
  input  logic [WID_W-1:0]     alloc_warp,
  input  sr_id_t               alloc_sr,
  input  logic [ADDR_W-1:0]    alloc_addr,
  input  logic [LD_INFO_W-1:0] alloc_info,
  input  logic                 done_valid,
  input  logic [WID_W-1:0]     done_warp,
  input  sr_id_t               done_sr,
  output logic                 done_match,   // a waiting entry matches done_warp/done_sr
  input  logic                 kill_valid,   // the warp's assist warps were killed:
  input  logic [WID_W-1:0]     kill_warp,    //   its waiting loads replay as they are
  output logic                 replay_valid,
  input  logic                 replay_ready,
  output logic [WID_W-1:0]     replay_warp,
  output logic [ADDR_W-1:0]    replay_addr,
  output logic [LD_INFO_W-1:0] replay_info,
  output logic [IDX_W:0]       occupancy
);
  typedef struct packed {
    logic                 valid;
    logic                 ready;
    logic [WID_W-1:0]     warp;
    sr_id_t               sr;
    logic [ADDR_W-1:0]    addr;
    logic [LD_INFO_W-1:0] info;
  } lrb_entry_t;

  lrb_entry_t ent [ENTRIES];
  logic [ENTRIES-1:0][ENTRIES-1:0] older;   // older[i][j]: i was allocated before j

  logic             have_free;
  logic [IDX_W-1:0] free_idx;
  logic             done_hit, rp_hit;
  logic [IDX_W-1:0] done_idx, rp_idx;

  always_comb begin
    have_free = 1'b0;
    free_idx  = '0;
    occupancy = '0;
    for (int i = ENTRIES - 1; i >= 0; i--)
      if (!ent[i].valid) begin
        have_free = 1'b1;
        free_idx  = IDX_W'(i);
      end
    for (int i = 0; i < ENTRIES; i++) occupancy += (IDX_W+1)'(ent[i].valid);
  end
  assign alloc_ready = have_free;

  // oldest waiting entry matching the completion; oldest ready entry to replay
  always_comb begin
    logic [ENTRIES-1:0] m, r;
    done_hit = 1'b0; done_idx = '0;
    rp_hit   = 1'b0; rp_idx   = '0;
    for (int i = 0; i < ENTRIES; i++) begin
      m[i] = ent[i].valid && !ent[i].ready && ent[i].warp == done_warp && ent[i].sr == done_sr;
      r[i] = ent[i].valid && ent[i].ready;
    end
    for (int j = 0; j < ENTRIES; j++) begin
      logic m_old, r_old;
      m_old = 1'b0;
      r_old = 1'b0;
      for (int i = 0; i < ENTRIES; i++) begin
        if (m[i] && older[i][j]) m_old = 1'b1;
        if (r[i] && older[i][j]) r_old = 1'b1;
      end
      if (m[j] && !m_old) begin done_hit = 1'b1; done_idx = IDX_W'(j); end
      if (r[j] && !r_old) begin rp_hit   = 1'b1; rp_idx   = IDX_W'(j); end
    end
  end

  assign done_match   = done_hit;
  assign replay_valid = rp_hit;
  assign replay_warp  = ent[rp_idx].warp;
  assign replay_addr  = ent[rp_idx].addr;
  assign replay_info  = ent[rp_idx].info;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) ent[i] <= '0;
      older <= '0;
    end else begin
      if (replay_valid && replay_ready) ent[rp_idx].valid <= 1'b0;
      if (done_valid && done_hit) ent[done_idx].ready <= 1'b1;
      if (kill_valid)
        for (int i = 0; i < ENTRIES; i++)
          if (ent[i].valid && ent[i].warp == kill_warp) ent[i].ready <= 1'b1;
      if (alloc_valid && have_free) begin
        ent[free_idx] <= '{valid: 1'b1, ready: 1'b0, warp: alloc_warp, sr: alloc_sr,
                           addr: alloc_addr, info: alloc_info};
        for (int i = 0; i < ENTRIES; i++) begin
          older[i][free_idx] <= ent[i].valid && !(replay_valid && replay_ready && rp_idx == IDX_W'(i));
          older[free_idx][i] <= 1'b0;
        end
      end
    end
  end
endmodule
