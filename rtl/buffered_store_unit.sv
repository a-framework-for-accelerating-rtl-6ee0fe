// buffered_store_unit: the "Buffered Stores" space next to L1 that holds
// pending stores until an assist warp has compressed them.
//
// A store to global memory is written into an entry (stores to a line
// already held are merged byte by byte). A held line asks the controller
// for a low-priority compression assist warp (cmp_req); the assist warp
// reports the outcome on cmp_done_* with the compressed line and its
// encoding, or that the line does not compress. The line is then released
// to L2/memory, compressed or not (rel_*). When a store finds no free
// entry and no line is on its way out, the lowest-numbered entry still
// waiting for compression is released uncompressed at once (overflow); the
// store waits until that entry is free. A release waits for the lower level's
// answer (resp_*): if the target line was uncompressed, or the release covers
// the whole line, the entry is freed; if the release was a partial write into
// a line that is stored compressed below, the compressed line is fetched
// (fetch_*, fill_*), decompressed by a high-priority assist warp
// (dcmp_req, dcmp_done), merged with the buffered bytes and sent again. A kill
// of the warp's assist warps sends a line waiting for compression out
// uncompressed and re-requests a lost decompression.
// The paper gives the flow (buffer, compress when resources allow, release
// uncompressed on overflow, re-fetch and decompress a line found compressed);
// the entry count, the state machine, victim choice and all handshakes are
// this design's choices. Each entry is addressed by its line address.
//
// Timing: every state change happens at a clock edge; requests are offered
// from the lowest-numbered entry in the requesting state and handshaken
// with valid/ready.
module buffered_store_unit
  import caba_pkg::*;
#(
  parameter int unsigned ENTRIES    = 8,
  parameter int unsigned NUM_WARPS  = 48,
  parameter int unsigned LINE_BYTES = 128,
  parameter int unsigned ADDR_W     = 25,   // line address (32-bit byte address / 128 B)
  localparam int unsigned WID_W = $clog2(NUM_WARPS),
  localparam int unsigned LINE_W = LINE_BYTES * 8,
  localparam int unsigned IDX_W = $clog2(ENTRIES)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  cmp_enable,     // compression switched on for this kernel
  // store from the load/store unit
  input  logic                  st_valid,
  output logic                  st_ready,
  input  logic [WID_W-1:0]      st_warp,
  input  logic [ADDR_W-1:0]     st_addr,
  input  logic [LINE_W-1:0]     st_data,
  input  logic [LINE_BYTES-1:0] st_bmask,
  // compression assist warp request / completion
  output logic                  cmp_req_valid,
  input  logic                  cmp_req_ready,
  output logic [WID_W-1:0]      cmp_req_warp,
  output logic [ADDR_W-1:0]     cmp_req_addr,
  input  logic                  cmp_done_valid,
  input  logic [WID_W-1:0]      cmp_done_warp,
  input  logic                  cmp_done_ok,
  input  logic [ENC_W-1:0]      cmp_done_enc,
  input  logic [LINE_W-1:0]     cmp_done_data,
  // release to L2 / memory
  output logic                  rel_valid,
  input  logic                  rel_ready,
  output logic [ADDR_W-1:0]     rel_addr,
  output logic [LINE_W-1:0]     rel_data,
  output logic [LINE_BYTES-1:0] rel_bmask,
  output logic                  rel_compressed,
  output logic [ENC_W-1:0]      rel_enc,
  // answer to a release
  input  logic                  resp_valid,
  input  logic [ADDR_W-1:0]     resp_addr,
  input  logic                  resp_target_compressed,
  // fetch of a line found compressed below
  output logic                  fetch_valid,
  input  logic                  fetch_ready,
  output logic [ADDR_W-1:0]     fetch_addr,
  input  logic                  fill_valid,
  input  logic [ADDR_W-1:0]     fill_addr,
  input  logic [ENC_W-1:0]      fill_enc,
  // decompression assist warp request / completion
  output logic                  dcmp_req_valid,
  input  logic                  dcmp_req_ready,
  output logic [WID_W-1:0]      dcmp_req_warp,
  output logic [ENC_W-1:0]      dcmp_req_enc,
  output logic [ADDR_W-1:0]     dcmp_req_addr,
  input  logic                  dcmp_done_valid,
  input  logic [WID_W-1:0]      dcmp_done_warp,
  input  logic [LINE_W-1:0]     dcmp_done_data,
  // the warp's assist warps were killed
  input  logic                  kill_valid,
  input  logic [WID_W-1:0]      kill_warp,
  // events
  output logic                  overflow,       // a store forced an uncompressed release
  output logic [IDX_W:0]        occupancy
);
  typedef enum logic [3:0] {
    S_FREE, S_HELD, S_CMP, S_REL, S_WAIT, S_FETCH, S_FILL, S_DREQ, S_DCMP
  } sb_state_e;

  typedef struct packed {
    sb_state_e            st;
    logic [WID_W-1:0]     warp;
    logic [ADDR_W-1:0]    addr;
    logic [LINE_W-1:0]    data;
    logic [LINE_BYTES-1:0] bmask;
    logic                 cmp;
    logic [ENC_W-1:0]     enc;
  } sb_entry_t;

  sb_entry_t e [ENTRIES];

  // find helpers: lowest-numbered entry in a state (optionally matching)
  logic [ENTRIES-1:0] is_free, is_held, is_rel, is_fetch, is_dreq, m_merge, m_cmp, m_resp, m_fill, m_dcmp;
  always_comb begin
    for (int i = 0; i < ENTRIES; i++) begin
      is_free[i]  = e[i].st == S_FREE;
      is_held[i]  = e[i].st == S_HELD;
      is_rel[i]   = e[i].st == S_REL;
      is_fetch[i] = e[i].st == S_FETCH;
      is_dreq[i]  = e[i].st == S_DREQ;
      m_merge[i]  = e[i].st == S_HELD && e[i].addr == st_addr;
      m_cmp[i]    = e[i].st == S_CMP  && e[i].warp == cmp_done_warp;
      m_resp[i]   = e[i].st == S_WAIT && e[i].addr == resp_addr;
      m_fill[i]   = e[i].st == S_FILL && e[i].addr == fill_addr;
      m_dcmp[i]   = e[i].st == S_DCMP && e[i].warp == dcmp_done_warp;
    end
  end

  function automatic logic [IDX_W:0] first(input logic [ENTRIES-1:0] v);
    logic [IDX_W:0] r;
    r = '0;
    for (int i = ENTRIES - 1; i >= 0; i--) if (v[i]) r = {1'b1, IDX_W'(i)};
    return r;
  endfunction

  logic [IDX_W:0] f_free, f_held, f_rel, f_fetch, f_dreq, f_merge, f_cmp, f_resp, f_fill, f_dcmp;
  assign f_free  = first(is_free);
  assign f_held  = first(is_held);
  assign f_rel   = first(is_rel);
  assign f_fetch = first(is_fetch);
  assign f_dreq  = first(is_dreq);
  assign f_merge = first(m_merge);
  assign f_cmp   = first(m_cmp);
  assign f_resp  = first(m_resp);
  assign f_fill  = first(m_fill);
  assign f_dcmp  = first(m_dcmp);

  assign st_ready = f_merge[IDX_W] || f_free[IDX_W];
  // release one held line per overflow; wait for it before releasing another
  logic draining;
  always_comb begin
    draining = 1'b0;
    for (int i = 0; i < ENTRIES; i++)
      if (e[i].st inside {S_REL, S_WAIT, S_FETCH, S_FILL, S_DREQ, S_DCMP}) draining = 1'b1;
  end
  assign overflow = st_valid && !st_ready && f_held[IDX_W] && !draining;

  assign cmp_req_valid = cmp_enable && f_held[IDX_W] && !overflow;
  assign cmp_req_warp  = e[f_held[IDX_W-1:0]].warp;
  assign cmp_req_addr  = e[f_held[IDX_W-1:0]].addr;

  assign rel_valid      = f_rel[IDX_W];
  assign rel_addr       = e[f_rel[IDX_W-1:0]].addr;
  assign rel_data       = e[f_rel[IDX_W-1:0]].data;
  assign rel_bmask      = e[f_rel[IDX_W-1:0]].bmask;
  assign rel_compressed = e[f_rel[IDX_W-1:0]].cmp;
  assign rel_enc        = e[f_rel[IDX_W-1:0]].enc;

  assign fetch_valid = f_fetch[IDX_W];
  assign fetch_addr  = e[f_fetch[IDX_W-1:0]].addr;

  assign dcmp_req_valid = f_dreq[IDX_W];
  assign dcmp_req_warp  = e[f_dreq[IDX_W-1:0]].warp;
  assign dcmp_req_enc   = e[f_dreq[IDX_W-1:0]].enc;
  assign dcmp_req_addr  = e[f_dreq[IDX_W-1:0]].addr;

  always_comb begin
    occupancy = '0;
    for (int i = 0; i < ENTRIES; i++) occupancy += (IDX_W+1)'(!is_free[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) e[i] <= '0;
    end else begin
      // new store: merge into a held line or allocate
      if (st_valid && f_merge[IDX_W]) begin
        for (int b = 0; b < LINE_BYTES; b++)
          if (st_bmask[b]) e[f_merge[IDX_W-1:0]].data[b*8 +: 8] <= st_data[b*8 +: 8];
        e[f_merge[IDX_W-1:0]].bmask <= e[f_merge[IDX_W-1:0]].bmask | st_bmask;
      end else if (st_valid && f_free[IDX_W]) begin
        e[f_free[IDX_W-1:0]] <= '{st: S_HELD, warp: st_warp, addr: st_addr, data: st_data,
                                  bmask: st_bmask, cmp: 1'b0, enc: '0};
      end
      // overflow: release a held line uncompressed
      if (overflow) begin
        e[f_held[IDX_W-1:0]].st  <= S_REL;
        e[f_held[IDX_W-1:0]].cmp <= 1'b0;
      end
      if (cmp_req_valid && cmp_req_ready) e[f_held[IDX_W-1:0]].st <= S_CMP;
      if (cmp_done_valid && f_cmp[IDX_W]) begin
        e[f_cmp[IDX_W-1:0]].st  <= S_REL;
        e[f_cmp[IDX_W-1:0]].cmp <= cmp_done_ok;
        if (cmp_done_ok) begin
          e[f_cmp[IDX_W-1:0]].enc  <= cmp_done_enc;
          e[f_cmp[IDX_W-1:0]].data <= cmp_done_data;
        end
      end
      if (rel_valid && rel_ready) e[f_rel[IDX_W-1:0]].st <= S_WAIT;
      // killed compression: release uncompressed; killed decompression: ask again
      if (kill_valid)
        for (int i = 0; i < ENTRIES; i++) begin
          if (e[i].st == S_CMP && e[i].warp == kill_warp) begin
            e[i].st  <= S_REL;
            e[i].cmp <= 1'b0;
          end
          if (e[i].st == S_DCMP && e[i].warp == kill_warp) e[i].st <= S_DREQ;
        end
      if (resp_valid && f_resp[IDX_W]) begin
        if (resp_target_compressed && e[f_resp[IDX_W-1:0]].bmask != '1)
          e[f_resp[IDX_W-1:0]].st <= S_FETCH;
        else
          e[f_resp[IDX_W-1:0]].st <= S_FREE;
      end
      if (fetch_valid && fetch_ready) e[f_fetch[IDX_W-1:0]].st <= S_FILL;
      if (fill_valid && f_fill[IDX_W]) begin
        e[f_fill[IDX_W-1:0]].st  <= S_DREQ;
        e[f_fill[IDX_W-1:0]].enc <= fill_enc;
      end
      if (dcmp_req_valid && dcmp_req_ready) e[f_dreq[IDX_W-1:0]].st <= S_DCMP;
      if (dcmp_done_valid && f_dcmp[IDX_W]) begin
        // merge the buffered bytes over the decompressed line; send it whole, uncompressed
        for (int b = 0; b < LINE_BYTES; b++)
          if (!e[f_dcmp[IDX_W-1:0]].bmask[b])
            e[f_dcmp[IDX_W-1:0]].data[b*8 +: 8] <= dcmp_done_data[b*8 +: 8];
        e[f_dcmp[IDX_W-1:0]].bmask <= '1;
        e[f_dcmp[IDX_W-1:0]].cmp   <= 1'b0;
        e[f_dcmp[IDX_W-1:0]].st    <= S_REL;
      end
    end
  end

  // a held line cannot be both compressed and released on overflow in one cycle
  a_cmp_not_overflow: assert property (@(posedge clk) disable iff (!rst_n)
      !(overflow && cmp_req_valid));
endmodule
