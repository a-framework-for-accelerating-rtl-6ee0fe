// md_cache: the compression metadata cache beside a memory controller.
//
// With compression, the memory controller must know for each cache line how
// many DRAM bursts carry it (one to four 32-byte GDDR5 bursts for a 128-byte
// line). That count is kept in memory as 2 bits per line (count - 1) in a
// reserved region; this cache keeps recently used parts of that region on
// chip so that a data access does not need a second DRAM access for its
// metadata. Size and associativity are the paper's (8 KB, 4-way). The
// rest is this design's: a block is one 32-byte burst of metadata, so it
// covers 128 lines; 64 sets; true LRU; write-allocate with write-back of
// dirty victims; one outstanding miss (blocking).
//
// Interface: req_* looks up (req_write=0) or updates (req_write=1) the burst
// count of line req_addr; resp_* returns the count (1..4) and whether the
// lookup hit. mem_rd_* / mem_wr_* fetch and write back metadata blocks at
// metadata block addresses (req_addr / 128); placing the region in DRAM is
// left to the controller.
// Timing: a hit answers one cycle after the request; a miss answers one
// cycle after the fill arrives (plus the write-back of a dirty victim).
module md_cache #(
  parameter int unsigned SIZE_BYTES  = 8192,
  parameter int unsigned WAYS        = 4,
  parameter int unsigned BLOCK_BYTES = 32,
  parameter int unsigned ADDR_W      = 25,   // line address
  localparam int unsigned LINES_PER_BLK = BLOCK_BYTES * 8 / 2,
  localparam int unsigned OFS_W  = $clog2(LINES_PER_BLK),
  localparam int unsigned SETS   = SIZE_BYTES / (BLOCK_BYTES * WAYS),
  localparam int unsigned SET_W  = $clog2(SETS),
  localparam int unsigned TAG_W  = ADDR_W - OFS_W - SET_W,
  localparam int unsigned BLK_W  = BLOCK_BYTES * 8,
  localparam int unsigned WAY_W  = $clog2(WAYS),
  localparam int unsigned BA_W   = ADDR_W - OFS_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              req_valid,
  output logic              req_ready,
  input  logic              req_write,
  input  logic [ADDR_W-1:0] req_addr,
  input  logic [2:0]        req_bursts,   // 1..4, for updates
  output logic              resp_valid,
  output logic [2:0]        resp_bursts,
  output logic              resp_hit,
  output logic              mem_rd_valid,
  input  logic              mem_rd_ready,
  output logic [BA_W-1:0]   mem_rd_addr,
  input  logic              mem_fill_valid,
  input  logic [BLK_W-1:0]  mem_fill_data,
  output logic              mem_wr_valid,
  input  logic              mem_wr_ready,
  output logic [BA_W-1:0]   mem_wr_addr,
  output logic [BLK_W-1:0]  mem_wr_data,
  output logic [31:0]       hits,
  output logic [31:0]       misses
);
  typedef enum logic [2:0] {IDLE, WB, RD, FILL, RESP} st_e;
  st_e st;

  logic [BLK_W-1:0] data  [SETS][WAYS];
  logic [TAG_W-1:0] tag   [SETS][WAYS];
  logic             vld   [SETS][WAYS];
  logic             dirty [SETS][WAYS];
  logic [WAY_W-1:0] age   [SETS][WAYS];   // 0 = most recently used

  // the request being served
  logic              q_write;
  logic [ADDR_W-1:0] q_addr;
  logic [2:0]        q_bursts;
  logic [WAY_W-1:0]  q_way;

  function automatic logic [SET_W-1:0] set_of(logic [ADDR_W-1:0] a);
    return a[OFS_W +: SET_W];
  endfunction
  function automatic logic [TAG_W-1:0] tag_of(logic [ADDR_W-1:0] a);
    return a[ADDR_W-1 -: TAG_W];
  endfunction

  // lookup of the incoming request
  logic             hit;
  logic [WAY_W-1:0] hit_way, victim;
  always_comb begin
    hit = 1'b0;
    hit_way = '0;
    victim = '0;
    for (int w = 0; w < WAYS; w++)
      if (vld[set_of(req_addr)][w] && tag[set_of(req_addr)][w] == tag_of(req_addr)) begin
        hit = 1'b1;
        hit_way = WAY_W'(w);
      end
    // invalid way first, else the least recently used
    for (int w = WAYS - 1; w >= 0; w--)
      if (age[set_of(req_addr)][w] == WAY_W'(WAYS - 1)) victim = WAY_W'(w);
    for (int w = WAYS - 1; w >= 0; w--)
      if (!vld[set_of(req_addr)][w]) victim = WAY_W'(w);
  end

  assign req_ready    = st == IDLE;
  assign mem_rd_valid = st == RD;
  assign mem_rd_addr  = q_addr[ADDR_W-1:OFS_W];
  assign mem_wr_valid = st == WB;
  assign mem_wr_addr  = {tag[set_of(q_addr)][q_way], set_of(q_addr)};
  assign mem_wr_data  = data[set_of(q_addr)][q_way];

  // the access made this cycle: a hit in IDLE, or the refilled block in RESP
  logic             do_acc, a_wr;
  logic [SET_W-1:0] a_set;
  logic [WAY_W-1:0] a_way;
  logic [OFS_W-1:0] a_ofs;
  logic [2:0]       a_b;
  always_comb begin
    do_acc = (st == IDLE && req_valid && hit) || st == RESP;
    if (st == RESP) begin
      a_wr = q_write; a_set = set_of(q_addr); a_way = q_way; a_ofs = q_addr[OFS_W-1:0]; a_b = q_bursts;
    end else begin
      a_wr = req_write; a_set = set_of(req_addr); a_way = hit_way; a_ofs = req_addr[OFS_W-1:0]; a_b = req_bursts;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= IDLE;
      resp_valid <= 1'b0;
      resp_bursts <= '0;
      resp_hit <= 1'b0;
      q_write <= 1'b0; q_addr <= '0; q_bursts <= '0; q_way <= '0;
      hits <= '0; misses <= '0;
      for (int s = 0; s < SETS; s++)
        for (int w = 0; w < WAYS; w++) begin
          vld[s][w] <= 1'b0;
          dirty[s][w] <= 1'b0;
          age[s][w] <= WAY_W'(w);
          tag[s][w] <= '0;
        end
    end else begin
      resp_valid <= 1'b0;
      unique case (st)
        IDLE: if (req_valid) begin
          q_write <= req_write; q_addr <= req_addr; q_bursts <= req_bursts;
          if (hit) begin
            hits <= hits + 1;
            resp_valid <= 1'b1;
            resp_hit <= 1'b1;
          end else begin
            misses <= misses + 1;
            q_way <= victim;
            st <= (vld[set_of(req_addr)][victim] && dirty[set_of(req_addr)][victim]) ? WB : RD;
          end
        end
        WB:   if (mem_wr_ready) st <= RD;
        RD:   if (mem_rd_ready) st <= FILL;
        FILL: if (mem_fill_valid) begin
          data[set_of(q_addr)][q_way]  <= mem_fill_data;
          tag[set_of(q_addr)][q_way]   <= tag_of(q_addr);
          vld[set_of(q_addr)][q_way]   <= 1'b1;
          dirty[set_of(q_addr)][q_way] <= 1'b0;
          st <= RESP;
        end
        RESP: begin
          resp_valid <= 1'b1;
          resp_hit <= 1'b0;
          st <= IDLE;
        end
        default: st <= IDLE;
      endcase
      if (do_acc) begin
        if (a_wr) begin
          data[a_set][a_way][a_ofs*2 +: 2] <= 2'(a_b - 3'd1);
          dirty[a_set][a_way] <= 1'b1;
          resp_bursts <= a_b;
        end else begin
          resp_bursts <= {1'b0, data[a_set][a_way][a_ofs*2 +: 2]} + 3'd1;
        end
        for (int k = 0; k < WAYS; k++)
          if (age[a_set][k] < age[a_set][a_way]) age[a_set][k] <= age[a_set][k] + 1'b1;
        age[a_set][a_way] <= '0;
      end
    end
  end

  a_bursts_range: assert property (@(posedge clk) disable iff (!rst_n)
      (req_valid && req_ready && req_write) |-> (req_bursts >= 3'd1 && req_bursts <= 3'd4));
endmodule
