// tb_caba_top: end-to-end run of the assist-warp design at its default size
// (48 warps, 48-entry assist warp table, 128-byte lines, 8 KB metadata cache).
//
// The testbench stands in for what lies outside the design: a decode stage
// that keeps every warp's instruction-buffer partition filled with parent
// instructions, a scoreboard, a pipeline that reports an assist warp's end a
// few cycles after its last instruction issues (for compression it returns
// "compressible, encoding 3" and a marked line), an L2 that returns load
// lines (a third of them compressed) and answers store releases, and a DRAM
// holding the metadata region. Before the run it loads the assist warp store
// (16 decompression subroutines, one per encoding, SR.ID = encoding, of
// encoding+1 instructions; one compression subroutine at SR.ID 16 of 4
// instructions) and maps event 0 to decompression (high priority) and
// event 1 to compression (low priority).
//
// Checked: every compressed load is replayed exactly once, after its assist
// warp ended, with its address and load info; no uncompressed load is
// replayed; every assist instruction issued belongs to a triggered
// subroutine and subroutines issue in order; a high-priority assist
// instruction is never passed over for a parent instruction; a low-priority
// one issues only when no other candidate is ready; compressed releases carry
// the encoding; the metadata cache answers with the reference burst counts;
// the global predicate register holds the AND of the lanes.
// Counted, each must happen at least once: high- and low-priority deploys,
// throttled cycles, idle-cycle issues, precedence over a ready parent,
// load replays, compressed and uncompressed releases, buffer overflow,
// fix-up of a partial store into a compressed line, kill, metadata hits
// and misses.
module tb_caba_top;
  import caba_pkg::*;
  localparam int W = 48, LB = 128, AW = 25, LW = LB * 8;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  logic rst_n = 0;
  logic aws_ld_en = 0; sr_id_t aws_ld_sr = '0; inst_id_t aws_ld_inst = '0; inst_word_t aws_ld_data = '0;
  logic cfg_ev_we = 0; logic [1:0] cfg_ev_idx = '0; logic cfg_ev_enable = 0; sr_id_t cfg_ev_sr_base = '0;
  logic cfg_ev_use_enc = 0; prio_e cfg_ev_prio = PRIO_LOW;
  logic cfg_end_we = 0; sr_id_t cfg_end_sr = '0; inst_id_t cfg_end_val = '0;
  logic [3:0] cfg_util_thresh = 4'd3;
  logic cmp_enable = 1;
  live_regs_t st_live = '{regs: '{8'd10, 8'd11, 8'd12}};
  logic par_valid = 0, par_ready; logic [5:0] par_warp = '0; inst_word_t par_inst = '0;
  logic [W-1:0] sb_par_ready = '1, sb_aw_ready = '1; logic sb_lp_ready = 1, issue_en = 1;
  logic [3:0] pipe_util = '0;
  logic issue_valid; logic [1:0] issue_kind; logic [5:0] issue_warp; aw_inst_t issue_inst;
  logic aw_done_valid = 0; logic [5:0] aw_done_warp = '0; sr_id_t aw_done_sr = '0;
  logic aw_done_ok = 0; logic [3:0] aw_done_enc = '0; logic [LW-1:0] aw_done_data = '0;
  logic kill_valid = 0; logic [5:0] kill_warp = '0;
  logic gp_we = 0; logic [5:0] gp_wr_warp = '0, gp_rd_warp = '0; lane_mask_t gp_lane_pred = '0, gp_active_mask = '0;
  logic gp_pred, gp_first_fail_valid; logic [4:0] gp_first_fail_lane;
  logic ld_fill_valid = 0, ld_fill_ready; logic [5:0] ld_fill_warp = '0; logic [AW-1:0] ld_fill_addr = '0;
  logic ld_fill_compressed = 0; logic [3:0] ld_fill_enc = '0; lane_mask_t ld_fill_mask = '1;
  live_regs_t ld_fill_live = '0; logic [31:0] ld_fill_info = '0;
  logic replay_valid, replay_ready = 1; logic [5:0] replay_warp; logic [AW-1:0] replay_addr; logic [31:0] replay_info;
  logic st_valid = 0, st_ready; logic [5:0] st_warp = '0; logic [AW-1:0] st_addr = '0;
  logic [LW-1:0] st_data = '0; logic [LB-1:0] st_bmask = '0;
  logic rel_valid, rel_ready = 1; logic [AW-1:0] rel_addr; logic [LW-1:0] rel_data; logic [LB-1:0] rel_bmask;
  logic rel_compressed; logic [3:0] rel_enc;
  logic rel_resp_valid = 0; logic [AW-1:0] rel_resp_addr = '0; logic rel_resp_target_compressed = 0;
  logic st_fetch_valid, st_fetch_ready = 1; logic [AW-1:0] st_fetch_addr;
  logic st_fill_valid = 0; logic [AW-1:0] st_fill_addr = '0; logic [3:0] st_fill_enc = '0;
  logic md_req_valid = 0, md_req_ready, md_req_write = 0; logic [AW-1:0] md_req_addr = '0; logic [2:0] md_req_bursts = 3'd1;
  logic md_resp_valid, md_resp_hit; logic [2:0] md_resp_bursts;
  logic md_mem_rd_valid, md_mem_rd_ready = 1; logic [17:0] md_mem_rd_addr;
  logic md_mem_fill_valid = 0; logic [255:0] md_mem_fill_data = '0;
  logic md_mem_wr_valid, md_mem_wr_ready = 1; logic [17:0] md_mem_wr_addr; logic [255:0] md_mem_wr_data;
  logic [31:0] md_hits, md_misses;
  logic [AW-1:0] trig_line_addr;
  logic [4:0] lrb_occupancy; logic [3:0] sb_occupancy;
  logic sb_overflow, aw_throttled; logic [W-1:0] warp_has_high;

  caba_top dut (.*);

  task automatic check(input logic c, input string m);
    checks++;
    if (!c) begin failures++; if (failures < 12) $display("FAIL @%0d: %s", cyc, m); end
  endtask

  // ---------------- mechanism counters
  int n_hi_dep, n_lo_dep, n_throttle, n_idle_issue, n_precede, n_replay, n_cmp_rel, n_unc_rel;
  int n_overflow, n_fixup, n_kill, n_par_issue;

  always @(posedge clk) if (rst_n) begin
    if (dut.dep_valid && dut.dep_inst.prio == PRIO_HIGH) n_hi_dep++;
    if (dut.dep_valid && dut.dep_inst.prio == PRIO_LOW) n_lo_dep++;
    if (aw_throttled) n_throttle++;
    if (sb_overflow) n_overflow++;
    if (st_fetch_valid && st_fetch_ready) n_fixup++;
    if (kill_valid) n_kill++;
    if (rel_valid && rel_ready) begin
      if (rel_compressed) begin
        n_cmp_rel++;
        check(rel_enc == 4'd3 && rel_data[15:0] == 16'hC0C0, "compressed release carries the assist warp's result");
      end else n_unc_rel++;
    end
  end

  // ---------------- decode: keep partitions full
  always @(negedge clk) begin
    par_valid <= rst_n;
    par_warp  <= 6'($urandom_range(W - 1));
    par_inst  <= inst_word_t'($urandom);
  end

  // ---------------- issue checks and pipeline model
  typedef struct { int warp; int sr; int due; } done_t;
  done_t done_q[$];
  int next_inst [W][NUM_SR];   // next expected Inst.ID per (warp, SR)
  bit killed_warp [W];

  always @(posedge clk) if (rst_n && issue_valid) begin
    int w, sr;
    bit any_par;
    w = int'(issue_warp);
    any_par = |(dut.head_par_valid & sb_par_ready);
    if (issue_kind == 2'd0) n_par_issue++;
    if (issue_kind == 2'd0)
      check(!(|(dut.head_aw_valid & sb_aw_ready)), "parent issued while a high-priority assist head was ready");
    if (issue_kind == 2'd1 && any_par) n_precede++;
    if (issue_kind == 2'd2) begin
      n_idle_issue++;
      check(!any_par && !(|(dut.head_aw_valid & sb_aw_ready)), "low priority issued outside an idle cycle");
    end
    if (issue_kind != 2'd0) begin
      sr = int'(issue_inst.sr_id);
      check(issue_inst.inst[15:0] == {3'b0, issue_inst.sr_id, 4'b0, issue_inst.inst_id}, "assist word comes from the store");
      if (!killed_warp[w])
        check(int'(issue_inst.inst_id) == next_inst[w][sr], $sformatf("in-order subroutine w%0d sr%0d got %0d exp %0d",
              w, sr, issue_inst.inst_id, next_inst[w][sr]));
      next_inst[w][sr] = issue_inst.is_last ? 0 : int'(issue_inst.inst_id) + 1;
      check((issue_kind == 2'd1) == (issue_inst.prio == PRIO_HIGH), "priority matches partition");
      if (issue_inst.is_last) done_q.push_back('{w, sr, cyc + 3});
    end
  end

  always @(negedge clk) begin
    aw_done_valid <= 0;
    if (done_q.size() > 0 && done_q[0].due <= cyc) begin
      done_t d;
      d = done_q.pop_front();
      aw_done_valid <= 1;
      aw_done_warp  <= 6'(d.warp);
      aw_done_sr    <= sr_id_t'(d.sr);
      aw_done_ok    <= 1;
      aw_done_enc   <= 4'd3;
      aw_done_data  <= {{(LW-16){1'b0}}, 16'hC0C0};
      for (int b = 2; b < LB; b++) aw_done_data[b*8 +: 8] <= 8'hD0;
    end
  end

  // ---------------- load path: expected replays
  typedef struct { int warp; logic [AW-1:0] addr; logic [31:0] info; } ld_t;
  ld_t ld_exp[$];
  int n_ld_cmp = 0, n_ld_unc = 0;

  always @(posedge clk) if (rst_n && replay_valid && replay_ready) begin
    bit found;
    found = 0;
    n_replay++;
    foreach (ld_exp[i])
      if (!found && ld_exp[i].warp == int'(replay_warp) && ld_exp[i].addr == replay_addr && ld_exp[i].info == replay_info) begin
        found = 1;
        ld_exp.delete(i);
      end
    check(found, "replayed load was waiting");
  end

  // drivers change inputs at the falling edge and sample ready just before
  // the rising edge
  task automatic send_load(input int w, input bit cmp, input int enc);
    @(negedge clk);
    ld_fill_valid = 1; ld_fill_warp = 6'(w); ld_fill_addr = AW'($urandom);
    ld_fill_compressed = cmp; ld_fill_enc = 4'(enc); ld_fill_info = $urandom;
    ld_fill_live = '{regs: '{8'(w), 8'd1, 8'd2}};
    forever begin
      bit r;
      #4 r = ld_fill_ready;
      @(negedge clk);
      if (r) break;
    end
    if (cmp) begin ld_exp.push_back('{w, ld_fill_addr, ld_fill_info}); n_ld_cmp++; end
    else n_ld_unc++;
    ld_fill_valid = 0;
  endtask

  // ---------------- store path: L2 answers; partial writes to "compressed" lines
  int resp_q_addr[$];
  int resp_q_due[$];
  always @(posedge clk) if (rst_n && rel_valid && rel_ready) begin
    resp_q_addr.push_back(int'(rel_addr));
    resp_q_due.push_back(cyc + 2);
  end
  always @(negedge clk) begin
    rel_resp_valid <= 0;
    if (resp_q_addr.size() > 0 && resp_q_due[0] <= cyc) begin
      int a;
      a = resp_q_addr.pop_front();
      void'(resp_q_due.pop_front());
      rel_resp_valid <= 1;
      rel_resp_addr <= AW'(a);
      rel_resp_target_compressed <= (a % 4 == 1);   // lines at address 1 mod 4 are compressed below
    end
  end
  int fill_q[$];
  always @(posedge clk) if (rst_n && st_fetch_valid && st_fetch_ready) fill_q.push_back(int'(st_fetch_addr));
  always @(negedge clk) begin
    st_fill_valid <= 0;
    if (fill_q.size() > 0) begin
      st_fill_valid <= 1;
      st_fill_addr <= AW'(fill_q.pop_front());
      st_fill_enc <= 4'd2;
    end
  end

  task automatic send_store(input int w, input int a, input bit partial);
    @(negedge clk);
    st_valid = 1; st_warp = 6'(w); st_addr = AW'(a);
    st_data = {LB{8'(a)}}; st_bmask = partial ? {{(LB-8){1'b0}}, 8'hFF} : '1;
    forever begin
      bit r;
      #4 r = st_ready;
      @(negedge clk);
      if (r) break;
    end
    st_valid = 0;
  endtask

  // ---------------- metadata DRAM and reference
  logic [255:0] md_dram [logic [17:0]];
  function automatic logic [255:0] md_init(logic [17:0] b);
    logic [255:0] v;
    for (int i = 0; i < 8; i++) v[i*32 +: 32] = 32'(b) * 32'h0101_3579 + 32'(i) * 32'h7F4A_7C15;
    return v;
  endfunction
  always @(posedge clk) if (md_mem_wr_valid && md_mem_wr_ready) md_dram[md_mem_wr_addr] = md_mem_wr_data;
  initial forever begin
    @(posedge clk);
    if (md_mem_rd_valid && md_mem_rd_ready) begin
      logic [17:0] a;
      a = md_mem_rd_addr;
      repeat (4) @(posedge clk);
      md_mem_fill_data <= md_dram.exists(a) ? md_dram[a] : md_init(a);
      md_mem_fill_valid <= 1;
      @(posedge clk);
      md_mem_fill_valid <= 0;
    end
  end
  int md_ref [logic [AW-1:0]];
  task automatic md_access(input logic [AW-1:0] a, input bit wr, input int b);
    int expb;
    logic [255:0] v;
    if (wr) begin md_ref[a] = b; expb = b; end
    else if (md_ref.exists(a)) expb = md_ref[a];
    else begin v = md_init(a[AW-1:7]); expb = int'(v[a[6:0]*2 +: 2]) + 1; end
    @(negedge clk);
    while (!md_req_ready) @(negedge clk);
    md_req_valid = 1; md_req_write = wr; md_req_addr = a; md_req_bursts = 3'(b);
    @(negedge clk);
    md_req_valid = 0;
    while (!md_resp_valid) @(negedge clk);
    check(int'(md_resp_bursts) == expb, $sformatf("metadata bursts for %h", a));
  endtask

  // ---------------- watchdog
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog: cycle limit reached (loads %0d/%0d waiting %0d, store buffer %0d, replay buffer %0d, assist ends due %0d, metadata %0d/%0d)",
             n_ld_cmp, n_ld_unc, ld_exp.size(), sb_occupancy, lrb_occupancy, done_q.size(), md_hits, md_misses);
    for (int i = 0; i < 8; i++) $display("sb %0d st=%0d warp=%0d", i, dut.u_sb.e[i].st, dut.u_sb.e[i].warp);
    for (int i = 0; i < 48; i++) if (dut.u_awc.u_awt.tbl[i].valid) $display("awt %0d w=%0d sr=%0d inst=%0d prio=%0d", i,
        dut.u_awc.u_awt.tbl[i].warp, dut.u_awc.u_awt.tbl[i].sr, dut.u_awc.u_awt.tbl[i].inst, dut.u_awc.u_awt.tbl[i].prio);
    $display("lp_valid %0d head_aw %h", dut.lp_valid, dut.head_aw_valid);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- pipeline utilization: busy phases throttle low priority
  always @(negedge clk) pipe_util <= ((cyc / 64) % 3 == 0) ? 4'd5 : 4'd0;

  // ---------------- scoreboard: each warp's parent is ready about half the
  // time; every fourth phase of 40 cycles nothing is ready (idle cycles)
  always @(negedge clk)
    for (int w = 0; w < W; w++) sb_par_ready[w] <= ((cyc / 40) % 4 != 3) && ($urandom_range(1) == 0);

  // ---------------- main sequence
  initial begin
    for (int w = 0; w < W; w++) begin
      killed_warp[w] = 0;
      for (int s = 0; s < NUM_SR; s++) next_inst[w][s] = 0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // load the assist warp store and the controller tables
    for (int s = 0; s < NUM_SR; s++)
      for (int i = 0; i < MAX_INST; i++) begin
        aws_ld_en = 1; aws_ld_sr = sr_id_t'(s); aws_ld_inst = inst_id_t'(i);
        aws_ld_data = {48'hA55A_0000_0000, 3'b0, sr_id_t'(s), 4'b0, inst_id_t'(i)};
        @(negedge clk);
      end
    aws_ld_en = 0;
    for (int s = 0; s < 16; s++) begin
      cfg_end_we = 1; cfg_end_sr = sr_id_t'(s); cfg_end_val = inst_id_t'(s % 8);
      @(negedge clk);
    end
    cfg_end_sr = 5'd16; cfg_end_val = 4'd3;
    @(negedge clk);
    cfg_end_we = 0;
    cfg_ev_we = 1; cfg_ev_idx = 0; cfg_ev_enable = 1; cfg_ev_sr_base = 5'd0; cfg_ev_use_enc = 1; cfg_ev_prio = PRIO_HIGH;
    @(negedge clk);
    cfg_ev_idx = 1; cfg_ev_sr_base = 5'd16; cfg_ev_use_enc = 0; cfg_ev_prio = PRIO_LOW;
    @(negedge clk);
    cfg_ev_we = 0;

    // global predicate
    gp_we = 1; gp_wr_warp = 6'd7; gp_lane_pred = 32'hFFFF_FFF7; gp_active_mask = 32'hFFFF_FFFF;
    @(negedge clk);
    gp_wr_warp = 6'd8; gp_lane_pred = 32'hFFFF_FFF7; gp_active_mask = 32'hFFFF_FFF0;
    @(negedge clk);
    gp_we = 0;
    gp_rd_warp = 6'd7;
    #1 check(!gp_pred && gp_first_fail_valid && gp_first_fail_lane == 5'd3, "global predicate: lane 3 fails");
    gp_rd_warp = 6'd8;
    #1 check(gp_pred && !gp_first_fail_valid, "global predicate: failing lane masked off");

    // traffic: loads and stores interleaved
    fork
      begin
        for (int n = 0; n < 300; n++) begin
          send_load($urandom_range(W - 1), ($urandom_range(2) == 0), $urandom_range(15));
          repeat ($urandom_range(3)) @(negedge clk);
        end
      end
      begin
        for (int n = 0; n < 120; n++) begin
          send_store($urandom_range(W - 1), $urandom_range(40), ($urandom_range(1) == 0));
          repeat ($urandom_range(6)) @(negedge clk);
        end
        // a burst of stores to new lines overflows the buffer
        cmp_enable = 0;
        for (int n = 0; n < 16; n++) send_store(n, 200 + 4 * n, 0);
        cmp_enable = 1;
      end
      begin
        for (int n = 0; n < 200; n++)
          md_access({12'($urandom_range(5)), 6'($urandom_range(1) * 9), 7'($urandom_range(127))},
                    ($urandom_range(3) == 0), $urandom_range(1, 4));
      end
    join

    // kill: a warp with a live high-priority assist warp
    @(negedge clk);
    ld_fill_valid = 1; ld_fill_warp = 6'd5; ld_fill_addr = 25'h1234; ld_fill_compressed = 1;
    ld_fill_enc = 4'd7; ld_fill_info = 32'hDEAD;
    @(negedge clk);
    ld_fill_valid = 0;
    ld_exp.push_back('{5, 25'h1234, 32'hDEAD});
    n_ld_cmp++;
    sb_aw_ready = '0;                 // hold it in the buffer
    repeat (3) @(negedge clk);
    check(warp_has_high[5], "warp 5 has a live decompression assist warp");
    kill_valid = 1; kill_warp = 6'd5; killed_warp[5] = 1;
    @(negedge clk);
    kill_valid = 0;
    sb_aw_ready = '1;
    @(negedge clk);
    check(!warp_has_high[5] && !dut.head_aw_valid[5], "kill flushed table and buffer");

    // drain
    begin
      int t0;
      t0 = cyc;
      while ((ld_exp.size() > 0 || sb_occupancy != 0 || done_q.size() > 0) && cyc < t0 + 20000) @(negedge clk);
    end
    check(ld_exp.size() == 0, $sformatf("all compressed loads replayed (%0d left)", ld_exp.size()));
    check(sb_occupancy == 0, "store buffer drained");
    check(lrb_occupancy == 0, "replay buffer drained");

    $display("loads: %0d compressed, %0d uncompressed; replays %0d", n_ld_cmp, n_ld_unc, n_replay);
    $display("deploys: high %0d low %0d; throttled cycles %0d; idle-cycle issues %0d; precedence %0d; parent issues %0d",
             n_hi_dep, n_lo_dep, n_throttle, n_idle_issue, n_precede, n_par_issue);
    $display("stores: compressed releases %0d, uncompressed %0d, overflows %0d, fix-ups %0d; kills %0d",
             n_cmp_rel, n_unc_rel, n_overflow, n_fixup, n_kill);
    $display("metadata cache: hits %0d misses %0d", md_hits, md_misses);
    check(n_replay == n_ld_cmp, "one replay per compressed load");
    check(n_hi_dep > 0, "high-priority deployment happened");
    check(n_lo_dep > 0, "low-priority deployment happened");
    check(n_throttle > 0, "throttling happened");
    check(n_idle_issue > 0, "idle-cycle issue happened");
    check(n_precede > 0, "assist precedence over a ready parent happened");
    check(n_replay > 0, "load replay happened");
    check(n_cmp_rel > 0, "compressed release happened");
    check(n_unc_rel > 0, "uncompressed release happened");
    check(n_overflow > 0, "store buffer overflow happened");
    check(n_fixup > 0, "partial store into a compressed line happened");
    check(n_kill > 0, "kill happened");
    check(md_hits > 0 && md_misses > 0, "metadata hits and misses happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
