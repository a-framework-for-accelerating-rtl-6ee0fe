// tb_assist_warp_controller: drives the controller with a behavioural copy of
// the assist warp store (one-cycle read). Checks the event -> subroutine map
// (base + encoding), that a triggered high-priority subroutine is deployed in
// order one instruction per cycle starting two cycles after the trigger,
// with warp ID, mask, priority, Inst.ID and the last-instruction flag; that
// a full buffer partition holds deployment; that a low-priority subroutine
// waits while utilization is at or above the threshold (throttled) and then
// deploys; and that a kill stops a subroutine.
module tb_assist_warp_controller;
  import caba_pkg::*;
  localparam int W = 8, E = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n = 0;
  logic cfg_ev_we = 0, cfg_ev_enable = 0, cfg_ev_use_enc = 0, cfg_end_we = 0;
  logic [1:0] cfg_ev_idx = '0;
  sr_id_t cfg_ev_sr_base = '0, cfg_end_sr = '0;
  prio_e cfg_ev_prio = PRIO_LOW;
  inst_id_t cfg_end_val = '0;
  logic [3:0] cfg_util_thresh = 4'd3, pipe_util = '0;
  logic trig_valid = 0, trig_ready;
  sr_id_t trig_sr;
  logic [1:0] trig_event = '0;
  logic [2:0] trig_warp = '0;
  logic [ENC_W-1:0] trig_enc = '0;
  live_regs_t trig_live = '0;
  lane_mask_t trig_mask = '0;
  logic aws_rd_en;
  sr_id_t aws_rd_sr;
  inst_id_t aws_rd_inst;
  inst_word_t aws_rd_data;
  logic [W-1:0][1:0] awb_free;
  logic [1:0] lp_free = 2'd2;
  logic dep_valid;
  logic [2:0] dep_warp;
  aw_inst_t dep_inst;
  logic kill_valid = 0;
  logic [2:0] kill_warp = '0;
  logic [W-1:0] warp_has_high;
  logic throttled;

  assist_warp_controller #(.NUM_WARPS(W), .AWT_ENTRIES(E), .NUM_EVENTS(4)) dut (.*);

  // behavioural store: word = {sr, inst}
  always_ff @(posedge clk) if (aws_rd_en) aws_rd_data <= {48'hC0DE_0000_0000, 3'b0, aws_rd_sr, 4'b0, aws_rd_inst};

  task automatic check(input logic c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL @%0t: %s", $time, m); end
  endtask

  int cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int w = 0; w < W; w++) awb_free[w] = 2'd2;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // event 0: decompression, SR = 0 + encoding, high priority
    cfg_ev_we = 1; cfg_ev_idx = 0; cfg_ev_enable = 1; cfg_ev_sr_base = 5'd0; cfg_ev_use_enc = 1; cfg_ev_prio = PRIO_HIGH;
    @(negedge clk);
    // event 1: compression, SR 16, low priority
    cfg_ev_idx = 1; cfg_ev_sr_base = 5'd16; cfg_ev_use_enc = 0; cfg_ev_prio = PRIO_LOW;
    @(negedge clk);
    cfg_ev_we = 0;
    cfg_end_we = 1; cfg_end_sr = 5'd5; cfg_end_val = 4'd3; @(negedge clk);
    cfg_end_sr = 5'd16; cfg_end_val = 4'd1; @(negedge clk);
    cfg_end_we = 0;
    @(negedge clk);

    // ---- high-priority trigger: event 0, encoding 5 -> SR 5, 4 instructions
    trig_valid = 1; trig_event = 0; trig_warp = 3'd6; trig_enc = 4'd5;
    trig_mask = 32'h0000_FFFF; trig_live = '{regs: '{8'd1, 8'd2, 8'd3}};
    #1 check(trig_ready && trig_sr == 5'd5, "trigger accepted, SR = base + encoding");
    @(negedge clk);
    trig_valid = 0;
    begin
      int t0, got;
      t0 = cyc;
      got = 0;
      #1 check(warp_has_high[6], "warp 6 has a live high-priority assist warp");
      while (got < 4 && cyc < t0 + 20) begin
        @(negedge clk);
        if (dep_valid) begin
          check(got > 0 || cyc - t0 == 1, $sformatf("first deploy on the second edge after the trigger (%0d)", cyc - t0));
          check(dep_warp == 3'd6 && dep_inst.prio == PRIO_HIGH && dep_inst.mask == 32'h0000_FFFF, "deploy fields");
          check(dep_inst.sr_id == 5'd5 && dep_inst.inst_id == inst_id_t'(got), "deploy order");
          check(dep_inst.inst[12:8] == 5'd5 && dep_inst.inst[3:0] == 4'(got), "instruction word from the store");
          check(dep_inst.is_last == (got == 3), "last flag");
          check(dep_inst.live.regs[0] == 8'd3, "live registers carried");
          got++;
        end
      end
      check(got == 4 && cyc - t0 == 4, $sformatf("4 instructions in 4 consecutive cycles (%0d)", cyc - t0));
    end
    @(negedge clk);
    check(!dep_valid && !warp_has_high[6], "subroutine finished");

    // ---- full partition holds deployment
    awb_free[2] = 2'd0;
    trig_valid = 1; trig_event = 0; trig_warp = 3'd2; trig_enc = 4'd5;
    @(negedge clk);
    trig_valid = 0;
    repeat (4) begin @(negedge clk); check(!dep_valid, "no deploy into a full partition"); end
    awb_free[2] = 2'd1;
    @(negedge clk);
    check(dep_valid && dep_warp == 3'd2, "deploy once a slot frees");
    awb_free[2] = 2'd2;
    repeat (6) @(negedge clk);

    // ---- low priority: throttled while utilization >= threshold
    pipe_util = 4'd3;
    trig_valid = 1; trig_event = 1; trig_warp = 3'd1; trig_enc = 4'd9;
    #1 check(trig_sr == 5'd16, "compression SR ignores the encoding");
    @(negedge clk);
    trig_valid = 0;
    repeat (5) begin @(negedge clk); check(!dep_valid && throttled, "low priority throttled"); end
    pipe_util = 4'd1;
    @(negedge clk);
    check(dep_valid && dep_inst.prio == PRIO_LOW && dep_inst.sr_id == 5'd16, "low priority deploys when idle");
    @(negedge clk);
    check(dep_valid && dep_inst.is_last, "second low-priority instruction");
    @(negedge clk);

    // ---- kill
    trig_valid = 1; trig_event = 0; trig_warp = 3'd3; trig_enc = 4'd5;
    @(negedge clk);
    trig_valid = 0;
    @(negedge clk);
    @(negedge clk);
    check(dep_valid, "killed subroutine started");
    kill_valid = 1; kill_warp = 3'd3;
    #1 check(!dep_valid, "in-flight instruction of killed warp dropped");
    @(negedge clk);
    kill_valid = 0;
    repeat (4) begin @(negedge clk); check(!dep_valid, "nothing after kill"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
