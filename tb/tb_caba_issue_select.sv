// tb_caba_issue_select: checks the scheduler priorities: a ready
// high-priority assist head beats ready parent warps; parents follow
// greedy-then-oldest; high-priority heads of several warps are served round
// robin; a low-priority head issues only when nothing else is ready; an
// unready scoreboard blocks a candidate; issue_en gates the issue.
module tb_caba_issue_select;
  import caba_pkg::*;
  localparam int W = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n = 0;
  logic [W-1:0] head_par_valid = '0, head_aw_valid = '0, sb_par_ready = '1, sb_aw_ready = '1;
  inst_word_t [W-1:0] head_par_inst;
  aw_inst_t [W-1:0] head_aw;
  logic lp_valid = 0, sb_lp_ready = 1, issue_en = 1;
  logic [1:0] lp_warp = '0;
  aw_inst_t lp_inst = '0;
  logic issue_valid;
  logic [1:0] issue_kind, issue_warp;
  aw_inst_t issue_inst;

  caba_issue_select #(.NUM_WARPS(W)) dut (.*);

  task automatic check(input logic c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL @%0t: %s", $time, m); end
  endtask
  task automatic expect_issue(input bit v, input int k, input int w, input string m);
    #1 check(issue_valid == v && (!v || (issue_kind == 2'(k) && issue_warp == 2'(w))),
             $sformatf("%s (v=%0b k=%0d w=%0d)", m, issue_valid, issue_kind, issue_warp));
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int w = 0; w < W; w++) begin
      head_par_inst[w] = inst_word_t'(100 + w);
      head_aw[w] = '0;
      head_aw[w].inst = inst_word_t'(200 + w);
      head_aw[w].prio = PRIO_HIGH;
    end
    lp_inst.inst = 64'd300;
    repeat (2) @(negedge clk);
    rst_n = 1;
    expect_issue(0, 0, 0, "nothing to issue");
    lp_valid = 1; lp_warp = 2'd3;
    expect_issue(1, 2, 3, "idle cycle issues low priority");
    check(issue_inst.inst == 64'd300, "LP instruction");
    head_par_valid = 4'b0110;
    expect_issue(1, 0, 1, "parent beats low priority; oldest ready warp");
    check(issue_inst.inst == 64'd101 && issue_inst.mask == '1, "parent instruction");
    @(negedge clk);
    head_par_valid = 4'b0111;
    expect_issue(1, 0, 1, "greedy: stays on warp 1");
    @(negedge clk);
    sb_par_ready = 4'b1101;
    expect_issue(1, 0, 0, "warp 1 stalled: oldest ready (0)");
    @(negedge clk);
    sb_par_ready = '1;
    head_aw_valid = 4'b1010;
    expect_issue(1, 1, 1, "high-priority assist beats parents");
    check(issue_inst.inst == 64'd201, "assist instruction");
    @(negedge clk);
    expect_issue(1, 1, 3, "round robin to warp 3");
    @(negedge clk);
    expect_issue(1, 1, 1, "round robin back to warp 1");
    sb_aw_ready = 4'b0101;
    expect_issue(1, 0, 0, "assist not ready: parent (greedy warp 0) issues");
    issue_en = 0;
    expect_issue(0, 0, 0, "issue stage busy");
    issue_en = 1;
    head_par_valid = '0; head_aw_valid = '0;
    sb_lp_ready = 0;
    expect_issue(0, 0, 0, "low priority waits on scoreboard");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
