// tb_assist_warp_table: inserts assist-warp instances, checks the lowest-free
// allocation, the rejection of a second instance of the same subroutine for
// a warp, round-robin service among eligible entries, Inst.ID advance, freeing
// at SR.End, the eligible mask and a kill of one warp.
module tb_assist_warp_table;
  import caba_pkg::*;
  localparam int E = 4, W = 8;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n = 0;
  logic ins_valid = 0, ins_ready;
  logic [2:0] ins_warp = '0;
  live_regs_t ins_live = '0;
  lane_mask_t ins_mask = '1;
  prio_e ins_prio = PRIO_HIGH;
  sr_id_t ins_sr = '0;
  inst_id_t ins_sr_end = '0;
  logic [E-1:0] ent_valid, eligible = '1;
  logic [E-1:0][2:0] ent_warp;
  prio_e [E-1:0] ent_prio;
  logic sel_valid, sel_last, adv = 0;
  logic [1:0] sel_idx;
  logic [2:0] sel_warp;
  live_regs_t sel_live;
  lane_mask_t sel_mask;
  prio_e sel_prio;
  sr_id_t sel_sr;
  inst_id_t sel_inst;
  logic kill_valid = 0;
  logic [2:0] kill_warp = '0;

  assist_warp_table #(.ENTRIES(E), .NUM_WARPS(W)) dut (.*);

  task automatic check(input logic c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  task automatic insert(input int w, input int sr, input int e_end, input bit exp_ok);
    ins_valid = 1; ins_warp = 3'(w); ins_sr = sr_id_t'(sr); ins_sr_end = inst_id_t'(e_end);
    ins_live = '{regs: '{8'(w), 8'(sr), 8'(e_end)}}; ins_mask = lane_mask_t'(32'h1 << w);
    #1;
    check(ins_ready == exp_ok, $sformatf("ins_ready for warp %0d sr %0d", w, sr));
    @(negedge clk);
    ins_valid = 0;
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!sel_valid && ent_valid == '0, "empty after reset");
    insert(1, 3, 2, 1);   // entry 0: 3 instructions
    insert(2, 5, 0, 1);   // entry 1: 1 instruction
    insert(1, 3, 0, 0);   // duplicate (warp 1, SR 3): refused
    insert(1, 4, 1, 1);   // entry 2: 2 instructions
    check(ent_valid == 4'b0111, "three entries allocated lowest first");
    check(ent_warp[2] == 3'd1 && ent_prio[2] == PRIO_HIGH, "entry view");
    // round robin: 0,1,2,0,2,0 with inst ids and last flags
    begin
      int exp_idx[6] = '{0, 1, 2, 0, 2, 0};
      int exp_ins[6] = '{0, 0, 0, 1, 1, 2};
      bit exp_last[6] = '{0, 1, 0, 0, 1, 1};
      for (int n = 0; n < 6; n++) begin
        #1;
        check(sel_valid && sel_idx == 2'(exp_idx[n]), $sformatf("rr step %0d idx %0d", n, sel_idx));
        check(sel_inst == inst_id_t'(exp_ins[n]) && sel_last == exp_last[n],
              $sformatf("rr step %0d inst %0d last %0b", n, sel_inst, sel_last));
        if (exp_idx[n] == 0) check(sel_live.regs[1] == 8'd3 && sel_mask == 32'h2 && sel_sr == 5'd3, "fields of entry 0");
        adv = 1;
        @(negedge clk);
        adv = 0;
      end
    end
    check(ent_valid == 4'b0000 && !sel_valid, "all freed at SR.End");
    // eligibility mask and kill
    insert(4, 1, 7, 1);
    insert(5, 1, 7, 1);
    insert(4, 2, 7, 1);
    eligible = 4'b1110;
    #1 check(sel_valid && sel_idx == 2'd1, "ineligible entry skipped");
    eligible = '1;
    kill_valid = 1; kill_warp = 3'd4;
    @(negedge clk);
    kill_valid = 0;
    check(ent_valid == 4'b0010, "kill frees only warp 4");
    insert(4, 1, 7, 1);   // duplicate rule cleared by the kill
    check(ent_valid == 4'b0011, "reuse of a killed slot");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
