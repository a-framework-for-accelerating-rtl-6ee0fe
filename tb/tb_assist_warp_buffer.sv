// tb_assist_warp_buffer: checks that parent and high-priority assist
// instructions share a warp's partition (free count, par_ready when full and
// when an assist push takes the last slot), that heads show the oldest
// parent and the oldest assist entry, that low-priority instructions go to
// the two-entry partition in order, and that a flush removes only assist
// entries of the flushed warp.
module tb_assist_warp_buffer;
  import caba_pkg::*;
  localparam int W = 4;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n = 0;
  logic par_valid = 0, par_ready;
  logic [1:0] par_warp = '0;
  inst_word_t par_inst = '0;
  logic aw_valid = 0;
  logic [1:0] aw_warp = '0;
  aw_inst_t aw_inst = '0;
  logic [W-1:0] par_hold = '0;
  logic [W-1:0][1:0] ib_free;
  logic [1:0] lp_free;
  logic [W-1:0] head_par_valid, head_aw_valid;
  inst_word_t [W-1:0] head_par_inst;
  aw_inst_t [W-1:0] head_aw;
  logic lp_valid;
  logic [1:0] lp_warp;
  aw_inst_t lp_inst;
  logic pop_valid = 0;
  logic [1:0] pop_kind = '0, pop_warp = '0;
  logic flush_valid = 0;
  logic [1:0] flush_warp = '0;

  assist_warp_buffer #(.NUM_WARPS(W)) dut (.*);

  task automatic check(input logic c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL @%0t: %s", $time, m); end
  endtask

  function automatic aw_inst_t mk(input int id, input prio_e p);
    aw_inst_t a;
    a = '0;
    a.inst = inst_word_t'(id);
    a.prio = p;
    a.inst_id = inst_id_t'(id);
    return a;
  endfunction

  task automatic push_par(input int w, input int v);
    par_valid = 1; par_warp = 2'(w); par_inst = inst_word_t'(v);
    @(negedge clk);
    par_valid = 0;
  endtask
  task automatic push_aw(input int w, input int v, input prio_e p);
    aw_valid = 1; aw_warp = 2'(w); aw_inst = mk(v, p);
    @(negedge clk);
    aw_valid = 0;
  endtask
  task automatic pop(input int k, input int w);
    pop_valid = 1; pop_kind = 2'(k); pop_warp = 2'(w);
    @(negedge clk);
    pop_valid = 0;
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
    check(ib_free[1] == 2'd2 && lp_free == 2'd2 && head_par_valid == '0 && !lp_valid, "empty");
    push_par(1, 11);
    check(ib_free[1] == 2'd1 && head_par_valid[1] && head_par_inst[1] == 64'd11, "parent entry");
    push_aw(1, 21, PRIO_HIGH);
    check(ib_free[1] == 2'd0 && head_aw_valid[1] && head_aw[1].inst == 64'd21, "assist in parent partition");
    par_valid = 1; par_warp = 2'd1; #1 check(!par_ready, "full partition refuses parent"); par_valid = 0;
    check(ib_free[0] == 2'd2 && !head_aw_valid[0], "other partitions untouched");
    pop(1, 1);
    check(!head_aw_valid[1] && head_par_valid[1] && ib_free[1] == 2'd1, "pop assist leaves parent");
    // contested last slot: assist wins
    par_valid = 1; par_warp = 2'd1; par_inst = 64'd12;
    aw_valid = 1; aw_warp = 2'd1; aw_inst = mk(22, PRIO_HIGH);
    #1 check(!par_ready, "assist push takes the contested slot");
    @(negedge clk);
    par_valid = 0; aw_valid = 0;
    check(head_aw_valid[1] && head_aw[1].inst == 64'd22 && head_par_inst[1] == 64'd11, "assist entered");
    pop(0, 1);
    push_par(1, 13);
    check(head_par_inst[1] == 64'd13 && head_aw[1].inst == 64'd22, "heads after refill");
    // low-priority partition
    push_aw(2, 31, PRIO_LOW);
    push_aw(3, 32, PRIO_LOW);
    check(lp_free == 2'd0 && lp_valid && lp_warp == 2'd2 && lp_inst.inst == 64'd31, "LP head in order");
    check(ib_free[2] == 2'd2, "LP does not use the warp partition");
    pop(2, 0);
    check(lp_valid && lp_warp == 2'd3 && lp_inst.inst == 64'd32 && lp_free == 2'd1, "LP pop");
    // flush warp 1 and 3: assist entries go, parent stays
    flush_valid = 1; flush_warp = 2'd1;
    @(negedge clk);
    flush_warp = 2'd3;
    @(negedge clk);
    flush_valid = 0;
    check(!head_aw_valid[1] && head_par_valid[1] && head_par_inst[1] == 64'd13, "flush keeps parent");
    check(!lp_valid && lp_free == 2'd2, "flush empties LP of warp 3");
    // order of two parent entries
    pop(0, 1);
    push_par(0, 41);
    push_par(0, 42);
    check(head_par_inst[0] == 64'd41, "oldest parent first");
    pop(0, 0);
    check(head_par_inst[0] == 64'd42, "then next");
    // a warp with a live high-priority assist warp takes no new parents
    par_valid = 1; par_warp = 2'd0; par_hold = 4'b0001;
    #1 check(!par_ready, "held warp refuses parent");
    par_hold = 4'b0100;
    #1 check(par_ready, "hold of another warp does not block");
    @(negedge clk);
    par_valid = 0; par_hold = '0;
    check(ib_free[0] == 2'd0, "parent took the free slot");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
