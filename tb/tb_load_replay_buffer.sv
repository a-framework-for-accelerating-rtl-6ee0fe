// tb_load_replay_buffer: allocates loads waiting for decompression, signals
// completions out of allocation order and with a repeated (warp, SR.ID), and
// checks that each completion releases the oldest matching load, that replays
// come out oldest-ready first with their address and load info, that
// done_match reports a waiting match, and that the buffer refuses
// allocation when full.
module tb_load_replay_buffer;
  import caba_pkg::*;
  localparam int E = 4, W = 8;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n = 0;
  logic alloc_valid = 0, alloc_ready;
  logic [2:0] alloc_warp = '0, done_warp = '0, replay_warp;
  sr_id_t alloc_sr = '0, done_sr = '0;
  logic [31:0] alloc_addr = '0, alloc_info = '0, replay_addr, replay_info;
  logic kill_valid = 0;
  logic [2:0] kill_warp = 0;
  logic done_valid = 0, done_match, replay_valid, replay_ready = 0;
  logic [2:0] occupancy;

  load_replay_buffer #(.ENTRIES(E), .NUM_WARPS(W)) dut (.*);

  task automatic check(input logic c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL @%0t: %s", $time, m); end
  endtask
  task automatic alloc(input int w, input int sr, input int a);
    alloc_valid = 1; alloc_warp = 3'(w); alloc_sr = sr_id_t'(sr); alloc_addr = 32'(a); alloc_info = 32'(a) ^ 32'hFFFF;
    @(negedge clk);
    alloc_valid = 0;
  endtask
  task automatic done(input int w, input int sr, input bit exp_match);
    done_valid = 1; done_warp = 3'(w); done_sr = sr_id_t'(sr);
    #1 check(done_match == exp_match, $sformatf("done_match w%0d sr%0d", w, sr));
    @(negedge clk);
    done_valid = 0;
  endtask
  task automatic take(input int w, input int a);
    #1 check(replay_valid && replay_warp == 3'(w) && replay_addr == 32'(a) && replay_info == (32'(a) ^ 32'hFFFF),
             $sformatf("replay w%0d a%0h got v%0b w%0d a%0h", w, a, replay_valid, replay_warp, replay_addr));
    replay_ready = 1;
    @(negedge clk);
    replay_ready = 0;
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
    alloc(1, 3, 'h100);
    alloc(2, 3, 'h200);
    alloc(1, 3, 'h110);   // second load of warp 1 waiting on the same routine
    alloc(4, 7, 'h400);
    #1 check(!alloc_ready && occupancy == 3'd4, "full");
    check(!replay_valid, "nothing replays before completion");
    done(4, 7, 1);
    take(4, 'h400);
    done(1, 3, 1);        // releases the older warp-1 load first
    done(2, 3, 1);
    take(1, 'h100);
    take(2, 'h200);
    #1 check(!replay_valid, "younger warp-1 load still waits");
    done(5, 1, 0);        // no match
    alloc(6, 2, 'h600);   // reuses a free slot: younger than the waiting warp-1 load
    done(6, 2, 1);
    done(1, 3, 1);
    take(1, 'h110);
    take(6, 'h600);
    #1 check(occupancy == 3'd0 && alloc_ready, "empty again");
    alloc(3, 4, 'h300);
    alloc(5, 4, 'h500);
    kill_valid = 1; kill_warp = 3'd5;
    @(negedge clk);
    kill_valid = 0;
    take(5, 'h500);
    #1 check(!replay_valid, "kill releases only the killed warp's loads");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
