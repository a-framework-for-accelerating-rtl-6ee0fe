// tb_buffered_store_unit: drives the buffered store unit through its flows
// with a small line (16 bytes) and two entries:
//  * two partial stores to one line merge; the line asks for compression,
//    the compression succeeds and the line is released compressed with the
//    reported encoding and data; the lower level's answer frees the entry;
//  * a line that does not compress is released uncompressed;
//  * with both entries held and compression switched off, a third store
//    overflows: a held line is released uncompressed at once;
//  * a partial release into a line stored compressed below is fetched,
//    decompressed by an assist warp, merged with the buffered bytes and
//    released again as a whole uncompressed line.
module tb_buffered_store_unit;
  import caba_pkg::*;
  localparam int E = 2, W = 8, LB = 16, AW = 25;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n = 0, cmp_enable = 1;
  logic st_valid = 0, st_ready;
  logic [2:0] st_warp = '0;
  logic [AW-1:0] st_addr = '0;
  logic [LB*8-1:0] st_data = '0;
  logic [LB-1:0] st_bmask = '0;
  logic cmp_req_valid, cmp_req_ready = 0;
  logic [2:0] cmp_req_warp;
  logic [AW-1:0] cmp_req_addr;
  logic cmp_done_valid = 0, cmp_done_ok = 0;
  logic [2:0] cmp_done_warp = '0;
  logic [3:0] cmp_done_enc = '0;
  logic [LB*8-1:0] cmp_done_data = '0;
  logic rel_valid, rel_ready = 0, rel_compressed;
  logic [AW-1:0] rel_addr;
  logic [LB*8-1:0] rel_data;
  logic [LB-1:0] rel_bmask;
  logic [3:0] rel_enc;
  logic resp_valid = 0, resp_target_compressed = 0;
  logic [AW-1:0] resp_addr = '0;
  logic fetch_valid, fetch_ready = 0;
  logic [AW-1:0] fetch_addr;
  logic fill_valid = 0;
  logic [AW-1:0] fill_addr = '0;
  logic [3:0] fill_enc = '0;
  logic dcmp_req_valid, dcmp_req_ready = 0;
  logic [2:0] dcmp_req_warp;
  logic [3:0] dcmp_req_enc;
  logic [AW-1:0] dcmp_req_addr;
  logic dcmp_done_valid = 0;
  logic [2:0] dcmp_done_warp = '0;
  logic [LB*8-1:0] dcmp_done_data = '0;
  logic kill_valid = 0;
  logic [2:0] kill_warp = 0;
  logic overflow;
  logic [1:0] occupancy;

  buffered_store_unit #(.ENTRIES(E), .NUM_WARPS(W), .LINE_BYTES(LB), .ADDR_W(AW)) dut (.*);

  task automatic check(input logic c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL @%0t: %s", $time, m); end
  endtask
  task automatic store(input int w, input int a, input logic [LB*8-1:0] d, input logic [LB-1:0] m);
    st_valid = 1; st_warp = 3'(w); st_addr = AW'(a); st_data = d; st_bmask = m;
    #1 check(st_ready, "store accepted");
    @(negedge clk);
    st_valid = 0;
  endtask
  task automatic respond(input int a, input bit tc);
    resp_valid = 1; resp_addr = AW'(a); resp_target_compressed = tc;
    @(negedge clk);
    resp_valid = 0;
  endtask
  task automatic take_release(input int a, input bit cmp, input logic [LB*8-1:0] d, input logic [LB-1:0] m, input string s);
    #1 check(rel_valid && rel_addr == AW'(a) && rel_compressed == cmp && rel_data == d && rel_bmask == m,
             $sformatf("%s: v%0b a%0h c%0b d%h m%h", s, rel_valid, rel_addr, rel_compressed, rel_data, rel_bmask));
    rel_ready = 1;
    @(negedge clk);
    rel_ready = 0;
  endtask

  localparam logic [LB*8-1:0] D1 = 128'h0000_0000_0000_0000_1111_2222_3333_4444;
  localparam logic [LB*8-1:0] D2 = 128'h5555_6666_7777_8888_0000_0000_0000_0000;
  localparam logic [LB*8-1:0] DC = 128'h0000_0000_0000_0000_0000_00AB_CDEF_0155;

  int overflows = 0;
  always @(posedge clk) if (overflow) overflows++;

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
    // ---- merge, compress, release compressed
    cmp_enable = 1;
    store(3, 'h40, D1, 16'h00FF);
    store(3, 'h40, D2, 16'hFF00);
    #1 check(occupancy == 2'd1, "merged into one entry");
    check(cmp_req_valid && cmp_req_warp == 3'd3 && cmp_req_addr == 25'h40, "compression requested");
    cmp_req_ready = 1;
    @(negedge clk);
    cmp_req_ready = 0;
    #1 check(!cmp_req_valid && !rel_valid, "compressing");
    cmp_done_valid = 1; cmp_done_warp = 3'd3; cmp_done_ok = 1; cmp_done_enc = 4'd5; cmp_done_data = DC;
    @(negedge clk);
    cmp_done_valid = 0;
    #1 check(rel_enc == 4'd5, "encoding released");
    take_release('h40, 1, DC, 16'hFFFF, "compressed release");
    respond('h40, 0);
    #1 check(occupancy == 2'd0, "freed after answer");
    // ---- not compressible: released uncompressed
    store(2, 'h80, D1, 16'hFFFF);
    cmp_req_ready = 1;
    @(negedge clk);
    cmp_req_ready = 0;
    cmp_done_valid = 1; cmp_done_warp = 3'd2; cmp_done_ok = 0;
    @(negedge clk);
    cmp_done_valid = 0;
    take_release('h80, 0, D1, 16'hFFFF, "incompressible release");
    respond('h80, 1);     // full-line write: target state does not matter
    #1 check(occupancy == 2'd0, "full line needs no fix-up");
    // ---- overflow
    cmp_enable = 0;
    store(1, 'h100, D1, 16'h00FF);
    store(1, 'h140, D2, 16'hFF00);
    st_valid = 1; st_warp = 3'd1; st_addr = 25'h180; st_data = D1; st_bmask = 16'h000F;
    #1 check(!st_ready && overflow, "third line overflows");
    @(negedge clk);
    #1 check(!st_ready && !overflow, "store waits; only one line released");
    take_release('h100, 0, D1, 16'h00FF, "overflow release uncompressed");
    // ---- partial write into a compressed line: fetch, decompress, merge, resend
    respond('h100, 1);
    #1 check(fetch_valid && fetch_addr == 25'h100, "fetch compressed line");
    fetch_ready = 1;
    @(negedge clk);
    fetch_ready = 0;
    fill_valid = 1; fill_addr = 25'h100; fill_enc = 4'd7;
    @(negedge clk);
    fill_valid = 0;
    #1 check(dcmp_req_valid && dcmp_req_warp == 3'd1 && dcmp_req_enc == 4'd7 && dcmp_req_addr == 25'h100, "decompression requested");
    dcmp_req_ready = 1;
    @(negedge clk);
    dcmp_req_ready = 0;
    dcmp_done_valid = 1; dcmp_done_warp = 3'd1; dcmp_done_data = {16{8'hEE}};
    @(negedge clk);
    dcmp_done_valid = 0;
    take_release('h100, 0, {{8{8'hEE}}, D1[63:0]}, 16'hFFFF, "merged line resent whole");
    #1 check(!st_ready, "store still waits for the answer");
    respond('h100, 1);
    #1 check(st_ready, "entry free: waiting store enters");
    @(negedge clk);
    st_valid = 0;
    check(overflows == 1, "exactly one overflow");
    #1 check(occupancy == 2'd2, "two lines held");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
