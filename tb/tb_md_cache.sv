// tb_md_cache: runs the 8 KB 4-way metadata cache at its default size
// against a behavioural DRAM holding the metadata region and a reference map
// of every line's burst count.
//  * Directed: five metadata blocks of one set: the fifth evicts the least
//    recently used; hit/miss of each access is checked, and the hit latency
//    (response one cycle after the request).
//  * Random: 3000 reads and updates spread over 24 blocks that fall into
//    three sets, so dirty victims are written back and read again; every
//    response is compared with the reference map.
module tb_md_cache;
  localparam int AW = 25, BA = 18;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n = 0;
  logic req_valid = 0, req_ready, req_write = 0;
  logic [AW-1:0] req_addr = '0;
  logic [2:0] req_bursts = 3'd1, resp_bursts;
  logic resp_valid, resp_hit;
  logic mem_rd_valid, mem_rd_ready = 1, mem_fill_valid = 0, mem_wr_valid, mem_wr_ready = 1;
  logic [BA-1:0] mem_rd_addr, mem_wr_addr;
  logic [255:0] mem_fill_data = '0, mem_wr_data;
  logic [31:0] hits, misses;

  md_cache dut (.*);

  // behavioural metadata region: unwritten blocks hold a pattern of the address
  logic [255:0] dram [logic [BA-1:0]];
  function automatic logic [255:0] init_blk(logic [BA-1:0] b);
    logic [255:0] v;
    for (int i = 0; i < 8; i++) v[i*32 +: 32] = 32'(b) * 32'h2545_F491 + 32'(i) * 32'h9E37_79B9;
    return v;
  endfunction
  function automatic logic [255:0] rd_blk(logic [BA-1:0] b);
    return dram.exists(b) ? dram[b] : init_blk(b);
  endfunction

  always @(posedge clk) begin
    if (mem_wr_valid && mem_wr_ready) dram[mem_wr_addr] = mem_wr_data;
  end
  initial begin
    forever begin
      @(posedge clk);
      if (mem_rd_valid && mem_rd_ready) begin
        logic [BA-1:0] a;
        a = mem_rd_addr;
        repeat (3) @(posedge clk);
        mem_fill_data <= rd_blk(a);
        mem_fill_valid <= 1;
        @(posedge clk);
        mem_fill_valid <= 0;
      end
    end
  end

  // reference burst count per line
  int ref_b [logic [AW-1:0]];
  function automatic int ref_of(logic [AW-1:0] a);
    logic [255:0] v;
    if (ref_b.exists(a)) return ref_b[a];
    v = init_blk(a[AW-1:7]);
    return int'(v[a[6:0]*2 +: 2]) + 1;
  endfunction

  int cyc = 0;
  always @(posedge clk) cyc++;

  task automatic access(input logic [AW-1:0] a, input bit wr, input int b, output bit hit, output int lat);
    int t0, expb;
    expb = wr ? b : ref_of(a);
    if (wr) ref_b[a] = b;
    while (!req_ready) @(negedge clk);
    req_valid = 1; req_write = wr; req_addr = a; req_bursts = 3'(b);
    t0 = cyc;
    @(negedge clk);
    req_valid = 0;
    while (!resp_valid) @(negedge clk);
    lat = cyc - t0;
    hit = resp_hit;
    checks++;
    if (int'(resp_bursts) != expb) begin
      failures++;
      if (failures < 6) $display("FAIL addr %h wr %0b: bursts %0d expected %0d", a, wr, resp_bursts, expb);
    end
  endtask

  // line address of metadata block (tag t, set s), line offset o
  function automatic logic [AW-1:0] la(int t, int s, int o);
    return {12'(t), 6'(s), 7'(o)};
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit h;
    int lat;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int t = 0; t < 4; t++) begin
      access(la(t, 5, 3), 0, 0, h, lat);
      checks++; if (h) begin failures++; $display("FAIL: cold access hit"); end
    end
    access(la(0, 5, 9), 0, 0, h, lat);
    checks++; if (!h || lat != 1) begin failures++; $display("FAIL: hit %0b latency %0d", h, lat); end
    access(la(1, 5, 3), 1, 4, h, lat);              // update, now MRU order 1,0,3,2
    checks++; if (!h) begin failures++; $display("FAIL: update hit"); end
    access(la(4, 5, 0), 0, 0, h, lat);              // evicts tag 2 (LRU)
    checks++; if (h) begin failures++; $display("FAIL: fifth block hit"); end
    access(la(2, 5, 0), 0, 0, h, lat);
    checks++; if (h) begin failures++; $display("FAIL: evicted block still present"); end
    access(la(1, 5, 3), 0, 0, h, lat);              // dirty, MRU-ish: kept, reads 4
    checks++; if (!h) begin failures++; $display("FAIL: recently used block evicted"); end
    checks++; if (hits != 32'd3 || misses != 32'd6) begin failures++; $display("FAIL: counters %0d %0d", hits, misses); end
    // random traffic
    for (int n = 0; n < 3000; n++) begin
      access(la($urandom_range(7), 8 * $urandom_range(2), $urandom_range(15)),
             ($urandom_range(2) == 0), $urandom_range(1, 4), h, lat);
    end
    $display("md cache hits=%0d misses=%0d", hits, misses);
    checks++; if (hits == 0 || misses == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
