// tb_global_predicate: writes random lane predicates and active masks for
// several warps and checks the stored AND over active lanes and the first
// failing active lane against values computed in the testbench.
module tb_global_predicate;
  import caba_pkg::*;
  localparam int W = 8;
  logic clk = 0;
  always #50 clk = ~clk;   // long half period: the eight #1 reads fit between edges
  int checks = 0, failures = 0;

  logic rst_n = 0, we = 0;
  logic [2:0] wr_warp = '0, rd_warp = '0;
  lane_mask_t lane_pred = '0, active_mask = '0;
  logic gpred, first_fail_valid;
  logic [4:0] first_fail_lane;

  global_predicate #(.NUM_WARPS(W)) dut (.*);

  bit exp_g [W];
  bit exp_v [W];
  int exp_l [W];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < W; r++) begin exp_g[r] = 0; exp_v[r] = 0; exp_l[r] = 0; end
    for (int n = 0; n < 400; n++) begin
      int w;
      lane_mask_t f;
      w = $urandom_range(W - 1);
      // mostly-true predicates so that both outcomes occur
      lane_pred = (n % 3 == 0) ? '1 : ~(lane_mask_t'(1) << $urandom_range(31));
      active_mask = (n % 4 == 0) ? lane_mask_t'($urandom) : '1;
      we = 1; wr_warp = 3'(w);
      f = active_mask & ~lane_pred;
      exp_g[w] = (f == '0);
      exp_v[w] = (f != '0);
      exp_l[w] = 0;
      for (int i = 31; i >= 0; i--) if (f[i]) exp_l[w] = i;
      @(negedge clk);
      we = 0;
      for (int r = 0; r < W; r++) begin
        rd_warp = 3'(r);
        #1;
        checks++;
        if (gpred != exp_g[r] || first_fail_valid != exp_v[r] ||
            (exp_v[r] && first_fail_lane != 5'(exp_l[r]))) begin
          failures++;
          if (failures < 5) $display("FAIL warp %0d: g=%0b v=%0b l=%0d", r, gpred, first_fail_valid, first_fail_lane);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
