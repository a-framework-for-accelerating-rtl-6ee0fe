// tb_assist_warp_store: preloads every word of the assist warp store with a
// value computed from its (SR.ID, Inst.ID) address, reads every word back in
// a shuffled order and checks the value and the one-cycle read latency.
module tb_assist_warp_store;
  import caba_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic ld_en = 0, rd_en = 0;
  sr_id_t ld_sr = '0, rd_sr = '0;
  inst_id_t ld_inst = '0, rd_inst = '0;
  inst_word_t ld_data = '0, rd_data;

  assist_warp_store dut (.*);

  function automatic inst_word_t pat(int s, int i);
    return {32'(s) * 32'h9E37_79B9, 32'(i) ^ 32'hA5A5_0000 ^ (32'(s) << 8)};
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk);
    for (int s = 0; s < NUM_SR; s++)
      for (int i = 0; i < MAX_INST; i++) begin
        ld_en = 1; ld_sr = sr_id_t'(s); ld_inst = inst_id_t'(i); ld_data = pat(s, i);
        @(negedge clk);
      end
    ld_en = 0;
    for (int n = 0; n < NUM_SR * MAX_INST; n++) begin
      int a, s, i;
      a = (n * 37) % (NUM_SR * MAX_INST);
      s = a / MAX_INST; i = a % MAX_INST;
      rd_en = 1; rd_sr = sr_id_t'(s); rd_inst = inst_id_t'(i);
      @(negedge clk);
      rd_en = 0;
      checks++;
      if (rd_data !== pat(s, i)) begin
        failures++;
        if (failures < 5) $display("mismatch sr=%0d inst=%0d got %h", s, i, rd_data);
      end
      // the output holds while no read is made
      rd_sr = sr_id_t'((s + 1) % NUM_SR);
      @(negedge clk);
      checks++;
      if (rd_data !== pat(s, i)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
