// assist_warp_store (AWS): on-chip storage for assist-warp subroutine code.
//
// The store is preloaded with the subroutines before the application runs
// and is then read by the assist warp controller, one instruction per cycle,
// at the address {SR.ID, Inst.ID}: the subroutine ID selects the instruction
// sequence and the instruction ID points into it. Sizes (NUM_SR subroutines
// of MAX_INST words) and the 1-cycle synchronous read are this design's
// choices; the paper gives neither.
//
// Interface: a preload write port (ld_*) and a read port (rd_*).
// Timing: rd_data holds the word addressed by rd_sr/rd_inst one clock after
// rd_en, and keeps it until the next read.
module assist_warp_store
  import caba_pkg::*;
#(
  parameter int unsigned N_SR   = NUM_SR,
  parameter int unsigned N_INST = MAX_INST
) (
  input  logic       clk,
  // preload port
  input  logic       ld_en,
  input  sr_id_t     ld_sr,
  input  inst_id_t   ld_inst,
  input  inst_word_t ld_data,
  // read port
  input  logic       rd_en,
  input  sr_id_t     rd_sr,
  input  inst_id_t   rd_inst,
  output inst_word_t rd_data
);
  localparam int unsigned DEPTH = N_SR * N_INST;
  localparam int unsigned AW    = $clog2(DEPTH);

  inst_word_t mem [DEPTH];

  function automatic logic [AW-1:0] addr_of(sr_id_t sr, inst_id_t ii);
    return AW'(sr) * AW'(N_INST) + AW'(ii);
  endfunction

  always_ff @(posedge clk) begin
    if (ld_en) mem[addr_of(ld_sr, ld_inst)] <= ld_data;
    if (rd_en) rd_data <= mem[addr_of(rd_sr, rd_inst)];
  end
endmodule
