// reg_file: the tile registers R1..R4 (index 0..3 here).
//
// All four registers are readable at once (the controller compares them for
// branches, the PR region reads an accumulator start value). Two write ports:
// one for the PR region (result of a reduction) and one for the controller
// (memory and register instructions). If both write the same register in one
// clock the PR region wins. Writes take effect at the clock edge; reset
// clears all registers. The four registers and their link to the PR region are
// from the tile diagram; the controller port, the write priority and reset to
// zero are this design's choices.
module reg_file
  import overlay_pkg::*;
(
  input  logic       clk,
  input  logic       rst,
  input  logic       pr_we,
  input  logic [1:0] pr_idx,
  input  word_t      pr_wdata,
  input  logic       ct_we,
  input  logic [1:0] ct_idx,
  input  word_t      ct_wdata,
  output word_t      regs [NREG]
);
  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < NREG; i++) regs[i] <= '0;
    end else begin
      if (ct_we) regs[ct_idx] <= ct_wdata;
      if (pr_we) regs[pr_idx] <= pr_wdata;
    end
  end
endmodule
