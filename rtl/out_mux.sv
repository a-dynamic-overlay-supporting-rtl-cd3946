// out_mux: the tile's output multiplexer ("Out Mux" of the tile diagram).
//
// Each of the four outgoing links Ns, Es, Ss, Ws is driven, independently, by
// the PR region's result stream (the tile consumes and computes), by the word
// popped from the buffer (the tile bypasses it, as a pass-through hop), or by
// nothing. Several outputs may carry the same source (fan-out). The outputs
// are registered, so a word leaves the tile one clock after it is selected.
// The two sources and the controller select follow the tile diagram; the
// registered outputs and the per-output selects are this design's choices.
module out_mux
  import overlay_pkg::*;
(
  input  logic  clk,
  input  logic  rst,
  input  link_t pr_in,           // result of the PR region
  input  link_t buf_in,          // word popped from the buffer (bypass)
  input  src_e  sel [4],         // per output direction, indexed by dir_e
  output link_t link_out [4]
);
  always_ff @(posedge clk) begin
    for (int d = 0; d < 4; d++) begin
      if (rst) begin
        link_out[d] <= '0;
      end else begin
        unique case (sel[d])
          SRC_PR:  link_out[d] <= pr_in;
          SRC_BUF: link_out[d] <= buf_in;
          default: link_out[d] <= '0;
        endcase
      end
    end
  end
endmodule
