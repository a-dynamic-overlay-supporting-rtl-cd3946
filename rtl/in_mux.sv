// in_mux: the tile's input multiplexer ("In Mux" of the tile diagram).
//
// It picks one of the four incoming neighbour links Nr, Er, Sr, Wr, as set by
// the tile controller, and hands that word to the tile buffer. When disabled
// it passes nothing (valid low). Purely combinational: the buffer behind it is
// the first register on the path. The four inputs and the controller select
// are from the tile diagram; the "off" setting is this design's choice so that
// an idle tile does not fill its buffer with a neighbour's traffic.
module in_mux
  import overlay_pkg::*;
(
  input  link_t       link_in [4],   // indexed by dir_e: N, E, S, W
  input  logic        en,            // input selected at all
  input  dir_e        sel,           // which neighbour
  output link_t       link_out
);
  always_comb begin
    link_out = link_in[sel];
    link_out.valid = en & link_in[sel].valid;
  end
endmodule
