// tb_in_mux: checks that the In Mux passes the selected neighbour link and
// nothing when disabled, over random link contents and selects.
`timescale 1ns/1ps
module tb_in_mux;
  import overlay_pkg::*;
  link_t link_in [4];
  logic  en;
  dir_e  sel;
  link_t link_out;
  int checks = 0, failures = 0;

  in_mux dut (.*);

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 500; k++) begin
      for (int d = 0; d < 4; d++) link_in[d] = '{valid: 1'($urandom_range(0, 1)), data: $urandom};
      en  = 1'($urandom_range(0, 3) != 0);
      sel = dir_e'($urandom_range(0, 3));
      #1;
      checks++;
      if (link_out.valid !== (en & link_in[sel].valid) ||
          (en && link_in[sel].valid && link_out.data !== link_in[sel].data)) begin
        failures++;
        $display("FAIL k=%0d en=%b sel=%0d got %b/%h", k, en, sel, link_out.valid, link_out.data);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
