// tb_afd_top: end-to-end test of afd_top at reduced network and window
// size (see tb_afd_core for what is exercised and checked).
module tb_afd_top;
  tb_afd_core #(.FULL(1'b0)) core ();
endmodule
