// tb_afd_top_full: one complete recording/analysis/transfer cycle of
// afd_top with every parameter at its default (120 s window, full network);
// see tb_afd_core.
module tb_afd_top_full;
  tb_afd_core #(.FULL(1'b1)) core ();
endmodule
