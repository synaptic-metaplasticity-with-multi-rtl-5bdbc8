// tb_metaplastic_core_full: end-to-end test of the learning tile with every
// parameter at its default (128 x 64 weights, 16 kbit of memristors): all
// 8192 weights are programmed, read back, trained in both modes and used in
// forward and backward products; see tb_core_body.
module tb_metaplastic_core_full;
  tb_core_body #(.FULL(1'b1), .ROWS(128), .COLS(64), .N_UPD(20000)) body ();
endmodule
