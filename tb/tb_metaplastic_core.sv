// tb_metaplastic_core: end-to-end test of the learning tile at a reduced
// size (8 x 4 weights); see tb_core_body for what is exercised and checked.
module tb_metaplastic_core;
  tb_core_body #(.FULL(1'b0), .ROWS(8), .COLS(4), .N_UPD(400)) body ();
endmodule
