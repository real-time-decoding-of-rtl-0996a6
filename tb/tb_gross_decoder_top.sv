// tb_gross_decoder_top: end-to-end test of the decoder at reduced size
// ([[72,12,6]] code, W = 4, C = 2); see tb_top_body for what is checked.
module tb_gross_decoder_top;
  tb_top_body #(.SMALL(1'b1)) body ();
endmodule
