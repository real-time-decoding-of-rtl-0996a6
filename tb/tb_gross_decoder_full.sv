// tb_gross_decoder_full: end-to-end test of the decoder at its default
// size (gross code [[144,12,12]], W = 12, C = 8: 2592 VNUs, 864 CNUs); see
// tb_top_body for the stimulus and the checks.
module tb_gross_decoder_full;
  tb_top_body #(.SMALL(1'b0)) body ();
endmodule
