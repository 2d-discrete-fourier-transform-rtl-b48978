// tb_opsd_fft2d: end-to-end test of opsd_fft2d on 16 x 16 frames with two
// butterflies per core (see opsd_frame_checker for what is checked).
module tb_opsd_fft2d;
  opsd_frame_checker #(.N(16), .BFLY(2), .FULL(0)) u_chk ();
endmodule
