// tb_opsd_fft2d_full: end-to-end test of opsd_fft2d at its default size,
// 512 x 512 frames with four butterflies per core (see opsd_frame_checker).
module tb_opsd_fft2d_full;
  opsd_frame_checker #(.N(512), .BFLY(4), .FULL(1)) u_chk ();
endmodule
