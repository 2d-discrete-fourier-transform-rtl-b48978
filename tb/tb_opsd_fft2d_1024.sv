// tb_opsd_fft2d_1024: end-to-end test of opsd_fft2d on 1024 x 1024 frames,
// the larger of the two image sizes the design is meant for, with N = 1024
// and four butterflies per core. The same harness as the other top-level
// tests (opsd_frame_checker) sends two frames back to back through the DRAM
// model and compares every result word with a floating-point reference;
// about 9.6 M cycles per frame. Only the size differs from the default test.
// The harness has its own cycle watchdog; the one here is an outer backstop
// in simulated time (the harness clock has a 10-unit period), several times
// longer than a normal run.
module tb_opsd_fft2d_1024;
  opsd_frame_checker #(.N(1024), .BFLY(4), .FULL(0)) u_chk ();

  initial begin
    #2000000000;
    $display("outer watchdog expired");
    $display("TB_RESULT checks=0 failures=1");
    $finish;
  end
endmodule
