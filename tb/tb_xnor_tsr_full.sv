// tb_xnor_tsr_full: one frame through the classifier at its default,
// full size (32x32x3 image, 64 and 128 filters, 512 hidden neurons, 43
// classes), checked against the reference model and the cycle budget of
// 449.25 frames/s at 100 MHz. See tsr_tb_core.
module tb_xnor_tsr_full;
  tsr_tb_core #(.FULL(1'b1), .IMG_W(32), .IMG_CH(3), .K(5), .C1_OUT(64), .C2_OUT(128),
                .F1_OUT(512), .N_CLASSES(43), .N_FRAMES(1)) core ();
endmodule
