// tb_xnor_tsr_top: end-to-end test of the classifier at a reduced size
// (16x16x3 image, 6 and 8 convolution filters, 20 hidden neurons, 7
// classes), two frames back to back with fresh images. See tsr_tb_core.
module tb_xnor_tsr_top;
  tsr_tb_core #(.FULL(1'b0), .IMG_W(16), .IMG_CH(3), .K(5), .C1_OUT(6), .C2_OUT(8),
                .F1_OUT(20), .N_CLASSES(7), .N_FRAMES(2)) core ();
endmodule
