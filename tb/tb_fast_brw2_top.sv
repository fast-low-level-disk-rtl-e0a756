// tb_fast_brw2_top: end-to-end test of fast_brw2_top at its default size, full
// 4096-byte sectors (256 blocks), three sectors with a key change in between.
// See fast_tb_body.
module tb_fast_brw2_top;
  fast_tb_body #(.LOG2M(8), .NSECT(3), .FULL(1'b1)) body ();
endmodule
