// tb_fast_brw2_small: end-to-end test of fast_brw2_top on 8-block sectors
// (LOG2M = 3), four sectors with a key change in between. See fast_tb_body.
module tb_fast_brw2_small;
  fast_tb_body #(.LOG2M(3), .NSECT(4), .FULL(1'b0)) body ();
endmodule
