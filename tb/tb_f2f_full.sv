// tb_f2f_full: one complete layer at full size and default parameters: a
// 512 x 512 matrix of 32-bit weights (the size of a Transformer attention
// projection) pruned at random to 90%, decoded without gaps. See f2f_bench.
module tb_f2f_full;
  f2f_bench #(.MN(512 * 512), .S_PERMILLE(900), .LAYERS(1), .GAPS(1'b0), .CHECK_MECH(1'b0),
              .MAX_CYCLES(4000000)) bench ();
endmodule
