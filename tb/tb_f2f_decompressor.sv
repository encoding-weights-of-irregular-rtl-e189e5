// tb_f2f_decompressor: end-to-end test of the decompressor at its default
// parameters on two small layers (3000 weights each, 90% pruned), with
// random input gaps and output back-pressure; every mechanism of the design
// must occur at least once. See f2f_bench for what is built and checked.
module tb_f2f_decompressor;
  f2f_bench #(.MN(3000), .S_PERMILLE(900), .LAYERS(2), .GAPS(1'b1), .CHECK_MECH(1'b1)) bench ();
endmodule
