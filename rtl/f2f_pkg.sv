// f2f_pkg: constants, types and the XOR-matrix generator shared by the
// fixed-to-fixed sparse-weight decompressor.
//
// Defaults follow the main configuration of the encoding scheme: byte-wide
// encoded input (N_IN = 8), N_OUT = N_IN / (1 - S) = 80 decoded bits per
// vector for a pruning rate S = 0.9, two shift registers (N_S = 2), 32-bit
// (FP32) weights split into 32 bit planes, and 512-bit correction blocks.
// The XOR matrix M+ is random in the method; here each element is one bit of
// a fixed 32-bit integer hash of (seed, row, column), so a chosen matrix is
// reproducible from its seed. The hash itself is this design's choice.
package f2f_pkg;

  localparam int unsigned N_IN_DEF  = 8;    // encoded bits per vector
  localparam int unsigned N_OUT_DEF = 80;   // decoded bits per vector
  localparam int unsigned N_S_DEF   = 2;    // number of shift registers
  localparam int unsigned N_W_DEF   = 32;   // bits per weight (FP32)
  localparam int unsigned P_DEF     = 512;  // correction block length
  localparam logic [31:0] M_SEED_DEF = 32'h1F2F_0001;

  // Element (row, col) of M+. Integer mixing (multiply / xor-shift) of the
  // seed and both coordinates; bit 31 of the result is the matrix bit.
  function automatic logic m_bit(input logic [31:0] seed,
                                 input int unsigned row,
                                 input int unsigned col);
    logic [31:0] x;
    x = seed ^ (32'(row) * 32'h9E37_79B9) ^ (32'(col) * 32'h85EB_CA6B);
    x = x ^ (x >> 16);
    x = x * 32'h7FEB_352D;
    x = x ^ (x >> 15);
    x = x * 32'h846C_A68B;
    x = x ^ (x >> 16);
    return x[31];
  endfunction

endpackage
