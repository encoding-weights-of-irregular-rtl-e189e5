// xor_gate_network: the fixed XOR-gate network M+ of the sequential decoder.
//
// Computes out_bits = M+ * in_bits over GF(2): output bit r is the XOR of
// every input bit c for which element (r, c) of the N_OUT x K matrix is 1,
// K = (N_S+1)*N_IN. The input is the concatenation of the current encoded
// vector and the N_S previous ones, oldest vector in the most significant
// N_IN bits (the w_{t-2}, w_{t-1}, w_t order of the decoder diagram). The
// network is purely combinational, so one decoded vector is produced per
// clock; with a random matrix about half of the elements are 1, i.e. about
// N_OUT*K/2 two-input XOR gates.
//
// The method fills M+ with random bits and keeps the best of many tries; it
// does not publish a matrix. This design builds M+ at elaboration time from
// f2f_pkg::m_bit(M_SEED, r, c), so a searched matrix is selected by its seed.
module xor_gate_network
  import f2f_pkg::*;
#(
  parameter int unsigned N_IN   = N_IN_DEF,
  parameter int unsigned N_OUT  = N_OUT_DEF,
  parameter int unsigned N_S    = N_S_DEF,
  parameter logic [31:0] M_SEED = M_SEED_DEF,
  localparam int unsigned K     = (N_S + 1) * N_IN
) (
  input  logic [K-1:0]     in_bits,
  output logic [N_OUT-1:0] out_bits
);

  typedef logic [N_OUT-1:0][K-1:0] matrix_t;

  function automatic matrix_t build_matrix(input logic [31:0] seed);
    matrix_t m;
    for (int unsigned r = 0; r < N_OUT; r++)
      for (int unsigned c = 0; c < K; c++)
        m[r][c] = m_bit(seed, r, c);
    return m;
  endfunction

  localparam matrix_t M = build_matrix(M_SEED);

  always_comb begin
    for (int unsigned r = 0; r < N_OUT; r++)
      out_bits[r] = ^(in_bits & M[r]);
  end

endmodule
