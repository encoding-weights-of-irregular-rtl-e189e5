// tb_xor_gate_network: checks the XOR-gate network against a bit-serial
// GF(2) matrix-vector product written from the matrix definition
// (f2f_pkg::m_bit), for single-bit inputs (each output column must equal
// column c of M+), for random inputs, and for linearity
// (M(a^b) = M(a)^M(b)). It also checks that M+ is about half ones, as a
// random 0/1 fill gives. Purely combinational: each vector is applied and
// checked after a 1 ns settle.
module tb_xor_gate_network;
  import f2f_pkg::*;
  localparam int unsigned N_IN = 8, N_OUT = 80, N_S = 2;
  localparam int unsigned K = (N_S + 1) * N_IN;

  logic [K-1:0]     in_bits;
  logic [N_OUT-1:0] out_bits;
  int checks = 0, failures = 0;

  xor_gate_network dut (.in_bits, .out_bits);

  function automatic logic [N_OUT-1:0] ref_mul(input logic [K-1:0] v);
    logic [N_OUT-1:0] y = '0;
    for (int r = 0; r < N_OUT; r++)
      for (int c = 0; c < K; c++)
        if (v[c] && m_bit(M_SEED_DEF, r, c)) y[r] = ~y[r];
    return y;
  endfunction

  task automatic check(input logic [K-1:0] v, input string what);
    in_bits = v;
    #1;
    checks++;
    if (out_bits !== ref_mul(v)) begin
      failures++;
      $display("FAIL %s in=%h out=%h exp=%h", what, v, out_bits, ref_mul(v));
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ones = 0;
    logic [K-1:0] a, b;
    logic [N_OUT-1:0] ya, yb;
    for (int r = 0; r < N_OUT; r++)
      for (int c = 0; c < K; c++) ones += m_bit(M_SEED_DEF, r, c);
    checks++;
    if (ones < N_OUT*K*4/10 || ones > N_OUT*K*6/10) begin
      failures++;
      $display("FAIL matrix density %0d of %0d", ones, N_OUT*K);
    end
    check('0, "zero");
    for (int c = 0; c < K; c++) check(K'(1) << c, "unit");
    for (int i = 0; i < 300; i++) check(K'({$urandom, $urandom}), "random");
    for (int i = 0; i < 50; i++) begin
      a = K'($urandom); b = K'($urandom);
      in_bits = a; #1 ya = out_bits;
      in_bits = b; #1 yb = out_bits;
      in_bits = a ^ b; #1;
      checks++;
      if (out_bits !== (ya ^ yb)) begin
        failures++;
        $display("FAIL linearity");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
