// tb_bitplane_lane: one bit plane end to end at default parameters. The
// bench sends l+N_S random encoded vectors for a plane of MN bits, works
// out the decoded plane with its own GF(2) model of M+ and the shift
// registers, picks random positions (about 2%) as "unmatched", loads their
// flags and {index, more} entries into the lane's correction memory and
// expects the decoded plane with exactly those bits flipped, block by block,
// with out_last on the last block. Two layers run: one with output
// back-pressure, and one (no corrections, output always ready) that checks
// the rate of one encoded vector per cycle.
module tb_bitplane_lane;
  import f2f_pkg::*;
  localparam int unsigned N_IN = 8, N_OUT = 80, N_S = 2, P = 512;
  localparam int unsigned K = (N_S + 1) * N_IN;
  logic clk = 0, rst_n = 1, start = 0;
  logic [31:0] total_bits = '0;
  logic wr_en = 0, wr_flag = 0;
  logic [11:0] wr_addr = '0;
  logic [9:0] wr_data = '0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1, out_last;
  logic [N_IN-1:0] in_data = '0;
  logic [P-1:0] out_data;
  logic [31:0] flips;
  int checks = 0, failures = 0, cyc = 0, nblk = 0, nb_exp = 0;
  logic bp = 0;
  logic [N_OUT-1:0] colm [K];
  bit exp_bits [];

  bitplane_lane dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) #1 out_ready = !bp || $urandom_range(0, 2) != 0;

  function automatic logic [N_OUT-1:0] mul(input logic [K-1:0] v);
    logic [N_OUT-1:0] y = '0;
    for (int c = 0; c < K; c++) if (v[c]) y ^= colm[c];
    return y;
  endfunction

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    logic [P-1:0] e;
    int i;
    for (int j = 0; j < P; j++) begin
      i = nblk * P + j;
      e[j] = (i < exp_bits.size()) ? exp_bits[i] : 1'b0;
    end
    checks++;
    if (out_data !== e || out_last !== (nblk == nb_exp - 1)) begin
      failures++;
      $display("FAIL block %0d", nblk);
    end
    nblk++;
  end

  task automatic run(input int mn, input int err_pm, input logic back);
    int l, nb, nloc, t0, t1;
    logic [N_IN-1:0] enc [];
    logic [K-1:0] hist;
    logic [N_OUT-1:0] d;
    bp = back;
    l = (mn + N_OUT - 1) / N_OUT;
    nb = (mn + P - 1) / P;
    nb_exp = nb;
    enc = new[l + N_S];
    exp_bits = new[mn];
    foreach (enc[t]) enc[t] = N_IN'($urandom);
    for (int t = 0; t < l; t++) begin
      for (int s = 0; s <= N_S; s++) hist[s*N_IN +: N_IN] = enc[t + N_S - s];
      d = mul(hist);
      for (int j = 0; j < N_OUT; j++) if (t * N_OUT + j < mn) exp_bits[t * N_OUT + j] = d[j];
    end
    // unmatched bits: flip them in the expectation, list them for the lane
    nloc = 0;
    for (int b = 0; b < nb; b++) begin
      int idx [$];
      for (int j = 0; j < P; j++)
        if (b * P + j < mn && $urandom_range(0, 999) < err_pm) idx.push_back(j);
      @(negedge clk) begin wr_en = 1; wr_flag = 1; wr_addr = 12'(b); wr_data = 10'(idx.size() != 0); end
      foreach (idx[k]) begin
        exp_bits[b * P + idx[k]] = !exp_bits[b * P + idx[k]];
        @(negedge clk) begin
          wr_en = 1; wr_flag = 0; wr_addr = 12'(nloc);
          wr_data = {9'(idx[k]), k != idx.size() - 1};
        end
        nloc++;
      end
    end
    @(negedge clk) begin wr_en = 0; start = 1; total_bits = mn; end
    @(negedge clk) start = 0;
    nblk = 0;
    t0 = -1;
    for (int t = 0; t < l + N_S; t++) begin
      in_valid = 1; in_data = enc[t];
      while (!in_ready) @(negedge clk);
      if (t0 < 0) t0 = cyc;
      t1 = cyc;
      @(negedge clk);
      in_valid = 0;
    end
    while (nblk < nb) @(negedge clk);
    repeat (3) @(negedge clk);
    checks++;
    if (flips != 32'(nloc)) begin
      failures++;
      $display("FAIL flips %0d exp %0d", flips, nloc);
    end
    if (!back && err_pm == 0) begin
      checks++;
      if (t1 - t0 != l + N_S - 1) begin
        failures++;
        $display("FAIL rate: %0d vectors over %0d cycles", l + N_S, t1 - t0 + 1);
      end
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < K; c++)
      for (int r = 0; r < N_OUT; r++) colm[c][r] = m_bit(M_SEED_DEF, r, c);
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(20000, 20, 1'b1);
    run(7777, 0, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
