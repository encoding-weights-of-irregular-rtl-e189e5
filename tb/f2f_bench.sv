// f2f_bench: end-to-end bench of f2f_decompressor at its default parameters
// (N_IN = 8, N_OUT = 80, N_S = 2, 32 bit planes, P = 512).
//
// For each layer of MN weights it builds, inside the bench:
//   - a pruning mask keeping each weight with probability 1 - S;
//   - 32-bit weights whose bit planes are unbiased, except plane 1 (mostly
//     0) and planes 2..4 (mostly 1), like the exponent bits of FP32 models;
//   - the inverting decision: a plane is stored inverted when fewer than
//     half of its unpruned bits are 0;
//   - an encoding per plane. The optimal encoder is a dynamic program over
//     2^(N_IN*(N_S+1)) transitions per step, too slow for simulation, so the
//     bench uses a greedy encoder: vector t+N_S is chosen among the 2^N_IN
//     candidates to minimise unmatched unpruned bits of block t, given the
//     vectors already chosen. It is suboptimal; any encoding is decoded
//     losslessly, the correction data just grows;
//   - the correction data: per 512-bit block a flag, and one {index, more}
//     entry per unmatched unpruned bit, in ascending order.
// It loads the correction memories, starts the layer, streams l+N_S
// encoded vectors per plane and one mask word per block, and checks every
// decoded weight against the original (zero where pruned). It prints the
// encoding efficiency E and the memory reduction reached.
// With CHECK_MECH it counts the mechanisms of the design and fails if one
// never happened: decoder warm-up, clean and corrected blocks, multi-entry
// corrections, inverted planes, partial last vector and block, input stalls
// and output back-pressure. GAPS inserts random gaps and back-pressure.
module f2f_bench #(
  parameter int unsigned MN         = 3000,
  parameter int unsigned S_PERMILLE = 900,
  parameter int unsigned LAYERS     = 2,
  parameter bit          GAPS       = 1'b1,
  parameter bit          CHECK_MECH = 1'b1,
  parameter int unsigned MAX_CYCLES = 2000000
);
  import f2f_pkg::*;
  localparam int unsigned N_IN = N_IN_DEF, N_OUT = N_OUT_DEF, N_S = N_S_DEF;
  localparam int unsigned N_W = N_W_DEF, P = P_DEF;
  localparam int unsigned K = (N_S + 1) * N_IN;
  localparam int unsigned L = (MN + N_OUT - 1) / N_OUT;   // decoded vectors
  localparam int unsigned NB = (MN + P - 1) / P;           // correction blocks
  localparam int unsigned LOC_DEPTH = 4096, FLAG_DEPTH = 4096;

  logic clk = 0, rst_n = 1;
  logic [N_W-1:0] invert = '0;
  logic corr_wr_en = 0, corr_wr_flag = 0;
  logic [4:0] corr_wr_plane = '0;
  logic [11:0] corr_wr_addr = '0;
  logic [9:0] corr_wr_data = '0;
  logic start = 0;
  logic [31:0] total_bits = '0;
  logic enc_valid = 0, enc_ready;
  logic [N_W-1:0][N_IN-1:0] enc_data = '0;
  logic mask_valid = 0, mask_ready;
  logic [P-1:0] mask_data = '0;
  logic w_valid, w_ready = 1, w_last;
  logic [P-1:0][N_W-1:0] w_data;
  logic [31:0] flips;

  f2f_decompressor dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // mechanism counters
  int n_warm = 0, n_clean = 0, n_fixed = 0, n_multi = 0, n_inv = 0;
  int n_part_vec = 0, n_part_blk = 0, n_in_stall = 0, n_backpr = 0, n_pruned = 0;

  // layer data
  logic [N_W-1:0]        wt  [];   // original weights
  logic                  msk [];   // 1 = kept
  logic [N_W-1:0][N_IN-1:0] encv [];  // encoded vectors, all planes
  logic                  flg  [N_W][$];
  logic [9:0]            locs [N_W][$];
  logic [N_OUT-1:0]      colv [256];  // M+ applied to the current vector only
  logic [N_OUT-1:0]      colm [K];    // columns of M+
  longint unsigned       unpruned_bits, matched_bits, err_bits, layer_err;
  int                    nblk_out, enc_sent, mask_sent, first_acc, last_acc;

  function automatic logic [N_OUT-1:0] mul(input logic [K-1:0] v);
    logic [N_OUT-1:0] y = '0;
    for (int c = 0; c < K; c++) if (v[c]) y ^= colm[c];
    return y;
  endfunction

  task automatic build_layer();
    int bias [N_W];
    wt = new[MN]; msk = new[MN]; encv = new[L + N_S];
    for (int p = 0; p < N_W; p++) begin
      bias[p] = (p == 1) ? 10 : (p >= 2 && p <= 4) ? 90 : 50;   // % of ones
      flg[p].delete(); locs[p].delete();
    end
    for (int i = 0; i < MN; i++) begin
      msk[i] = $urandom_range(0, 999) >= S_PERMILLE;
      for (int p = 0; p < N_W; p++)
        wt[i][N_W-1-p] = $urandom_range(0, 99) < bias[p];
    end
    // inverting decision per plane
    for (int p = 0; p < N_W; p++) begin
      int zeros = 0, kept = 0;
      for (int i = 0; i < MN; i++) if (msk[i]) begin
        kept++;
        zeros += !wt[i][N_W-1-p];
      end
      invert[p] = (2 * zeros < kept);
      n_inv += invert[p];
    end
    for (int t = 0; t < N_S; t++) encv[t] = '0;
    layer_err = 0;
    // greedy encoding and correction data, plane by plane
    for (int p = 0; p < N_W; p++) begin
      bit errs [];
      errs = new[MN];
      for (int t = 0; t < L; t++) begin
        logic [N_OUT-1:0] tgt, m, base, out;
        logic [K-1:0] hist;
        int best, beste, e;
        for (int j = 0; j < N_OUT; j++) begin
          int i = t * N_OUT + j;
          tgt[j] = (i < MN) ? wt[i][N_W-1-p] ^ invert[p] : 1'b0;
          m[j]   = (i < MN) ? msk[i] : 1'b0;
        end
        hist = '0;
        for (int s = 1; s <= N_S; s++) hist[s*N_IN +: N_IN] = encv[t + N_S - s][p];
        base = mul(hist);
        best = 0; beste = N_OUT + 1;
        for (int c = 0; c < 256; c++) begin
          e = $countones((base ^ colv[c] ^ tgt) & m);
          if (e < beste) begin beste = e; best = c; end
        end
        encv[t + N_S][p] = N_IN'(best);
        out = base ^ colv[best];
        unpruned_bits += $countones(m);
        matched_bits  += $countones(m) - beste;
        for (int j = 0; j < N_OUT; j++)
          if (m[j] && (out[j] != tgt[j])) errs[t * N_OUT + j] = 1'b1;
      end
      for (int b = 0; b < NB; b++) begin
        int ne = 0;
        for (int j = 0; j < P; j++) if (b * P + j < MN && errs[b * P + j]) ne++;
        flg[p].push_back(ne != 0);
        if (ne == 0) n_clean++; else n_fixed++;
        if (ne > 1) n_multi++;
        for (int j = 0; j < P; j++) if (b * P + j < MN && errs[b * P + j]) begin
          ne--;
          locs[p].push_back({9'(j), ne != 0});
        end
      end
      err_bits += locs[p].size();
      layer_err += locs[p].size();
      if (locs[p].size() > LOC_DEPTH) begin
        failures++;
        $display("FAIL plane %0d needs %0d entries, memory holds %0d", p, locs[p].size(), LOC_DEPTH);
      end
    end
    for (int i = 0; i < MN; i++) n_pruned += !msk[i];
    if (MN % N_OUT != 0) n_part_vec++;
    if (MN % P != 0) n_part_blk++;
  endtask

  task automatic load_memories();
    for (int p = 0; p < N_W; p++) begin
      for (int b = 0; b < flg[p].size(); b++) begin
        @(negedge clk);
        corr_wr_en = 1; corr_wr_plane = 5'(p); corr_wr_flag = 1;
        corr_wr_addr = 12'(b); corr_wr_data = {9'd0, flg[p][b]};
      end
      for (int e = 0; e < locs[p].size() && e < LOC_DEPTH; e++) begin
        @(negedge clk);
        corr_wr_en = 1; corr_wr_plane = 5'(p); corr_wr_flag = 0;
        corr_wr_addr = 12'(e); corr_wr_data = locs[p][e];
      end
    end
    @(negedge clk) corr_wr_en = 0;
  endtask

  task automatic send_encoded();
    for (int t = 0; t < L + N_S; t++) begin
      while (GAPS && $urandom_range(0, 4) == 0) @(negedge clk);
      enc_valid = 1; enc_data = encv[t];
      while (!enc_ready) begin
        n_in_stall++;
        @(negedge clk);
      end
      if (t == 0) first_acc = cyc;
      if (t == N_S - 1) n_warm++;
      last_acc = cyc;
      @(negedge clk);
      enc_valid = 0;
      enc_sent++;
    end
  endtask

  task automatic send_mask();
    for (int b = 0; b < NB; b++) begin
      while (GAPS && $urandom_range(0, 4) == 0) @(negedge clk);
      mask_valid = 1;
      for (int j = 0; j < P; j++) mask_data[j] = (b * P + j < MN) ? msk[b * P + j] : 1'b0;
      while (!mask_ready) @(negedge clk);
      @(negedge clk);
      mask_valid = 0;
      mask_sent++;
    end
  endtask

  // output checker
  always @(posedge clk) if (rst_n) begin
    if (w_valid && !w_ready) n_backpr++;
    if (w_valid && w_ready) begin
      logic [P-1:0][N_W-1:0] e;
      for (int j = 0; j < P; j++) begin
        int i;
        i = nblk_out * P + j;
        e[j] = (i < MN && msk[i]) ? wt[i] : '0;
      end
      checks++;
      if (w_data !== e || w_last !== (nblk_out == NB - 1)) begin
        failures++;
        if (failures < 5)
          for (int j = 0; j < P; j++) if (w_data[j] !== e[j])
            $display("FAIL block %0d weight %0d got %h exp %h", nblk_out, j, w_data[j], e[j]);
      end
      nblk_out++;
    end
  end
  // with GAPS: random back-pressure plus a long hold every 64 cycles, which
  // fills the lanes and stalls the encoded input
  always @(posedge clk) #1 w_ready = !GAPS || ((cyc % 64) < 40 && $urandom_range(0, 3) != 0);

  initial begin
    repeat (MAX_CYCLES) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real e_pct, save_pct;
    for (int c = 0; c < K; c++)
      for (int r = 0; r < N_OUT; r++) colm[c][r] = m_bit(M_SEED_DEF, r, c);
    for (int v = 0; v < 256; v++) colv[v] = mul(K'(v));
    unpruned_bits = 0; matched_bits = 0; err_bits = 0;
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int layer = 0; layer < LAYERS; layer++) begin
      build_layer();
      load_memories();
      @(negedge clk) begin start = 1; total_bits = MN; end
      @(negedge clk) start = 0;
      nblk_out = 0; enc_sent = 0; mask_sent = 0;
      fork
        send_encoded();
        send_mask();
      join
      while (nblk_out < NB) @(negedge clk);
      repeat (5) @(negedge clk);
      checks++;
      if (nblk_out != NB || flips != 32'(layer_err)) begin
        failures++;
        $display("FAIL layer %0d: %0d blocks, flips %0d", layer, nblk_out, flips);
      end
      $display("layer %0d: %0d weights, %0d blocks, input vectors accepted over %0d cycles",
               layer, MN, NB, last_acc - first_acc + 1);
    end
    e_pct = 100.0 * real'(matched_bits) / real'(unpruned_bits);
    save_pct = 100.0 * (1.0 - real'(LAYERS) * N_W * (N_IN * (L + N_S) + NB) / (real'(LAYERS) * N_W * MN)
                         - 10.0 * real'(err_bits) / (real'(LAYERS) * N_W * MN));
    $display("S=%0d/1000 E=%0.2f%% memory reduction=%0.2f%% (greedy encoder)", S_PERMILLE, e_pct, save_pct);
    if (CHECK_MECH) begin
      $display("mechanisms: warmup=%0d clean=%0d corrected=%0d multi=%0d inverted=%0d partial_vec=%0d partial_blk=%0d in_stall=%0d backpressure=%0d pruned=%0d",
               n_warm, n_clean, n_fixed, n_multi, n_inv, n_part_vec, n_part_blk, n_in_stall, n_backpr, n_pruned);
      checks++;
      if (n_warm == 0 || n_clean == 0 || n_fixed == 0 || n_multi == 0 || n_inv == 0 ||
          n_part_vec == 0 || n_part_blk == 0 || n_in_stall == 0 || n_backpr == 0 || n_pruned == 0) begin
        failures++;
        $display("FAIL a mechanism never happened");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
