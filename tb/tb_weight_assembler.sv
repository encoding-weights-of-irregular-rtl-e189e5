// tb_weight_assembler: random plane blocks, masks and inversion flags for
// N_W = 32 planes and P = 512, with planes arriving at random times and
// random output back-pressure. Each output weight j must have bit 31-p equal
// to plane p's bit j XOR invert[p], or be zero where the mask is 0. Also
// checks that nothing is taken before every plane and the mask are present.
module tb_weight_assembler;
  localparam int unsigned N_W = 32, P = 512;
  logic clk = 0, rst_n = 1;
  logic [N_W-1:0] invert = '0, blk_valid = '0, blk_last = '0;
  logic blk_ready, mask_valid = 0, mask_ready, out_valid, out_ready = 1, out_last;
  logic [N_W-1:0][P-1:0] blk_data;
  logic [P-1:0] mask_data = '0;
  logic [P-1:0][N_W-1:0] out_weights;
  int checks = 0, failures = 0, nout = 0;
  logic [P-1:0][N_W-1:0] expq [$];
  logic lastq [$];

  weight_assembler dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) #1 out_ready = $urandom_range(0, 3) != 0;

  always @(posedge clk) if (rst_n) begin
    if (blk_ready && !((&blk_valid) && mask_valid)) begin
      checks++; failures++;
      $display("FAIL took an incomplete set");
    end
    if (out_valid && out_ready) begin
      checks++;
      if (out_weights !== expq[0] || out_last !== lastq[0]) begin
        failures++;
        $display("FAIL block %0d", nout);
      end
      void'(expq.pop_front()); void'(lastq.pop_front());
      nout++;
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [P-1:0][N_W-1:0] e;
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    invert = $urandom;
    for (int b = 0; b < 60; b++) begin
      @(negedge clk);
      for (int p = 0; p < N_W; p++)
        for (int i = 0; i < P/32; i++) blk_data[p][i*32 +: 32] = $urandom;
      for (int i = 0; i < P/32; i++) mask_data[i*32 +: 32] = $urandom & $urandom;
      for (int j = 0; j < P; j++)
        for (int p = 0; p < N_W; p++)
          e[j][N_W-1-p] = mask_data[j] ? blk_data[p][j] ^ invert[p] : 1'b0;
      expq.push_back(e); lastq.push_back(b == 59);
      blk_last = (b == 59) ? '1 : '0;
      // planes and mask become valid one by one, in random order
      while (!((&blk_valid) && mask_valid)) begin
        int k;
        k = $urandom_range(0, N_W);
        if (k == N_W) mask_valid = 1; else blk_valid[k] = 1;
        if ($urandom_range(0, 7) == 0) @(negedge clk);
      end
      while (!blk_ready) @(negedge clk);
      @(negedge clk);
      blk_valid = '0; mask_valid = 0;
    end
    repeat (10) @(negedge clk);
    checks++;
    if (nout != 60) begin
      failures++;
      $display("FAIL %0d blocks out", nout);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
