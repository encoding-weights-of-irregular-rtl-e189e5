// tb_correction_unit: sends random 512-bit blocks with 0 to 6 unmatched
// bits each (repeated indices allowed: two flips cancel), with flag and
// location streams that stall at random. Expected block = input XOR the
// listed positions, worked out in the testbench. Also checks out_last, the
// flip counter and, with streams always ready, the cycle counts: a clean
// block leaves 2 cycles after it is taken, a block with e entries 2+e.
module tb_correction_unit;
  localparam int unsigned P = 512, LOC_W = 10;
  logic clk = 0, rst_n = 1, start = 0;
  logic in_valid = 0, in_ready, in_last = 0;
  logic [P-1:0] in_data = '0;
  logic flag_valid = 0, flag_ready, flag_data = 0;
  logic loc_valid = 0, loc_ready;
  logic [LOC_W-1:0] loc_data = '0;
  logic out_valid, out_ready = 1, out_last;
  logic [P-1:0] out_data;
  logic [31:0] flips;
  int checks = 0, failures = 0, cyc = 0, total_flips = 0;
  logic gaps = 0;

  correction_unit dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  logic [P-1:0] expq [$];
  logic         lastq [$];
  logic         flagq [$];
  logic [LOC_W-1:0] locq [$];
  int           inq_cyc [$];
  int           nerr_q [$];

  // stream drivers (change only after a clock edge)
  always @(posedge clk) begin
    #1;
    flag_valid = flagq.size() > 0 && (!gaps || $urandom_range(0, 2) != 0);
    flag_data  = flagq.size() > 0 ? flagq[0] : 1'b0;
    loc_valid  = locq.size() > 0 && (!gaps || $urandom_range(0, 2) != 0);
    loc_data   = locq.size() > 0 ? locq[0] : '0;
    out_ready  = !gaps || $urandom_range(0, 3) != 0;
  end
  always @(posedge clk) if (rst_n) begin
    if (flag_valid && flag_ready) void'(flagq.pop_front());
    if (loc_valid && loc_ready)   void'(locq.pop_front());
    if (in_valid && in_ready)     inq_cyc.push_back(cyc);
    if (out_valid && out_ready) begin
      checks++;
      if (out_data !== expq[0] || out_last !== lastq[0]) begin
        failures++;
        $display("FAIL block data/last mismatch");
      end
      if (!gaps) begin
        checks++;
        if (cyc - inq_cyc[0] != 2 + nerr_q[0]) begin
          failures++;
          $display("FAIL latency %0d for %0d entries", cyc - inq_cyc[0], nerr_q[0]);
        end
      end
      void'(expq.pop_front()); void'(lastq.pop_front());
      void'(inq_cyc.pop_front()); void'(nerr_q.pop_front());
    end
  end

  task automatic run(input int nb, input logic g);
    gaps = g;
    for (int b = 0; b < nb; b++) begin
      logic [P-1:0] d, e;
      int ne;
      d = '0;
      for (int i = 0; i < P/32; i++) d[i*32 +: 32] = $urandom;
      e = d;
      ne = ($urandom_range(0, 1) == 0) ? 0 : $urandom_range(1, 6);
      flagq.push_back(ne != 0);
      for (int k = 0; k < ne; k++) begin
        logic [8:0] idx;
        idx = 9'($urandom);
        e[idx] = ~e[idx];
        locq.push_back({idx, (k != ne - 1)});
      end
      total_flips += ne;
      expq.push_back(e); lastq.push_back(b == nb - 1); nerr_q.push_back(ne);
      while (g && $urandom_range(0, 3) == 0) @(negedge clk);
      in_valid = 1; in_data = d; in_last = (b == nb - 1);
      while (!in_ready) @(negedge clk);
      @(negedge clk);
      in_valid = 0;
      // without gaps, wait for the block to leave so that latency is exact
      if (!g) while (expq.size() != 0) @(negedge clk);
    end
    while (expq.size() != 0) @(negedge clk);
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    run(100, 0);
    run(300, 1);
    repeat (3) @(negedge clk);
    checks++;
    if (flips != 32'(total_flips) || flagq.size() != 0 || locq.size() != 0) begin
      failures++;
      $display("FAIL flips %0d exp %0d, %0d flags %0d entries left", flips, total_flips,
               flagq.size(), locq.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
