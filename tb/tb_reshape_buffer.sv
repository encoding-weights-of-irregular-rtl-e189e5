// tb_reshape_buffer: feeds layers of several lengths (shorter than a block,
// an exact multiple of P, a multiple of N_OUT, and odd sizes) as N_OUT-bit
// vectors with random gaps and back-pressure. A flat bit array is the
// reference: block b must equal bits b*P .. b*P+P-1, zero beyond mn, with
// out_last on block ceil(mn/P)-1 only. Padding bits of the last vector are
// set to 1 so that a failure to drop them shows. With no gaps, it also
// checks the rate: all vectors taken in l + ceil(mn/P) cycles or fewer.
module tb_reshape_buffer;
  localparam int unsigned N_OUT = 80, P = 512;
  logic clk = 0, rst_n = 1, start = 0;
  logic [31:0] total_bits = '0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0, out_last;
  logic [N_OUT-1:0] in_data = '0;
  logic [P-1:0] out_data;
  int checks = 0, failures = 0, cyc = 0;
  logic gaps = 0;

  reshape_buffer dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) #1 out_ready = gaps ? ($urandom_range(0, 2) != 0) : 1'b1;

  logic bits [];
  int nblk;

  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    logic [P-1:0] e;
    for (int j = 0; j < P; j++) e[j] = (nblk*P + j < bits.size()) ? bits[nblk*P + j] : 1'b0;
    checks++;
    if (out_data !== e || out_last !== ((nblk + 1) * P >= bits.size())) begin
      failures++;
      $display("FAIL block %0d of mn=%0d last=%0b", nblk, bits.size(), out_last);
    end
    nblk++;
  end

  task automatic run(input int mn, input logic g);
    int l, t0, t1;
    logic [N_OUT-1:0] w;
    gaps = g;
    bits = new[mn];
    foreach (bits[i]) bits[i] = 1'($urandom);
    l = (mn + N_OUT - 1) / N_OUT;
    @(negedge clk) begin start = 1; total_bits = mn; end
    @(negedge clk) start = 0;
    nblk = 0;
    t0 = cyc;
    for (int t = 0; t < l; t++) begin
      for (int j = 0; j < N_OUT; j++) w[j] = (t*N_OUT + j < mn) ? bits[t*N_OUT + j] : 1'b1;
      while (g && $urandom_range(0, 3) == 0) @(negedge clk);
      in_valid = 1; in_data = w;
      while (!in_ready) @(negedge clk);
      @(negedge clk);
      in_valid = 0;
    end
    t1 = cyc;
    repeat (20) @(negedge clk);
    checks++;
    if (nblk != (mn + P - 1) / P) begin
      failures++;
      $display("FAIL mn=%0d gave %0d blocks", mn, nblk);
    end
    if (!g) begin
      checks++;
      if (t1 - t0 > l + (mn + P - 1) / P + 1) begin
        failures++;
        $display("FAIL rate: %0d vectors took %0d cycles", l, t1 - t0);
      end
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(300, 0);
    run(2560, 0);      // 5 full blocks, 32 full vectors
    run(4096, 1);
    run(5000, 1);
    run(12345, 0);
    run(80, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
