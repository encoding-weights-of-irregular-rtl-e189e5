// tb_sequential_decoder: runs three streams through the decoder, with and
// without random input gaps and output back-pressure, and compares every
// decoded vector with M+ applied to the concatenated history
// (w_{t-2}, w_{t-1}, w_t), computed bit by bit from f2f_pkg::m_bit. It checks
// that the first N_S vectors of each stream give no output, that 'start'
// clears the history, the one-cycle latency and, with no gaps, the rate of
// one decoded vector per cycle.
module tb_sequential_decoder;
  import f2f_pkg::*;
  localparam int unsigned N_IN = 8, N_OUT = 80, N_S = 2;
  localparam int unsigned K = (N_S + 1) * N_IN;

  logic clk = 0, rst_n = 1, start = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [N_IN-1:0] in_data = '0;
  logic [N_OUT-1:0] out_data;
  int checks = 0, failures = 0;

  sequential_decoder dut (.*);

  always #5 clk = ~clk;

  function automatic logic [N_OUT-1:0] ref_mul(input logic [K-1:0] v);
    logic [N_OUT-1:0] y = '0;
    for (int r = 0; r < N_OUT; r++)
      for (int c = 0; c < K; c++)
        if (v[c] && m_bit(M_SEED_DEF, r, c)) y[r] = ~y[r];
    return y;
  endfunction

  logic [N_IN-1:0]  enc [$];
  logic [N_OUT-1:0] expq [$];
  int n_out, first_out_cyc, last_out_cyc, first_in_cyc, cyc;
  logic gaps;

  always @(posedge clk) cyc <= cyc + 1;

  // output monitor
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    checks++;
    if (expq.size() == 0) begin
      failures++;
      $display("FAIL unexpected output %h", out_data);
    end else begin
      if (out_data !== expq[0]) begin
        failures++;
        $display("FAIL out %0d got %h exp %h", n_out, out_data, expq[0]);
      end
      void'(expq.pop_front());
    end
    if (n_out == 0) first_out_cyc = cyc;
    last_out_cyc = cyc;
    n_out++;
  end

  always @(posedge clk) #1 out_ready = gaps ? ($urandom_range(0, 3) != 0) : 1'b1;

  task automatic run_stream(input int l, input logic with_gaps, input logic zero_warm);
    logic [K-1:0] hist;
    gaps = with_gaps;
    enc.delete();
    for (int t = 0; t < l + N_S; t++)
      enc.push_back((zero_warm && t < N_S) ? '0 : N_IN'($urandom));
    // expected outputs: M(w_{t-2} w_{t-1} w_t) for t >= N_S
    for (int t = N_S; t < l + N_S; t++) begin
      for (int s = 0; s <= N_S; s++) hist[s*N_IN +: N_IN] = enc[t - s];
      expq.push_back(ref_mul(hist));
    end
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    n_out = 0;
    first_in_cyc = -1;
    for (int t = 0; t < l + N_S; t++) begin
      while (with_gaps && $urandom_range(0, 3) == 0) @(negedge clk);
      in_valid = 1;
      in_data = enc[t];
      while (!in_ready) @(negedge clk);
      if (first_in_cyc < 0) first_in_cyc = cyc;
      @(negedge clk);
      in_valid = 0;
    end
    in_valid = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (n_out != l || expq.size() != 0) begin
      failures++;
      $display("FAIL stream: %0d outputs for %0d blocks, %0d left", n_out, l, expq.size());
    end
    if (!with_gaps) begin
      // first output one cycle after the (N_S+1)-th vector, then one per cycle
      checks++;
      if (first_out_cyc - first_in_cyc != N_S + 1 || last_out_cyc - first_out_cyc != l - 1) begin
        failures++;
        $display("FAIL timing first_in=%0d first_out=%0d last_out=%0d", first_in_cyc,
                 first_out_cyc, last_out_cyc);
      end
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cyc = 0;
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_stream(50, 1'b0, 1'b1);
    run_stream(200, 1'b1, 1'b0);  // non-zero warm-up vectors
    run_stream(100, 1'b0, 1'b0);  // history cleared by start
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
