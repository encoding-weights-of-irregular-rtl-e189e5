// tb_shift_register_chain: drives random vectors with random shift enables
// and checks, every cycle, that the taps equal the last N_S shifted vectors
// of a queue model (oldest in the high bits, zeros before any shift), and
// that 'clear' returns them to zero.
module tb_shift_register_chain;
  localparam int unsigned N_IN = 8, N_S = 2;
  logic clk = 0, rst_n = 1, clear = 0, shift = 0;
  logic [N_IN-1:0] din = '0;
  logic [N_S*N_IN-1:0] taps;
  logic [N_IN-1:0] hist [N_S];
  logic [N_S*N_IN-1:0] exp_taps;
  int checks = 0, failures = 0;

  shift_register_chain dut (.clk, .rst_n, .clear, .shift, .din, .taps);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N_S; i++) hist[i] = '0;
    #1 rst_n = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 1000; cyc++) begin
      @(negedge clk);
      for (int i = 0; i < N_S; i++) exp_taps[i*N_IN +: N_IN] = hist[i];
      checks++;
      if (taps !== exp_taps) begin
        failures++;
        $display("FAIL cyc %0d taps=%h exp=%h", cyc, taps, exp_taps);
      end
      clear = ($urandom_range(0, 49) == 0);
      shift = $urandom_range(0, 2) != 0;
      din   = N_IN'($urandom);
      @(posedge clk);
      #1;
      if (clear) begin
        for (int i = 0; i < N_S; i++) hist[i] = '0;
      end else if (shift) begin
        for (int i = N_S - 1; i > 0; i--) hist[i] = hist[i-1];
        hist[0] = din;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
