// tb_correction_memory: loads random flag bits and location entries
// (FLAG_DEPTH and LOC_DEPTH reduced to 64 and 128), then reads both streams
// twice with random, independent ready patterns, rewinding with 'start' in
// between, and compares each accepted word with the loaded arrays. It
// checks that each stream is valid for exactly its depth and then stops.
module tb_correction_memory;
  localparam int unsigned P = 512, FD = 64, LD = 128, LOC_W = 10, AW = 7;
  logic clk = 0, rst_n = 1, start = 0;
  logic wr_en = 0, wr_flag = 0;
  logic [AW-1:0] wr_addr = '0;
  logic [LOC_W-1:0] wr_data = '0;
  logic flag_valid, flag_ready = 0, flag_data;
  logic loc_valid, loc_ready = 0;
  logic [LOC_W-1:0] loc_data;
  int checks = 0, failures = 0;
  logic fref [FD];
  logic [LOC_W-1:0] lref [LD];
  int nf, nl;
  logic reading = 0;

  correction_memory #(.P(P), .FLAG_DEPTH(FD), .LOC_DEPTH(LD)) dut (.*);

  always #5 clk = ~clk;

  always @(posedge clk) #1 begin
    flag_ready = reading && $urandom_range(0, 1) != 0;
    loc_ready  = reading && $urandom_range(0, 2) != 0;
  end
  always @(posedge clk) if (rst_n && !start) begin
    if (flag_valid && flag_ready) begin
      checks++;
      if (nf >= FD || flag_data !== fref[nf]) begin
        failures++;
        $display("FAIL flag %0d", nf);
      end
      nf++;
    end
    if (loc_valid && loc_ready) begin
      checks++;
      if (nl >= LD || loc_data !== lref[nl]) begin
        failures++;
        $display("FAIL loc %0d got %h", nl, loc_data);
      end
      nl++;
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
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (fref[i]) fref[i] = 1'($urandom);
    foreach (lref[i]) lref[i] = LOC_W'($urandom);
    for (int i = 0; i < FD; i++) begin
      @(negedge clk) begin wr_en = 1; wr_flag = 1; wr_addr = AW'(i); wr_data = {9'($urandom), fref[i]}; end
    end
    for (int i = 0; i < LD; i++) begin
      @(negedge clk) begin wr_en = 1; wr_flag = 0; wr_addr = AW'(i); wr_data = lref[i]; end
    end
    @(negedge clk) wr_en = 0;
    for (int pass = 0; pass < 2; pass++) begin
      @(negedge clk) start = 1;
      @(negedge clk) begin start = 0; nf = 0; nl = 0; reading = 1; end
      repeat (600) @(negedge clk);
      reading = 0;
      repeat (2) @(negedge clk);
      checks++;
      if (nf != FD || nl != LD || flag_valid || loc_valid) begin
        failures++;
        $display("FAIL pass %0d read %0d flags %0d entries", pass, nf, nl);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
