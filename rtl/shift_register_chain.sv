// shift_register_chain: the N_S shift registers of the sequential decoder.
//
// Each register holds one N_IN-bit encoded vector. On a cycle with 'shift'
// high, din (w_t) enters the first register and every register passes its
// content to the next, so after the shift the taps hold w_t, w_{t-1}, ...,
// w_{t-N_S+1}. Before the shift the taps hold w_{t-1} ... w_{t-N_S}: these
// are the vectors the XOR network combines with the current input. 'taps'
// puts the oldest vector in the most significant N_IN bits. Reset and the
// synchronous 'clear' load zeros, which equals feeding N_S all-zero vectors
// (the encoder fixes its first N_S vectors to zero). Registers and the
// reuse of each input for N_S+1 time steps follow the method; the clear
// input is this design's choice.
module shift_register_chain
  import f2f_pkg::*;
#(
  parameter int unsigned N_IN = N_IN_DEF,
  parameter int unsigned N_S  = N_S_DEF
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clear,
  input  logic                  shift,
  input  logic [N_IN-1:0]       din,
  output logic [N_S*N_IN-1:0]   taps
);

  // stage[0] holds w_{t-1}, stage[N_S-1] holds w_{t-N_S}
  logic [N_IN-1:0] stage [N_S];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_S; i++) stage[i] <= '0;
    end else if (clear) begin
      for (int i = 0; i < N_S; i++) stage[i] <= '0;
    end else if (shift) begin
      stage[0] <= din;
      for (int i = 1; i < N_S; i++) stage[i] <= stage[i-1];
    end
  end

  always_comb begin
    for (int i = 0; i < N_S; i++)
      taps[i*N_IN +: N_IN] = stage[i];
  end

endmodule
