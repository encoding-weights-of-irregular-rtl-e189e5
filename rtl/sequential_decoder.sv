// sequential_decoder: one bit plane's sequential XOR-gate decoder.
//
// The current encoded vector w_t (N_IN bits) and the N_S previous vectors
// held in the shift-register chain form the (N_S+1)*N_IN-bit input of the
// XOR-gate network, which yields the N_OUT-bit decoded vector
//   w_b'_t = M+ (w_{t-N_S} ^ ... ^ w_{t-1} ^ w_t)   over GF(2).
// Every encoded vector is therefore used for N_S+1 consecutive outputs.
//
// Stream format: a stream for l decoded vectors carries l+N_S encoded
// vectors. The first N_S only fill the shift registers and produce no
// output (the encoder fixes them to zero); this is the N_S cycles of extra
// latency of the method. 'start' (one cycle, before the first vector)
// clears the registers and the warm-up count.
//
// Interface: valid/ready on both sides. Timing: the XOR network is evaluated
// in the accepting cycle and its result registered, so a decoded vector
// appears one cycle after the encoded vector that completes it; one vector
// per cycle is sustained whenever out_ready is high. The output register
// and the handshakes are this design's choice.
module sequential_decoder
  import f2f_pkg::*;
#(
  parameter int unsigned N_IN   = N_IN_DEF,
  parameter int unsigned N_OUT  = N_OUT_DEF,
  parameter int unsigned N_S    = N_S_DEF,
  parameter logic [31:0] M_SEED = M_SEED_DEF
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [N_IN-1:0]  in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [N_OUT-1:0] out_data
);

  localparam int unsigned K    = (N_S + 1) * N_IN;
  localparam int unsigned CW   = $clog2(N_S + 2);

  logic            accept;
  logic [K-1:0]    net_in;
  logic [N_OUT-1:0] net_out;
  logic [CW-1:0]   warm_cnt;     // encoded vectors seen so far, saturates at N_S
  logic            warm;         // shift registers hold N_S real vectors

  assign in_ready = !out_valid || out_ready;
  assign accept   = in_valid && in_ready;
  assign warm     = (warm_cnt == CW'(N_S));

  if (N_S > 0) begin : g_seq
    logic [N_S*N_IN-1:0] taps;
    shift_register_chain #(.N_IN(N_IN), .N_S(N_S)) u_sr (
      .clk   (clk),
      .rst_n (rst_n),
      .clear (start),
      .shift (accept),
      .din   (in_data),
      .taps  (taps)
    );
    assign net_in = {taps, in_data};
  end else begin : g_comb
    assign net_in = in_data;
  end

  xor_gate_network #(.N_IN(N_IN), .N_OUT(N_OUT), .N_S(N_S), .M_SEED(M_SEED)) u_net (
    .in_bits  (net_in),
    .out_bits (net_out)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      warm_cnt  <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else if (start) begin
      warm_cnt  <= '0;
      out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (accept) begin
        if (!warm) begin
          warm_cnt <= warm_cnt + 1'b1;
        end else begin
          out_data  <= net_out;
          out_valid <= 1'b1;
        end
      end
    end
  end

  // A held output must stay stable until it is taken.
  property p_hold;
    @(posedge clk) disable iff (!rst_n || start)
      out_valid && !out_ready |=> out_valid && $stable(out_data);
  endproperty
  assert property (p_hold);

endmodule
