// reshape_buffer: re-slices decoded vectors into correction blocks.
//
// The decoded bit plane arrives as l = ceil(mn / N_OUT) vectors of N_OUT
// bits, bit j of vector t being flattened position t*N_OUT + j. Correction
// works on blocks of P bits (k = ceil(mn / P) of them), and P is in general
// not a multiple of N_OUT, so this unit is a gearbox: it appends each
// vector above the bits it already holds and emits the low P bits whenever
// it holds at least P. Bits of the last vector beyond mn are dropped, and
// the last block is emitted zero-padded once all mn bits have arrived.
//
// Interface: 'start' loads total_bits (= mn) and empties the buffer; input
// and output use valid/ready; out_last marks block k. Timing: a block is
// registered in the cycle its last bit arrives is held (one cycle later),
// and a vector can be taken in the same cycle a block leaves, so one vector
// per cycle is accepted as long as blocks are taken. The reshaping follows
// the correction scheme; the gearbox structure is this design's own.
module reshape_buffer
  import f2f_pkg::*;
#(
  parameter int unsigned N_OUT = N_OUT_DEF,
  parameter int unsigned P     = P_DEF,
  parameter int unsigned LEN_W = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [LEN_W-1:0] total_bits,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [N_OUT-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [P-1:0]     out_data,
  output logic             out_last
);

  localparam int unsigned BW = P + N_OUT;        // buffer width
  localparam int unsigned CW = $clog2(BW + 1);   // bit count width

  logic [BW-1:0]    buf_q, buf_d;
  logic [CW-1:0]    cnt_q, cnt_d;      // valid bits held in buf_q
  logic [LEN_W-1:0] rem_q, rem_d;      // input bits still expected

  logic             slot_free, emit, accept, in_done;
  logic [CW-1:0]    cnt_after_emit;
  logic [CW-1:0]    take;              // bits used from this input vector
  logic [N_OUT-1:0] take_mask;

  assign slot_free = !out_valid || out_ready;
  assign in_done   = (rem_q == '0);
  assign emit      = slot_free && ((cnt_q >= CW'(P)) || (in_done && cnt_q != '0));
  assign cnt_after_emit = emit ? ((cnt_q >= CW'(P)) ? cnt_q - CW'(P) : '0) : cnt_q;
  assign in_ready  = !in_done && (cnt_after_emit < CW'(P));
  assign accept    = in_valid && in_ready;

  always_comb begin
    take = (rem_q >= LEN_W'(N_OUT)) ? CW'(N_OUT) : CW'(rem_q);
    for (int unsigned j = 0; j < N_OUT; j++)
      take_mask[j] = (CW'(j) < take);
  end

  always_comb begin
    buf_d = emit ? (buf_q >> P) : buf_q;
    cnt_d = cnt_after_emit;
    rem_d = rem_q;
    if (accept) begin
      buf_d = buf_d | (BW'(in_data & take_mask) << cnt_after_emit);
      cnt_d = cnt_after_emit + take;
      rem_d = rem_q - LEN_W'(take);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buf_q     <= '0;
      cnt_q     <= '0;
      rem_q     <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
      out_last  <= 1'b0;
    end else if (start) begin
      buf_q     <= '0;
      cnt_q     <= '0;
      rem_q     <= total_bits;
      out_valid <= 1'b0;
      out_last  <= 1'b0;
    end else begin
      buf_q <= buf_d;
      cnt_q <= cnt_d;
      rem_q <= rem_d;
      if (emit) begin
        out_valid <= 1'b1;
        out_data  <= buf_q[P-1:0];
        out_last  <= in_done && (cnt_q <= CW'(P));
      end else if (out_ready) begin
        out_valid <= 1'b0;
      end
    end
  end

  // Bits beyond the count are always zero, so a partial block is padded.
  assert property (@(posedge clk) disable iff (!rst_n) (buf_q >> cnt_q) == '0);

endmodule
