// correction_unit: makes the decoding lossless by flipping unmatched bits.
//
// The XOR decoder cannot match every unpruned weight bit; the encoder
// records each unmatched bit and this unit flips it back. Correction data
// per P-bit block is one flag bit (0: block is already correct) and, when
// the flag is 1, a run of location entries of log2(P)+1 bits: a bit index
// inside the block followed by a continuation bit, 1 meaning that another
// entry of the same block follows and 0 ending the block's run. So a block
// with e unmatched bits costs 1 + e*(log2(P)+1) bits of correction data.
//
// Interface: blocks in and out with valid/ready; the flag and location
// streams are valid/ready too, read from the correction memory. An entry is
// {idx, cont} with the continuation bit in bit 0.
// Timing (state machine EMPTY -> FLAG -> FIX* -> FULL): a block is taken in
// one cycle, its flag read in the next, then one location entry per cycle;
// a clean block is offered two cycles after it arrived, a block with e
// errors e cycles later. A new block is taken in the cycle the previous one
// leaves. Format and flipping follow the method; the sequencing is this
// design's choice.
module correction_unit
  import f2f_pkg::*;
#(
  parameter int unsigned P     = P_DEF,
  localparam int unsigned IDX_W = $clog2(P),
  localparam int unsigned LOC_W = IDX_W + 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  // decoded, reshaped block
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [P-1:0]     in_data,
  input  logic             in_last,
  // correction streams
  input  logic             flag_valid,
  output logic             flag_ready,
  input  logic             flag_data,
  input  logic             loc_valid,
  output logic             loc_ready,
  input  logic [LOC_W-1:0] loc_data,
  // corrected block
  output logic             out_valid,
  input  logic             out_ready,
  output logic [P-1:0]     out_data,
  output logic             out_last,
  // statistics: flipped bits since start
  output logic [31:0]      flips
);

  typedef enum logic [1:0] {S_EMPTY, S_FLAG, S_FIX, S_FULL} state_t;

  state_t         state;
  logic [P-1:0]   work;
  logic           last_q;
  logic           take_in;
  logic [IDX_W-1:0] idx;
  logic           cont;

  assign idx        = loc_data[LOC_W-1:1];
  assign cont       = loc_data[0];
  assign in_ready   = (state == S_EMPTY) || (state == S_FULL && out_ready);
  assign take_in    = in_valid && in_ready;
  assign flag_ready = (state == S_FLAG);
  assign loc_ready  = (state == S_FIX);
  assign out_valid  = (state == S_FULL);
  assign out_data   = work;
  assign out_last   = last_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_EMPTY;
      work   <= '0;
      last_q <= 1'b0;
      flips  <= '0;
    end else if (start) begin
      state  <= S_EMPTY;
      last_q <= 1'b0;
      flips  <= '0;
    end else begin
      unique case (state)
        S_EMPTY: if (take_in) begin
          work   <= in_data;
          last_q <= in_last;
          state  <= S_FLAG;
        end
        S_FLAG: if (flag_valid) state <= flag_data ? S_FIX : S_FULL;
        S_FIX: if (loc_valid) begin
          work[idx] <= ~work[idx];
          flips     <= flips + 1'b1;
          if (!cont) state <= S_FULL;
        end
        S_FULL: if (take_in) begin
          work   <= in_data;
          last_q <= in_last;
          state  <= S_FLAG;
        end else if (out_ready) begin
          state <= S_EMPTY;
        end
        default: state <= S_EMPTY;
      endcase
    end
  end

endmodule
