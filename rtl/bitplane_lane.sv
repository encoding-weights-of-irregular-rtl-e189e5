// bitplane_lane: the decompression path of one weight bit plane.
//
// A weight matrix of n_w-bit numbers is split into n_w binary matrices (bit
// planes), each flattened and encoded on its own. This lane decodes one
// plane: encoded N_IN-bit vectors -> sequential_decoder (N_S shift
// registers + XOR network) -> N_OUT-bit vectors -> reshape_buffer -> P-bit
// blocks -> correction_unit, which flips the unmatched bits listed in this
// plane's correction_memory. The lane outputs the exact (lossless) bit plane
// block by block; pruned positions hold whatever the XOR network produced.
//
// Interface: 'start' (one cycle) with total_bits = mn begins a layer and
// rewinds the correction streams; encoded vectors and corrected blocks use
// valid/ready; the correction memory is loaded through its write port
// before 'start'. Timing: first block out about ceil(P/N_OUT)+N_S+4 cycles
// after the first vector when input arrives every cycle; one vector per
// cycle is sustained while corrections average fewer than about
// P/N_OUT - 3 flips per block. The composition follows the decoder and
// correction diagrams; the handshakes are this design's choice.
module bitplane_lane
  import f2f_pkg::*;
#(
  parameter int unsigned N_IN       = N_IN_DEF,
  parameter int unsigned N_OUT      = N_OUT_DEF,
  parameter int unsigned N_S        = N_S_DEF,
  parameter logic [31:0] M_SEED     = M_SEED_DEF,
  parameter int unsigned P          = P_DEF,
  parameter int unsigned FLAG_DEPTH = 4096,
  parameter int unsigned LOC_DEPTH  = 4096,
  parameter int unsigned LEN_W      = 32,
  localparam int unsigned LOC_W     = $clog2(P) + 1,
  localparam int unsigned AW        = ($clog2(FLAG_DEPTH) > $clog2(LOC_DEPTH)) ?
                                      $clog2(FLAG_DEPTH) : $clog2(LOC_DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [LEN_W-1:0] total_bits,
  // correction memory load
  input  logic             wr_en,
  input  logic             wr_flag,
  input  logic [AW-1:0]    wr_addr,
  input  logic [LOC_W-1:0] wr_data,
  // encoded vectors
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [N_IN-1:0]  in_data,
  // corrected blocks
  output logic             out_valid,
  input  logic             out_ready,
  output logic [P-1:0]     out_data,
  output logic             out_last,
  output logic [31:0]      flips
);

  logic             dec_valid, dec_ready;
  logic [N_OUT-1:0] dec_data;
  logic             blk_valid, blk_ready, blk_last;
  logic [P-1:0]     blk_data;
  logic             flag_valid, flag_ready, flag_data;
  logic             loc_valid, loc_ready;
  logic [LOC_W-1:0] loc_data;

  sequential_decoder #(.N_IN(N_IN), .N_OUT(N_OUT), .N_S(N_S), .M_SEED(M_SEED)) u_dec (
    .clk, .rst_n, .start,
    .in_valid, .in_ready, .in_data,
    .out_valid (dec_valid), .out_ready (dec_ready), .out_data (dec_data)
  );

  reshape_buffer #(.N_OUT(N_OUT), .P(P), .LEN_W(LEN_W)) u_reshape (
    .clk, .rst_n, .start, .total_bits,
    .in_valid  (dec_valid), .in_ready  (dec_ready), .in_data (dec_data),
    .out_valid (blk_valid), .out_ready (blk_ready), .out_data (blk_data),
    .out_last  (blk_last)
  );

  correction_memory #(.P(P), .FLAG_DEPTH(FLAG_DEPTH), .LOC_DEPTH(LOC_DEPTH)) u_mem (
    .clk, .rst_n, .start,
    .wr_en, .wr_flag, .wr_addr, .wr_data,
    .flag_valid, .flag_ready, .flag_data,
    .loc_valid, .loc_ready, .loc_data
  );

  correction_unit #(.P(P)) u_corr (
    .clk, .rst_n, .start,
    .in_valid  (blk_valid), .in_ready (blk_ready), .in_data (blk_data), .in_last (blk_last),
    .flag_valid, .flag_ready, .flag_data,
    .loc_valid, .loc_ready, .loc_data,
    .out_valid, .out_ready, .out_data, .out_last,
    .flips
  );

endmodule
