// f2f_decompressor: fixed-to-fixed decompressor for irregularly pruned weights.
//
// Sits between weight memory and the compute units. Weights of a pruned
// layer (mn weights of N_W bits) are stored as N_W bit planes; each plane is
// a fixed-rate stream of N_IN-bit encoded vectors (N_IN/N_OUT of the plane's
// size, plus N_S warm-up vectors) and a small correction record. Every cycle
// the decompressor takes one encoded vector per plane, i.e. N_W*N_IN bits,
// from a regular memory stream, whatever the sparsity. N_W bitplane_lane
// instances decode in parallel (sequential XOR decoder, reshape to P-bit
// blocks, bit-flip correction) and the weight_assembler joins the planes,
// undoes per-plane inversion, regroups bits into weights and applies the
// pruning mask, producing P exact weights per block.
//
// Interface:
//   - load: corr_wr_* writes one plane's flag bits / location entries into
//     that plane's correction memory; invert[p] says plane p is stored
//     inverted. Both are set before 'start'.
//   - start (one cycle) with total_bits = mn begins a layer.
//   - enc_*: one vector per plane per transfer, shared valid/ready.
//   - mask_*: the pruning mask, P bits per block, valid/ready. Its source
//     (it may itself be compressed) is outside this design.
//   - w_*: P weights per block, weight j = flattened position b*P + j;
//     w_last marks the layer's last block.
// Timing: a vector per cycle is accepted whenever no lane is stalled by
// correction work or by a full output; the first block leaves about
// ceil(P/N_OUT) + N_S + 5 cycles after the first vector. The parallel-plane
// organisation and handshakes are this design's choice; the datapath
// follows the method.
module f2f_decompressor
  import f2f_pkg::*;
#(
  parameter int unsigned N_IN       = N_IN_DEF,
  parameter int unsigned N_OUT      = N_OUT_DEF,
  parameter int unsigned N_S        = N_S_DEF,
  parameter int unsigned N_W        = N_W_DEF,
  parameter int unsigned P          = P_DEF,
  parameter logic [31:0] M_SEED     = M_SEED_DEF,
  parameter int unsigned FLAG_DEPTH = 4096,
  parameter int unsigned LOC_DEPTH  = 4096,
  parameter int unsigned LEN_W      = 32,
  localparam int unsigned LOC_W     = $clog2(P) + 1,
  localparam int unsigned AW        = ($clog2(FLAG_DEPTH) > $clog2(LOC_DEPTH)) ?
                                      $clog2(FLAG_DEPTH) : $clog2(LOC_DEPTH),
  localparam int unsigned PW        = (N_W > 1) ? $clog2(N_W) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // configuration and correction-memory load
  input  logic [N_W-1:0]         invert,
  input  logic                   corr_wr_en,
  input  logic [PW-1:0]          corr_wr_plane,
  input  logic                   corr_wr_flag,
  input  logic [AW-1:0]          corr_wr_addr,
  input  logic [LOC_W-1:0]       corr_wr_data,
  // layer start
  input  logic                   start,
  input  logic [LEN_W-1:0]       total_bits,
  // encoded vectors, one per plane
  input  logic                   enc_valid,
  output logic                   enc_ready,
  input  logic [N_W-1:0][N_IN-1:0] enc_data,
  // pruning mask
  input  logic                   mask_valid,
  output logic                   mask_ready,
  input  logic [P-1:0]           mask_data,
  // decoded weights
  output logic                   w_valid,
  input  logic                   w_ready,
  output logic [P-1:0][N_W-1:0]  w_data,
  output logic                   w_last,
  // statistics: bits flipped by correction, summed over planes
  output logic [31:0]            flips
);

  logic [N_W-1:0]        lane_in_ready;
  logic [N_W-1:0]        lane_valid;
  logic                  lane_ready;
  logic [N_W-1:0][P-1:0] lane_data;
  logic [N_W-1:0]        lane_last;
  logic [N_W-1:0][31:0]  lane_flips;

  assign enc_ready = &lane_in_ready;

  for (genvar p = 0; p < N_W; p++) begin : g_lane
    bitplane_lane #(
      .N_IN(N_IN), .N_OUT(N_OUT), .N_S(N_S), .M_SEED(M_SEED), .P(P),
      .FLAG_DEPTH(FLAG_DEPTH), .LOC_DEPTH(LOC_DEPTH), .LEN_W(LEN_W)
    ) u_lane (
      .clk, .rst_n, .start, .total_bits,
      .wr_en     (corr_wr_en && corr_wr_plane == PW'(p)),
      .wr_flag   (corr_wr_flag),
      .wr_addr   (corr_wr_addr),
      .wr_data   (corr_wr_data),
      .in_valid  (enc_valid && enc_ready),
      .in_ready  (lane_in_ready[p]),
      .in_data   (enc_data[p]),
      .out_valid (lane_valid[p]),
      .out_ready (lane_ready),
      .out_data  (lane_data[p]),
      .out_last  (lane_last[p]),
      .flips     (lane_flips[p])
    );
  end

  weight_assembler #(.N_W(N_W), .P(P)) u_asm (
    .clk, .rst_n, .invert,
    .blk_valid  (lane_valid),
    .blk_ready  (lane_ready),
    .blk_data   (lane_data),
    .blk_last   (lane_last),
    .mask_valid, .mask_ready, .mask_data,
    .out_valid  (w_valid),
    .out_ready  (w_ready),
    .out_weights(w_data),
    .out_last   (w_last)
  );

  always_comb begin
    flips = '0;
    for (int unsigned p = 0; p < N_W; p++) flips += lane_flips[p];
  end

endmodule
