// weight_assembler: turns n_w corrected bit planes back into masked weights.
//
// Block b of every bit plane covers the same P flattened weight positions.
// When all N_W planes and the mask block are present, this unit
//   - undoes the inverting technique: a plane that was stored inverted
//     (because it held fewer zeros than ones) is inverted back;
//   - regroups the planes: plane 0 (the first, the sign for FP32) becomes
//     the most significant weight bit, plane N_W-1 the least significant;
//   - zeroes every weight whose mask bit is 0, since pruned positions hold
//     random values after decoding.
// Interface: a join of N_W block streams and one mask stream, all
// valid/ready, and one registered output of P weights per block with
// out_last. Timing: one cycle from a complete set of inputs to the output;
// one block per cycle at most. Plane order, inversion and masking follow
// the method; the join and the register are this design's choice.
module weight_assembler
  import f2f_pkg::*;
#(
  parameter int unsigned N_W = N_W_DEF,
  parameter int unsigned P   = P_DEF
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [N_W-1:0]             invert,
  input  logic [N_W-1:0]             blk_valid,
  output logic                       blk_ready,
  input  logic [N_W-1:0][P-1:0]      blk_data,
  input  logic [N_W-1:0]             blk_last,
  input  logic                       mask_valid,
  output logic                       mask_ready,
  input  logic [P-1:0]               mask_data,
  output logic                       out_valid,
  input  logic                       out_ready,
  output logic [P-1:0][N_W-1:0]      out_weights,
  output logic                       out_last
);

  logic fire;
  logic [P-1:0][N_W-1:0] regrouped;

  assign fire       = (&blk_valid) && mask_valid && (!out_valid || out_ready);
  assign blk_ready  = fire;
  assign mask_ready = fire;

  // one AND/XOR per weight bit: weight j, bit N_W-1-p comes from plane p
  for (genvar j = 0; j < P; j++) begin : g_pos
    for (genvar p = 0; p < N_W; p++) begin : g_plane
      assign regrouped[j][N_W-1-p] = mask_data[j] & (blk_data[p][j] ^ invert[p]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid   <= 1'b0;
      out_weights <= '0;
      out_last    <= 1'b0;
    end else if (fire) begin
      out_valid   <= 1'b1;
      out_weights <= regrouped;
      out_last    <= blk_last[0];
    end else if (out_ready) begin
      out_valid   <= 1'b0;
    end
  end

  // All planes walk through the same blocks, so they end together.
  assert property (@(posedge clk) disable iff (!rst_n)
                   fire |-> (blk_last == '0 || blk_last == '1));

endmodule
