// correction_memory: on-chip store of one bit plane's correction data.
//
// Correction data is kept apart from the encoded weights so that it can be
// read without disturbing the regular weight stream. This memory has two
// arrays: FLAG_DEPTH flag bits (one per P-bit block) and LOC_DEPTH location
// entries of LOC_W bits. Both are written through one write port (wr_flag
// selects the array) and read as two sequential streams: 'start' rewinds
// both read pointers, and each accepted read advances its pointer. Reads
// are asynchronous (register-file style), so data is valid in the cycle the
// pointer points at it; a stream stays valid until its pointer passes the
// end of its array. The method only names this memory; its organisation,
// depths and ports are this design's choice.
module correction_memory
  import f2f_pkg::*;
#(
  parameter int unsigned P          = P_DEF,
  parameter int unsigned FLAG_DEPTH = 4096,
  parameter int unsigned LOC_DEPTH  = 4096,
  localparam int unsigned LOC_W     = $clog2(P) + 1,
  localparam int unsigned FA_W      = $clog2(FLAG_DEPTH),
  localparam int unsigned LA_W      = $clog2(LOC_DEPTH),
  localparam int unsigned AW        = (FA_W > LA_W) ? FA_W : LA_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  // write port
  input  logic             wr_en,
  input  logic             wr_flag,     // 1: flag array, 0: location array
  input  logic [AW-1:0]    wr_addr,
  input  logic [LOC_W-1:0] wr_data,     // flag in bit 0
  // flag stream
  output logic             flag_valid,
  input  logic             flag_ready,
  output logic             flag_data,
  // location stream
  output logic             loc_valid,
  input  logic             loc_ready,
  output logic [LOC_W-1:0] loc_data
);

  logic             flag_mem [FLAG_DEPTH];
  logic [LOC_W-1:0] loc_mem  [LOC_DEPTH];
  logic [FA_W:0]    fptr;
  logic [LA_W:0]    lptr;

  always_ff @(posedge clk) begin
    if (wr_en && wr_flag)  flag_mem[FA_W'(wr_addr)] <= wr_data[0];
    if (wr_en && !wr_flag) loc_mem[LA_W'(wr_addr)]  <= wr_data;
  end

  assign flag_valid = (fptr < (FA_W+1)'(FLAG_DEPTH));
  assign loc_valid  = (lptr < (LA_W+1)'(LOC_DEPTH));
  assign flag_data  = flag_mem[fptr[FA_W-1:0]];
  assign loc_data   = loc_mem[lptr[LA_W-1:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fptr <= '0;
      lptr <= '0;
    end else if (start) begin
      fptr <= '0;
      lptr <= '0;
    end else begin
      if (flag_valid && flag_ready) fptr <= fptr + 1'b1;
      if (loc_valid && loc_ready)   lptr <= lptr + 1'b1;
    end
  end

endmodule
