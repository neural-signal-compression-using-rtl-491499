// raman_cache: input-activation tile cache.
//
// Before a group of PE_ROWS output pixels is computed, the controller
// prefetches every input activation those pixels need into this cache, laid
// out as PE_ROWS tile rows of MAX_I bytes (one row per output pixel, indexed by
// the reduction index i). Because the whole tile then lives here, the original
// input activations in global memory are no longer needed and the outputs may
// overwrite them (the IA/OA memory-overlap scheme of RAMAN). The tile layout,
// the size MAX_I and the two read modes are this design's choices.
//
// Read modes, selected by `bcast`:
//  * bcast = 1 (1x1 and standard convolutions): every MAC of PE row r gets
//    A[r][rd_i]; the weights supply the output-channel variation.
//  * bcast = 0 (depthwise): MAC k of PE column c in row r gets
//    A[r][rd_i + 16*c + k], i.e. each MAC works on its own channel.
// Indices at or beyond MAX_I read as zero. Writes (`wr_en`, `wr_r`, `wr_i`,
// `wr_data`) take effect at the clock edge; reads are combinational.
module raman_cache
  import raman_pkg::*;
#(
  parameter int unsigned MAX_I = 576,
  localparam int unsigned IW   = $clog2(MAX_I + 1)
)(
  input  logic                 clk,
  input  logic                 wr_en,
  input  logic [1:0]           wr_r,
  input  logic [IW-1:0]        wr_i,
  input  logic [ACT_W-1:0]     wr_data,
  input  logic                 bcast,
  input  logic [IW-1:0]        rd_i,
  output logic [PE_ROWS-1:0][PE_COLS-1:0][NMAC-1:0][ACT_W-1:0] act
);

  logic [ACT_W-1:0] mem [PE_ROWS][MAX_I];

  always_ff @(posedge clk) begin
    if (wr_en && wr_r < 2'(PE_ROWS) && wr_i < IW'(MAX_I)) mem[wr_r][wr_i] <= wr_data;
  end

  always_comb begin
    for (int r = 0; r < PE_ROWS; r++) begin
      for (int c = 0; c < PE_COLS; c++) begin
        for (int k = 0; k < NMAC; k++) begin
          int unsigned a;
          a = bcast ? int'(rd_i) : int'(rd_i) + RF_DEPTH * c + k;
          act[r][c][k] = (a < MAX_I) ? mem[r][a] : '0;
        end
      end
    end
  end

endmodule
