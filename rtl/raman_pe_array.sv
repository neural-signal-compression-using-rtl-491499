// raman_pe_array: 3 x 4 array of processing elements.
//
// Column routers carry the weights of one 1x16 tile down a PE column, so the
// three PEs of a column share weights and the four columns work on four
// different tiles (64 output channels). Row routers carry the activations of
// one output pixel along a PE row and bring partial sums out of the array to
// the post-processing module. The LFSR indices are common to all PEs. The 3x4
// shape and the column-per-tile weight distribution follow the paper's figures;
// realising the routers as plain broadcast wiring and a readout multiplexer
// (no router pipeline registers) is this design's simplification.
//
// Interface: `act[r][c]` is the 4-activation vector for PE (r,c) (for 1x1 and
// standard convolutions all columns of a row get the same activation; for
// depthwise layers each column gets its own channels). `wgt[c]` is column c's
// 4-weight word, `idx` the 4 RF indices. `clr`/`mac_en` go to every PE.
// `rd_row`/`rd_col`/`rd_idx` select one psum on `rd_data` (combinational).
module raman_pe_array
  import raman_pkg::*;
(
  input  logic                                            clk,
  input  logic                                            rst_n,
  input  logic                                            clr,
  input  logic                                            mac_en,
  input  logic signed [PE_ROWS-1:0][PE_COLS-1:0][NMAC-1:0][ACT_W-1:0] act,
  input  logic signed [PE_COLS-1:0][NMAC-1:0][WGT_W-1:0]  wgt,
  input  logic        [NMAC-1:0][IDX_W-1:0]               idx,
  input  logic        [1:0]                               rd_row,
  input  logic        [1:0]                               rd_col,
  input  logic        [IDX_W-1:0]                         rd_idx,
  output logic signed [PSUM_W-1:0]                        rd_data
);

  logic signed [PSUM_W-1:0] pe_out [PE_ROWS][PE_COLS];

  for (genvar r = 0; r < PE_ROWS; r++) begin : g_row
    for (genvar c = 0; c < PE_COLS; c++) begin : g_col
      raman_pe u_pe (
        .clk     (clk),
        .rst_n   (rst_n),
        .clr     (clr),
        .mac_en  (mac_en),
        .act     (act[r][c]),
        .wgt     (wgt[c]),
        .idx     (idx),
        .rd_idx  (rd_idx),
        .rd_data (pe_out[r][c])
      );
    end
  end

  always_comb begin
    rd_data = '0;
    for (int r = 0; r < PE_ROWS; r++) begin
      for (int c = 0; c < PE_COLS; c++) begin
        if (rd_row == 2'(r) && rd_col == 2'(c)) rd_data = pe_out[r][c];
      end
    end
  end

endmodule
