// raman_pe: processing element with four MAC units and a 16 x 24-bit
// partial-sum register file.
//
// Each cycle with `mac_en` the PE forms four 8x8-bit signed products
// act[k]*wgt[k] and adds each one into register-file entry idx[k]. The entries
// stand for the 16 output channels of one 1x16 weight tile, so partial sums
// stay inside the PE until the output is complete (no psum write-back), as in
// the Gustavson-style dataflow of RAMAN. The four MAC count, the 16-entry RF
// and the 24-bit psum width are the paper's. Letting two MACs hit the same
// entry in one cycle (their products are summed) and wrapping on overflow are
// this design's choices.
//
// `clr` zeroes the whole RF (it wins over `mac_en`). `rd_idx`/`rd_data` is a
// combinational read port used by the post-processing module. One-cycle
// accumulate latency: a MAC issued in cycle t is visible on rd_data in t+1.
module raman_pe
  import raman_pkg::*;
(
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              clr,
  input  logic                              mac_en,
  input  logic signed [NMAC-1:0][ACT_W-1:0] act,
  input  logic signed [NMAC-1:0][WGT_W-1:0] wgt,
  input  logic        [NMAC-1:0][IDX_W-1:0] idx,
  input  logic        [IDX_W-1:0]           rd_idx,
  output logic signed [PSUM_W-1:0]          rd_data
);

  logic signed [PSUM_W-1:0] rf [RF_DEPTH];
  logic signed [2*ACT_W-1:0] prod [NMAC];
  logic signed [PSUM_W-1:0] add  [RF_DEPTH];

  always_comb begin
    for (int k = 0; k < NMAC; k++) begin
      prod[k] = $signed(act[k]) * $signed(wgt[k]);
    end
    for (int e = 0; e < RF_DEPTH; e++) begin
      add[e] = '0;
      for (int k = 0; k < NMAC; k++) begin
        if (idx[k] == IDX_W'(e)) add[e] = add[e] + PSUM_W'(prod[k]);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < RF_DEPTH; e++) rf[e] <= '0;
    end else if (clr) begin
      for (int e = 0; e < RF_DEPTH; e++) rf[e] <= '0;
    end else if (mac_en) begin
      for (int e = 0; e < RF_DEPTH; e++) rf[e] <= rf[e] + add[e];
    end
  end

  assign rd_data = rf[rd_idx];

endmodule
