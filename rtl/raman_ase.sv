// raman_ase: activation sparsity engine.
//
// RAMAN skips processing cycles whose activations are zero. Here the engine
// watches the input-activation tile while it is being prefetched into the
// cache. A tile row i holds the activations of the PE_ROWS output pixels for
// one reduction index (one input channel of a 1x1 layer, or one tap/channel
// pair of a standard convolution). When the last byte of a row arrives the
// engine appends i to its index buffer unless every byte of the row was zero;
// the controller then steps only through the buffered indices, so an all-zero
// row costs no compute cycles. That a row is skipped only when all PE rows see
// a zero (the rows share one weight stream) is this design's choice; the paper
// states only that zero activations are skipped.
//
// Interface: `clr` empties the buffer. Each `in_valid` cycle presents one byte
// `in_data` of row `in_i`; `in_last` marks the row's final byte. With
// `skip_en` low every row is kept. `count` is the number of kept rows;
// `rd_ptr` reads entry `rd_i` combinationally. `skipped` counts dropped rows
// since the last clear.
module raman_ase
  import raman_pkg::*;
#(
  parameter int unsigned MAX_I = 576,
  localparam int unsigned IW   = $clog2(MAX_I + 1)
)(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            clr,
  input  logic            skip_en,
  input  logic            in_valid,
  input  logic            in_last,
  input  logic [IW-1:0]   in_i,
  input  logic [ACT_W-1:0] in_data,
  input  logic [IW-1:0]   rd_ptr,
  output logic [IW-1:0]   rd_i,
  output logic [IW-1:0]   count,
  output logic [IW-1:0]   skipped
);

  logic [IW-1:0] list [MAX_I];
  logic          nz_acc;
  logic          row_nz;

  assign row_nz = nz_acc | (in_data != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      nz_acc  <= 1'b0;
      count   <= '0;
      skipped <= '0;
    end else if (clr) begin
      nz_acc  <= 1'b0;
      count   <= '0;
      skipped <= '0;
    end else if (in_valid) begin
      if (in_last) begin
        nz_acc <= 1'b0;
        if (row_nz || !skip_en) count <= count + 1'b1;
        else                    skipped <= skipped + 1'b1;
      end else begin
        nz_acc <= row_nz;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_last && (row_nz || !skip_en) && count < IW'(MAX_I)) list[count] <= in_i;
  end

  assign rd_i = (rd_ptr < IW'(MAX_I)) ? list[rd_ptr] : '0;

endmodule
