// raman_inst_mem: instruction memory holding the encoder program.
//
// The encoder topology is stored as one layer instruction (raman_pkg::instr_t)
// per entry and is streamed in from outside before inference, as the paper
// describes for the training/deployment phases. The depth (32 layers) and the
// synchronous one-cycle read are this design's choices; the paper only names
// the memory.
//
// Interface: `wr_en`/`wr_addr`/`wr_data` write one instruction; `rd_en` with
// `rd_addr` returns the entry on `rd_data` one cycle later.
module raman_inst_mem
  import raman_pkg::*;
#(
  parameter int unsigned DEPTH = 32,
  localparam int unsigned AW   = $clog2(DEPTH)
)(
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  instr_t        wr_data,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output instr_t        rd_data
);

  instr_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
