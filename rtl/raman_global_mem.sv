// raman_global_mem: on-chip global memory of the RAMAN encoder.
//
// Two SRAM-like arrays, both with synchronous read (data one cycle after the
// request) and synchronous write:
//  * activation memory, ACT_BYTES bytes, one byte per access. Its default of
//    48 kB is the peak activation memory the paper reports after IA/OA
//    overlapping;
//  * parameter memory, PE_COLS banks of PBANK_WORDS 32-bit words. Bank c feeds
//    PE column c, so one address read from all banks at once yields four
//    4-weight words, one per column (or four 32-bit biases). The default total,
//    4 x 640 x 4 B = 10 kB, is the parameter memory the paper allots to the
//    DS-CAE1 model; the banking is this design's choice.
// Each array has a core port (used by the controller) and an external port
// (loading parameters and input windows, reading the latent code). An access
// on the external port takes priority over the core port in the same cycle.
// Activation read data of either port appear on `a_rdata`.
module raman_global_mem
  import raman_pkg::*;
#(
  parameter int unsigned ACT_BYTES   = 49152,
  parameter int unsigned PBANK_WORDS = 640,
  localparam int unsigned AAW = $clog2(ACT_BYTES),
  localparam int unsigned PAW = $clog2(PBANK_WORDS)
)(
  input  logic                               clk,
  // activation memory, core port
  input  logic                               a_en,
  input  logic                               a_we,
  input  logic [AAW-1:0]                     a_addr,
  input  logic [ACT_W-1:0]                   a_wdata,
  output logic [ACT_W-1:0]                   a_rdata,
  // activation memory, external port
  input  logic                               xa_en,
  input  logic                               xa_we,
  input  logic [AAW-1:0]                     xa_addr,
  input  logic [ACT_W-1:0]                   xa_wdata,
  // parameter memory, core port (all banks, one address)
  input  logic                               p_en,
  input  logic [PAW-1:0]                     p_addr,
  output logic [PE_COLS-1:0][PWORD_W-1:0]    p_rdata,
  // parameter memory, external port (one bank)
  input  logic                               xp_en,
  input  logic                               xp_we,
  input  logic [1:0]                         xp_bank,
  input  logic [PAW-1:0]                     xp_addr,
  input  logic [PWORD_W-1:0]                 xp_wdata,
  output logic [PWORD_W-1:0]                 xp_rdata
);

  logic [ACT_W-1:0]   amem [ACT_BYTES];
  logic [PWORD_W-1:0] pmem [PE_COLS][PBANK_WORDS];

  // activation memory: one access per cycle, external port first
  logic             ae, awe;
  logic [AAW-1:0]   aad;
  logic [ACT_W-1:0] awd;

  always_comb begin
    if (xa_en) begin
      ae = 1'b1; awe = xa_we; aad = xa_addr; awd = xa_wdata;
    end else begin
      ae = a_en; awe = a_we;  aad = a_addr;  awd = a_wdata;
    end
  end

  always_ff @(posedge clk) begin
    if (ae && aad < AAW'(ACT_BYTES)) begin
      if (awe) amem[aad] <= awd;
      else     a_rdata   <= amem[aad];
    end
  end

  // parameter memory
  always_ff @(posedge clk) begin
    if (xp_en) begin
      if (xp_we) pmem[xp_bank][xp_addr] <= xp_wdata;
      else       xp_rdata <= pmem[xp_bank][xp_addr];
    end else if (p_en) begin
      for (int c = 0; c < PE_COLS; c++) p_rdata[c] <= pmem[c][p_addr];
    end
  end

endmodule
