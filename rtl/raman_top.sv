// raman_top: RAMAN tinyML encoder for neural-signal compression.
//
// Compresses one window of multichannel neural data (an H x W x 1 image, e.g.
// 96 channels x 100 samples) into a short latent vector by running the encoder
// half of a depthwise-separable convolutional autoencoder. The block diagram
// follows the RAMAN top level: a top-level controller fed by an instruction
// memory; a global memory for activations and parameters; an activation
// sparsity engine and an activation cache in front of a 3 x 4 PE array of
// 4-MAC PEs; an LFSR block that regenerates the positions of stochastically
// pruned weights; and a post-processing module writing results back to the
// global memory.
//
// Usage: with `busy` low, write the layer program through `inst_wr_*`, the
// weights and biases through the parameter port `xp_*` and the input window
// through the activation port `xa_*` (byte address ia_base + (y*W + x)*C + c).
// Pulse `start`; when `done` pulses, read the latent code through `xa_*`
// (read data on `xa_rdata` one cycle after the request). The external ports
// take priority over the controller and must only be used while `busy` is low.
// Clock and reset (active-low, asynchronous) are common to all blocks.
module raman_top
  import raman_pkg::*;
#(
  parameter int unsigned ACT_BYTES   = 49152,
  parameter int unsigned PBANK_WORDS = 640,
  parameter int unsigned MAX_I       = 576,
  parameter int unsigned IDEPTH      = 32,
  localparam int unsigned AAW = $clog2(ACT_BYTES),
  localparam int unsigned PAW = $clog2(PBANK_WORDS),
  localparam int unsigned IW  = $clog2(MAX_I + 1),
  localparam int unsigned IMW = $clog2(IDEPTH)
)(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  output logic                 busy,
  output logic                 done,
  // layer configuration / instruction stream
  input  logic                 inst_wr_en,
  input  logic [IMW-1:0]       inst_wr_addr,
  input  instr_t               inst_wr_data,
  // IAs / OAs port of the global memory
  input  logic                 xa_en,
  input  logic                 xa_we,
  input  logic [AAW-1:0]       xa_addr,
  input  logic [ACT_W-1:0]     xa_wdata,
  output logic [ACT_W-1:0]     xa_rdata,
  // parameters port of the global memory
  input  logic                 xp_en,
  input  logic                 xp_we,
  input  logic [1:0]           xp_bank,
  input  logic [PAW-1:0]       xp_addr,
  input  logic [PWORD_W-1:0]   xp_wdata,
  output logic [PWORD_W-1:0]   xp_rdata,
  // statistics
  output logic [31:0]          stat_mac_cycles,
  output logic [31:0]          stat_skipped_rows,
  output logic [31:0]          stat_layers,
  output logic [31:0]          stat_cycles
);

  // instruction memory
  logic            im_rd_en;
  logic [IMW-1:0]  im_rd_addr;
  instr_t          im_rd_data;
  // global memory core ports
  logic            a_en, a_we;
  logic [AAW-1:0]  a_addr;
  logic [ACT_W-1:0] a_wdata, a_rdata;
  logic            p_en;
  logic [PAW-1:0]  p_addr;
  logic [PE_COLS-1:0][PWORD_W-1:0] p_rdata;
  // cache
  logic            c_wr_en, c_bcast;
  logic [1:0]      c_wr_r;
  logic [IW-1:0]   c_wr_i, c_rd_i;
  logic [ACT_W-1:0] c_wr_data;
  logic [PE_ROWS-1:0][PE_COLS-1:0][NMAC-1:0][ACT_W-1:0] c_act;
  // sparsity engine
  logic            s_clr, s_skip_en, s_in_valid, s_in_last;
  logic [IW-1:0]   s_in_i, s_rd_ptr, s_rd_i, s_count, s_skipped;
  logic [ACT_W-1:0] s_in_data;
  // LFSR
  logic            l_load, l_step, l_last;
  logic [11:0]     l_row;
  logic [4:0]      l_theta;
  logic [3:0]      l_seed;
  logic [NMAC-1:0][IDX_W-1:0] l_idx;
  // PE array
  logic            pe_clr, pe_mac_en;
  logic [PE_COLS-1:0][NMAC-1:0][WGT_W-1:0] pe_wgt;
  logic [1:0]      pe_rd_row, pe_rd_col;
  logic [IDX_W-1:0] pe_rd_idx;
  logic signed [PSUM_W-1:0] pe_rd_data;
  // PPM
  logic [15:0]     q_qmul;
  logic [4:0]      q_qshift;
  logic            q_relu, q_res_en, q_b_wr, q_in_valid, q_out_valid;
  logic            q_pool_clr, q_pool_en;
  pool_e           q_pool_mode;
  logic [IDX_W-1:0] q_b_idx;
  logic signed [PE_COLS-1:0][31:0] q_b_data;
  logic signed [PSUM_W-1:0] q_in_psum;
  logic [5:0]      q_in_ch;
  logic signed [ACT_W-1:0] q_in_res, q_out_data, q_pool_in, q_pool_out;

  assign xa_rdata = a_rdata;

  raman_inst_mem #(.DEPTH(IDEPTH)) u_imem (
    .clk(clk), .wr_en(inst_wr_en), .wr_addr(inst_wr_addr), .wr_data(inst_wr_data),
    .rd_en(im_rd_en), .rd_addr(im_rd_addr), .rd_data(im_rd_data)
  );

  raman_global_mem #(.ACT_BYTES(ACT_BYTES), .PBANK_WORDS(PBANK_WORDS)) u_gmem (
    .clk(clk),
    .a_en(a_en), .a_we(a_we), .a_addr(a_addr), .a_wdata(a_wdata), .a_rdata(a_rdata),
    .xa_en(xa_en), .xa_we(xa_we), .xa_addr(xa_addr), .xa_wdata(xa_wdata),
    .p_en(p_en), .p_addr(p_addr), .p_rdata(p_rdata),
    .xp_en(xp_en), .xp_we(xp_we), .xp_bank(xp_bank), .xp_addr(xp_addr),
    .xp_wdata(xp_wdata), .xp_rdata(xp_rdata)
  );

  raman_cache #(.MAX_I(MAX_I)) u_cache (
    .clk(clk), .wr_en(c_wr_en), .wr_r(c_wr_r), .wr_i(c_wr_i), .wr_data(c_wr_data),
    .bcast(c_bcast), .rd_i(c_rd_i), .act(c_act)
  );

  raman_ase #(.MAX_I(MAX_I)) u_ase (
    .clk(clk), .rst_n(rst_n), .clr(s_clr), .skip_en(s_skip_en),
    .in_valid(s_in_valid), .in_last(s_in_last), .in_i(s_in_i), .in_data(s_in_data),
    .rd_ptr(s_rd_ptr), .rd_i(s_rd_i), .count(s_count), .skipped(s_skipped)
  );

  raman_lfsr_block u_lfsr (
    .clk(clk), .rst_n(rst_n), .load(l_load), .step(l_step),
    .theta(l_theta), .seed(l_seed), .row(l_row), .idx(l_idx), .last(l_last)
  );

  raman_pe_array u_pes (
    .clk(clk), .rst_n(rst_n), .clr(pe_clr), .mac_en(pe_mac_en),
    .act(c_act), .wgt(pe_wgt), .idx(l_idx),
    .rd_row(pe_rd_row), .rd_col(pe_rd_col), .rd_idx(pe_rd_idx), .rd_data(pe_rd_data)
  );

  raman_ppm u_ppm (
    .clk(clk), .rst_n(rst_n),
    .qmul(q_qmul), .qshift(q_qshift), .relu(q_relu), .res_en(q_res_en), .pool_mode(q_pool_mode),
    .b_wr(q_b_wr), .b_idx(q_b_idx), .b_data(q_b_data),
    .in_valid(q_in_valid), .in_psum(q_in_psum), .in_ch(q_in_ch), .in_res(q_in_res),
    .out_valid(q_out_valid), .out_data(q_out_data),
    .pool_clr(q_pool_clr), .pool_en(q_pool_en), .pool_in(q_pool_in), .pool_out(q_pool_out)
  );

  raman_controller #(
    .ACT_BYTES(ACT_BYTES), .PBANK_WORDS(PBANK_WORDS), .MAX_I(MAX_I), .IDEPTH(IDEPTH)
  ) u_ctrl (
    .clk(clk), .rst_n(rst_n), .start(start), .busy(busy), .done(done),
    .im_rd_en(im_rd_en), .im_rd_addr(im_rd_addr), .im_rd_data(im_rd_data),
    .a_en(a_en), .a_we(a_we), .a_addr(a_addr), .a_wdata(a_wdata), .a_rdata(a_rdata),
    .p_en(p_en), .p_addr(p_addr), .p_rdata(p_rdata),
    .c_wr_en(c_wr_en), .c_wr_r(c_wr_r), .c_wr_i(c_wr_i), .c_wr_data(c_wr_data),
    .c_bcast(c_bcast), .c_rd_i(c_rd_i),
    .s_clr(s_clr), .s_skip_en(s_skip_en), .s_in_valid(s_in_valid), .s_in_last(s_in_last),
    .s_in_i(s_in_i), .s_in_data(s_in_data), .s_rd_ptr(s_rd_ptr), .s_rd_i(s_rd_i),
    .s_count(s_count), .s_skipped(s_skipped),
    .l_load(l_load), .l_step(l_step), .l_row(l_row), .l_theta(l_theta), .l_seed(l_seed),
    .pe_clr(pe_clr), .pe_mac_en(pe_mac_en), .pe_wgt(pe_wgt),
    .pe_rd_row(pe_rd_row), .pe_rd_col(pe_rd_col), .pe_rd_idx(pe_rd_idx), .pe_rd_data(pe_rd_data),
    .q_qmul(q_qmul), .q_qshift(q_qshift), .q_relu(q_relu), .q_res_en(q_res_en),
    .q_pool_mode(q_pool_mode), .q_b_wr(q_b_wr), .q_b_idx(q_b_idx), .q_b_data(q_b_data),
    .q_in_valid(q_in_valid), .q_in_psum(q_in_psum), .q_in_ch(q_in_ch), .q_in_res(q_in_res),
    .q_out_valid(q_out_valid), .q_out_data(q_out_data),
    .q_pool_clr(q_pool_clr), .q_pool_en(q_pool_en), .q_pool_in(q_pool_in), .q_pool_out(q_pool_out),
    .stat_mac_cycles(stat_mac_cycles), .stat_skipped_rows(stat_skipped_rows),
    .stat_layers(stat_layers), .stat_cycles(stat_cycles)
  );

endmodule
