// raman_ppm: post-processing module.
//
// Turns the 24-bit partial sums read out of the PE array into 8-bit output
// activations, and performs pooling. The list of functions (bias addition,
// quantization, ReLU, residual addition, max/average pooling) and keeping the
// post-processing parameters in registers are the paper's; the arithmetic
// below is this design's choice, in the integer-only style of quantized
// inference:
//   y   = psum + bias[ch]                          (32-bit)
//   q   = sat8( (y * qmul + 2^(qshift-1)) >>> qshift )   (qmul unsigned 16 b)
//   q   = sat8( q + residual )   if res_en
//   out = max(q, 0)              if relu
// Pooling uses a separate accumulator: POOL_AVG sums the window and scales the
// sum with the same qmul/qshift rounding (the layer's qmul/2^qshift carries
// 1/window); POOL_MAX keeps the running maximum.
//
// Interface: biases are written through `b_wr`/`b_idx`/`b_data` into a
// 64-entry register file (one entry per output channel of the 4 PE columns,
// entry = 16*column + RF index); one write loads RF index `b_idx` of all four
// columns. `in_valid` with `in_psum`, `in_ch` and
// `in_res` yields `out_valid`/`out_data` one cycle later. Pooling: `pool_clr`
// starts a window, each `pool_en` adds `pool_in`; `pool_out` is combinational.
module raman_ppm
  import raman_pkg::*;
#(
  localparam int unsigned NBIAS = PE_COLS * RF_DEPTH,
  localparam int unsigned BW    = $clog2(NBIAS)
)(
  input  logic                     clk,
  input  logic                     rst_n,
  // configuration (held for a layer)
  input  logic [15:0]              qmul,
  input  logic [4:0]               qshift,
  input  logic                     relu,
  input  logic                     res_en,
  input  pool_e                    pool_mode,
  // bias registers
  input  logic                     b_wr,
  input  logic [IDX_W-1:0]         b_idx,
  input  logic signed [PE_COLS-1:0][31:0] b_data,
  // psum path
  input  logic                     in_valid,
  input  logic signed [PSUM_W-1:0] in_psum,
  input  logic [BW-1:0]            in_ch,
  input  logic signed [ACT_W-1:0]  in_res,
  output logic                     out_valid,
  output logic signed [ACT_W-1:0]  out_data,
  // pooling path
  input  logic                     pool_clr,
  input  logic                     pool_en,
  input  logic signed [ACT_W-1:0]  pool_in,
  output logic signed [ACT_W-1:0]  pool_out
);

  logic signed [31:0] bias [NBIAS];
  logic signed [31:0] pool_acc;

  function automatic logic signed [ACT_W-1:0] sat8(input logic signed [63:0] v);
    if (v > 64'sd127)       return 8'sd127;
    else if (v < -64'sd128) return -8'sd128;
    else                    return v[ACT_W-1:0];
  endfunction

  function automatic logic signed [63:0] requant(input logic signed [31:0] y,
                                                 input logic [15:0] m,
                                                 input logic [4:0] sh);
    logic signed [63:0] p;
    p = 64'(y) * $signed({48'd0, m});
    if (sh != 0) p = p + (64'sd1 <<< (sh - 5'd1));
    return p >>> sh;
  endfunction

  always_ff @(posedge clk) begin
    if (b_wr) begin
      for (int c = 0; c < PE_COLS; c++) bias[c * RF_DEPTH + int'(b_idx)] <= b_data[c];
    end
  end

  // psum path
  logic signed [31:0]      y;
  logic signed [ACT_W-1:0] q_sat, q_res, q_out;

  always_comb begin
    y     = 32'(in_psum) + bias[in_ch];
    q_sat = sat8(requant(y, qmul, qshift));
    q_res = res_en ? sat8(64'(q_sat) + 64'(in_res)) : q_sat;
    q_out = (relu && q_res < 0) ? '0 : q_res;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) out_data <= q_out;
    end
  end

  // pooling path
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pool_acc <= '0;
    end else if (pool_clr) begin
      pool_acc <= (pool_mode == POOL_MAX) ? -32'sd128 : 32'sd0;
    end else if (pool_en) begin
      if (pool_mode == POOL_MAX) begin
        if (32'(pool_in) > pool_acc) pool_acc <= 32'(pool_in);
      end else begin
        pool_acc <= pool_acc + 32'(pool_in);
      end
    end
  end

  assign pool_out = (pool_mode == POOL_MAX) ? pool_acc[ACT_W-1:0]
                                            : sat8(requant(pool_acc, qmul, qshift));

endmodule
