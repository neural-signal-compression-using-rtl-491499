// tb_raman_ppm: checks the post-processing module against an integer model.
// Random biases are loaded, then random psums pass through with random
// requantization, residual and ReLU settings; the registered output must
// equal the model. Average and max pooling windows are checked as well.
//
// Interface and timing: no ports; a 10-time-unit clock drives the device
// from its rising edge, inputs change on the falling edge, and the test
// ends with one line `TB_RESULT checks=N failures=M` (a watchdog stops a
// hung run and counts a failure).
// Bias, residual, ReLU and pooling follow the paper's post-processing module;
// the requantization formula and saturation are this design's own.
module tb_raman_ppm;
  import raman_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [15:0] qmul;
  logic [4:0] qshift;
  logic relu, res_en, b_wr, in_valid, out_valid, pool_clr, pool_en;
  pool_e pool_mode;
  logic [IDX_W-1:0] b_idx;
  logic signed [PE_COLS-1:0][31:0] b_data;
  logic signed [PSUM_W-1:0] in_psum;
  logic [5:0] in_ch;
  logic signed [ACT_W-1:0] in_res, out_data, pool_in, pool_out;

  raman_ppm dut (
    .clk(clk), .rst_n(rst_n), .qmul(qmul), .qshift(qshift), .relu(relu), .res_en(res_en),
    .pool_mode(pool_mode), .b_wr(b_wr), .b_idx(b_idx), .b_data(b_data), .in_valid(in_valid),
    .in_psum(in_psum), .in_ch(in_ch), .in_res(in_res), .out_valid(out_valid), .out_data(out_data),
    .pool_clr(pool_clr), .pool_en(pool_en), .pool_in(pool_in), .pool_out(pool_out));

  int checks = 0, failures = 0;
  int bias_m [64];

  function automatic int sat(longint v);
    if (v > 127) return 127;
    if (v < -128) return -128;
    return int'(v);
  endfunction

  function automatic int rq(longint y, int m, int sh);
    longint p;
    p = y * m;
    if (sh != 0) p = p + (longint'(1) << (sh - 1));
    return sat(p >>> sh);
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e, n, acc;
    qmul = '0; qshift = '0; relu = 0; res_en = 0; b_wr = 0; in_valid = 0; pool_clr = 0;
    pool_en = 0; pool_mode = POOL_NONE; b_idx = '0; b_data = '0; in_psum = '0; in_ch = '0;
    in_res = '0; pool_in = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // biases
    for (int i = 0; i < RF_DEPTH; i++) begin
      b_wr = 1; b_idx = 4'(i);
      for (int c = 0; c < PE_COLS; c++) begin
        b_data[c] = $signed($urandom_range(0, 200000)) - 100000;
        bias_m[c * 16 + i] = b_data[c];
      end
      @(negedge clk);
    end
    b_wr = 0;
    // psum path
    for (int t = 0; t < 3000; t++) begin
      in_valid = 1;
      in_psum = 24'($signed($urandom_range(0, 2000000)) - 1000000);
      if (t % 7 == 0) in_psum = (t % 2) ? 24'h7fffff : 24'h800000;
      in_ch = 6'($urandom_range(0, 63));
      in_res = 8'($urandom_range(0, 255));
      qmul = 16'($urandom_range(0, 65535));
      qshift = 5'($urandom_range(0, 31));
      relu = 1'($urandom_range(0, 1));
      res_en = 1'($urandom_range(0, 1));
      e = rq(longint'(in_psum) + bias_m[in_ch], qmul, qshift);
      if (res_en) e = sat(longint'(e) + in_res);
      if (relu && e < 0) e = 0;
      @(negedge clk);
      checks++;
      if (!out_valid || int'(out_data) != e) begin
        failures++;
        if (failures < 10) $display("psum %0d ch %0d: got %0d expected %0d", in_psum, in_ch,
                                    out_data, e);
      end
    end
    in_valid = 0;
    @(negedge clk);
    checks++;
    if (out_valid) begin failures++; $display("out_valid stuck"); end
    // pooling
    for (int t = 0; t < 200; t++) begin
      pool_mode = (t % 2) ? POOL_MAX : POOL_AVG;
      qmul = 16'($urandom_range(1, 65535));
      qshift = 5'($urandom_range(8, 24));
      n = $urandom_range(1, 30);
      pool_clr = 1;
      @(negedge clk);
      pool_clr = 0;
      acc = (pool_mode == POOL_MAX) ? -128 : 0;
      for (int i = 0; i < n; i++) begin
        pool_en = 1;
        pool_in = 8'($urandom_range(0, 255));
        if (pool_mode == POOL_MAX) begin if (int'(pool_in) > acc) acc = pool_in; end
        else acc += pool_in;
        @(negedge clk);
      end
      pool_en = 0;
      #1;
      e = (pool_mode == POOL_MAX) ? acc : rq(acc, qmul, qshift);
      checks++;
      if (int'(pool_out) != e) begin
        failures++;
        if (failures < 10) $display("pool mode %0d: got %0d expected %0d", pool_mode, pool_out, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
