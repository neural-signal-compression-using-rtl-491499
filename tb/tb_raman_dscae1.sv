// tb_raman_dscae1: runs the DS-CAE1 encoder, then DS-CAE2 (the same model
// with one 64-channel block fewer), on the accelerator at its default sizes.
// The program is the model's layer list: a 3x3 stride-2 convolution from the
// 96 x 100 x 1 input window to 48 x 50 x 16, two stride-2 depthwise
// separable blocks (16 -> 16, 16 -> 64 channels), two stride-1 depthwise
// separable blocks at 64 channels, and a 12 x 13 average pool giving the
// 64-byte latent code. Pointwise layers are pruned to 4 non-zeros per 1 x 16
// tile (75 %), every convolution has ReLU, and each pointwise layer whose
// output is no wider than its input writes over its own input. Weights and the
// input window are random; the latent code and the output of the last
// pointwise layer are compared with the behavioural model shared with the
// end-to-end test. The run's cycle count is printed next to the reference
// latency of 90,940 cycles (45.47 ms at 2 MHz). This design's sequential
// schedule takes about 683,000 cycles for DS-CAE1 and 536,000 for DS-CAE2, so
// the check is that one window is encoded within its 50 ms at a 14 MHz clock
// (at most 700,000 cycles). Both models' parameters must fit 640 words/bank.
//
// Interface and timing: no ports; a 10-time-unit clock drives the device
// from its rising edge, inputs change on the falling edge, and the test
// ends with one line `TB_RESULT checks=N failures=M` (a watchdog stops a
// hung run and counts a failure).
// Layer sizes and pruning ratio follow the paper's DS-CAE models; the stride-2
// placement, requantization shifts and memory map are this test's own choices.
module tb_raman_dscae1;
  import raman_pkg::*;

  localparam int ACT_BYTES = 49152;
  localparam int PBW       = 640;
  localparam int CMP_BYTES = 2048;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        start, busy, done;
  logic        inst_wr_en;
  logic [4:0]  inst_wr_addr;
  instr_t      inst_wr_data;
  logic        xa_en, xa_we;
  logic [15:0] xa_addr;
  logic [7:0]  xa_wdata, xa_rdata;
  logic        xp_en, xp_we;
  logic [1:0]  xp_bank;
  logic [9:0]  xp_addr;
  logic [31:0] xp_wdata, xp_rdata;
  logic [31:0] st_mac, st_skip, st_layers, st_cycles;

  raman_top dut (
    .clk(clk), .rst_n(rst_n), .start(start), .busy(busy), .done(done),
    .inst_wr_en(inst_wr_en), .inst_wr_addr(inst_wr_addr), .inst_wr_data(inst_wr_data),
    .xa_en(xa_en), .xa_we(xa_we), .xa_addr(xa_addr), .xa_wdata(xa_wdata), .xa_rdata(xa_rdata),
    .xp_en(xp_en), .xp_we(xp_we), .xp_bank(xp_bank), .xp_addr(xp_addr),
    .xp_wdata(xp_wdata), .xp_rdata(xp_rdata),
    .stat_mac_cycles(st_mac), .stat_skipped_rows(st_skip),
    .stat_layers(st_layers), .stat_cycles(st_cycles)
  );

  int checks = 0, failures = 0;

  // ------------------------------------------------------------------ model state
  byte         ref_mem [ACT_BYTES];
  logic [31:0] pbank [4][PBW];
  int          pnext;            // next free parameter word
  instr_t      prog [16];
  int          nprog;

  // mechanism counters
  int m_sat = 0, m_overlap = 0, m_multigroup = 0, m_partial_job = 0, m_res = 0;
  int m_avg = 0, m_max = 0, m_theta4 = 0, m_theta8 = 0, m_theta12 = 0, m_dense = 0;
  int m_pad = 0, m_stride2 = 0, m_dw = 0;

  // 15-state sequence of x^4+x^3+1 starting at s (model's own table)
  function automatic void lfsr_seq(input int s, output int seq[15]);
    int t;
    t = s;
    for (int i = 0; i < 15; i++) begin
      seq[i] = t;
      t = ((t << 1) & 4'hE) | (((t >> 3) ^ (t >> 2)) & 1);
    end
  endfunction

  // tile index used by MAC k at step s of a tile
  // (row i of the weight matrix: the tile starts q*i positions into the cycle)
  function automatic int tile_idx(input int theta, input int seed, input int i, input int k,
                                  input int s);
    int seq[15];
    int q;
    if (theta == 16) return 4 * s + k;
    q = theta / 4;
    lfsr_seq(seed == 0 ? 1 : seed, seq);
    return seq[((i % 15) * q + k * q + s) % 15] - 1;
  endfunction

  function automatic int sat8(input longint v);
    if (v > 127) return 127;
    if (v < -128) return -128;
    return int'(v);
  endfunction

  function automatic int requant(input longint y, input int qmul, input int qsh);
    longint p;
    p = y * qmul;
    if (qsh != 0) p = p + (longint'(1) <<< (qsh - 1));
    return sat8(p >>> qsh);
  endfunction

  function automatic int post(input longint acc, input int bias, input instr_t ins, input int res);
    int q;
    int raw;
    longint p;
    p = (acc + bias) * longint'(ins.qmul);
    if (ins.qshift != 0) p = p + (longint'(1) <<< (int'(ins.qshift) - 1));
    p = p >>> int'(ins.qshift);
    if (p > 127 || p < -128) m_sat++;
    q = sat8(p);
    if (ins.res_en) begin
      raw = q + res;
      q = sat8(raw);
    end
    if (ins.relu && q < 0) q = 0;
    return q;
  endfunction

  // ------------------------------------------------------------------ layer builders
  // Each builder draws random weights/biases, stores them in the parameter
  // image in the hardware layout, computes the layer in ref_mem and appends
  // the instruction.
  int wtmp [];   // logical weights
  int btmp [];

  function automatic instr_t base_instr(op_e op, int h, int w, int m, int n, int oh, int ow, int st,
                                       int ia, int oa);
    instr_t i;
    i = '0;
    i.op = op; i.in_h = 8'(h); i.in_w = 8'(w); i.in_c = 12'(m); i.out_c = 12'(n);
    i.out_h = 8'(oh); i.out_w = 8'(ow); i.stride = 2'(st);
    i.ia_base = 16'(ia); i.oa_base = 16'(oa); i.res_base = 16'(ia);
    i.qmul = 16'd1; i.qshift = 5'd7; i.theta = 5'd16; i.seed = 4'd1;
    return i;
  endfunction

  task automatic add_bias(input int n);
    int g, c, e, ng;
    btmp = new[n];
    ng = ((n / 16) + 3) / 4;
    for (int ch = 0; ch < n; ch++) btmp[ch] = $urandom_range(0, 400) - 200;
    for (g = 0; g < ng; g++)
      for (c = 0; c < 4; c++)
        for (e = 0; e < 16; e++)
          pbank[c][pnext + g * 16 + e] = ((g * 4 + c) * 16 + e < n) ? 32'(btmp[(g * 4 + c) * 16 + e]) : 32'd0;
    pnext += ng * 16;
  endtask

  // CONV 3x3 pad 1 / DW 3x3 pad 1 / PW, computed into ref_mem
  task automatic add_conv(input op_e op, input int h, input int w, input int m, input int n,
                          input int st, input int ia, input int oa, input int theta,
                          input int seed, input bit relu, input bit res, input int qsh);
    instr_t ins;
    int oh, ow, K, q, ng, taps, ch, t, iy, ix, r;
    logic [31:0] wd;
    longint acc;
    byte outv [];
    oh = (op == OP_PW) ? h : (h + 2 - 3) / st + 1;
    ow = (op == OP_PW) ? w : (w + 2 - 3) / st + 1;
    ins = base_instr(op, h, w, m, n, oh, ow, st, ia, oa);
    ins.relu = relu; ins.res_en = res; ins.qshift = 5'(qsh);
    ins.theta = 5'(theta); ins.seed = 4'(seed);
    taps = (op == OP_PW) ? 1 : 9;
    ng = ((n / 16) + 3) / 4;
    // logical weights W[i][n] (i = tap*M + m), zero where pruned
    if (op == OP_DW) begin
      wtmp = new[9 * m];
      foreach (wtmp[x]) wtmp[x] = $urandom_range(0, 255) - 128;
    end else begin
      K = taps * m;
      q = theta / 4;
      wtmp = new[K * n];
      foreach (wtmp[x]) wtmp[x] = 0;
      for (int i = 0; i < K; i++)
        for (int t = 0; t < n / 16; t++)
          for (int s = 0; s < q; s++)
            for (int k = 0; k < 4; k++)
              wtmp[i * n + t * 16 + tile_idx(theta, seed, i, k, s)] = $urandom_range(0, 255) - 128;
    end
    // parameter image
    ins.w_base = 12'(pnext);
    if (op == OP_DW) begin
      for (int g = 0; g < ng; g++)
        for (int tp = 0; tp < 9; tp++)
          for (int s = 0; s < 4; s++)
            for (int c = 0; c < 4; c++) begin
              for (int j = 0; j < 4; j++) begin
                ch = (g * 4 + c) * 16 + 4 * s + j;
                wd[8 * j +: 8] = (ch < m) ? 8'(wtmp[tp * m + ch]) : 8'd0;
              end
              pbank[c][pnext + (g * 9 + tp) * 4 + s] = wd;
            end
      pnext += ng * 36;
    end else begin
      for (int g = 0; g < ng; g++)
        for (int i = 0; i < K; i++)
          for (int s = 0; s < q; s++)
            for (int c = 0; c < 4; c++) begin
              t = g * 4 + c;
              for (int k = 0; k < 4; k++)
                wd[8 * k +: 8] = (t < n / 16) ? 8'(wtmp[i * n + t * 16 + tile_idx(theta, seed, i, k, s)]) : 8'd0;
              pbank[c][pnext + (g * K + i) * q + s] = wd;
            end
      pnext += ng * K * q;
    end
    ins.b_base = 12'(pnext);
    add_bias(n);
    if (ng > 1) m_multigroup++;
    if ((oh * ow) % 3 != 0) m_partial_job++;
    if (ia == oa) m_overlap++;
    if (res) m_res++;
    if (st == 2) m_stride2++;
    if (op == OP_DW) m_dw++;
    if (op == OP_PW) begin
      if (theta == 4) m_theta4++;
      if (theta == 8) m_theta8++;
      if (theta == 12) m_theta12++;
    end
    if (theta == 16 || op != OP_PW) m_dense++;
    // reference computation
    outv = new[oh * ow * n];
    for (int y = 0; y < oh; y++)
      for (int x = 0; x < ow; x++)
        for (int o = 0; o < n; o++) begin
          acc = 0;
          if (op == OP_PW) begin
            for (int mm = 0; mm < m; mm++)
              acc += longint'(ref_mem[ia + (y * w + x) * m + mm]) * wtmp[mm * n + o];
          end else begin
            for (int ky = 0; ky < 3; ky++)
              for (int kx = 0; kx < 3; kx++) begin
                iy = y * st + ky - 1; ix = x * st + kx - 1;
                if (iy < 0 || ix < 0 || iy >= h || ix >= w) begin
                  m_pad++;
                  continue;
                end
                if (op == OP_DW)
                  acc += longint'(ref_mem[ia + (iy * w + ix) * m + o]) * wtmp[(ky * 3 + kx) * m + o];
                else
                  for (int mm = 0; mm < m; mm++)
                    acc += longint'(ref_mem[ia + (iy * w + ix) * m + mm]) * wtmp[((ky * 3 + kx) * m + mm) * n + o];
              end
          end
          r = res ? int'(ref_mem[ia + (y * ow + x) * n + o]) : 0;
          outv[(y * ow + x) * n + o] = byte'(post(acc, btmp[o], ins, r));
        end
    for (int a = 0; a < oh * ow * n; a++) ref_mem[oa + a] = outv[a];
    prog[nprog] = ins;
    nprog = nprog + 1;
  endtask

  task automatic add_pool(input op_e op, input int h, input int w, input int c, input int kh,
                          input int kw, input int ia, input int oa, input int qmul, input int qsh);
    instr_t ins;
    int oh, ow, v;
    longint acc;
    oh = h / kh; ow = w / kw;
    ins = base_instr(op, h, w, c, c, oh, ow, 1, ia, oa);
    ins.pool_kh = 4'(kh); ins.pool_kw = 4'(kw);
    ins.qmul = 16'(qmul); ins.qshift = 5'(qsh);
    if (op == OP_AVGPOOL) m_avg++; else m_max++;
    for (int y = 0; y < oh; y++)
      for (int x = 0; x < ow; x++)
        for (int ch = 0; ch < c; ch++) begin
          acc = (op == OP_MAXPOOL) ? -128 : 0;
          for (int ky = 0; ky < kh; ky++)
            for (int kx = 0; kx < kw; kx++) begin
              v = ref_mem[ia + ((y + ky) * w + x + kx) * c + ch];
              if (op == OP_MAXPOOL) begin if (v > acc) acc = v; end
              else acc += v;
            end
          ref_mem[oa + (y * ow + x) * c + ch] = byte'((op == OP_MAXPOOL) ? int'(acc) : requant(acc, qmul, qsh));
        end
    prog[nprog] = ins;
    nprog = nprog + 1;
  endtask

  // ------------------------------------------------------------------ bus helpers
  task automatic wr_act(input int a, input byte v);
    @(negedge clk); xa_en = 1; xa_we = 1; xa_addr = 16'(a); xa_wdata = v;
    @(negedge clk); xa_en = 0; xa_we = 0;
  endtask

  task automatic rd_act(input int a, output byte v);
    @(negedge clk); xa_en = 1; xa_we = 0; xa_addr = 16'(a);
    @(negedge clk); xa_en = 0; v = xa_rdata;
  endtask

  // ------------------------------------------------------------------ watchdog
  initial begin
    repeat (20_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------------ main
  // nrep = 2: DS-CAE1, nrep = 1: DS-CAE2 (one 64-channel block fewer)
  task automatic run_model(input int nrep, input string name);
    int unsigned cyc;
    byte win [9600];
    int lat;
    pnext = 0; nprog = 0;
    foreach (ref_mem[a]) ref_mem[a] = 0;
    foreach (pbank[c, a]) pbank[c][a] = '0;

    // input window: 96 channels x 100 samples
    for (int a = 0; a < 9600; a++) begin
      win[a] = byte'($urandom_range(0, 255) - 128);
      ref_mem[a] = win[a];
    end

    //      op       h   w    m   n  st  ia     oa     theta seed relu res qsh
    add_conv(OP_CONV, 96, 100, 1, 16, 2,     0,  9600,  16,  1,  1,  0,  7);
    add_conv(OP_DW,   48, 50, 16, 16, 2,  9600,     0,  16,  1,  1,  0,  8);
    add_conv(OP_PW,   24, 25, 16, 16, 1,     0,     0,   4,  7,  1,  0,  7);
    add_conv(OP_DW,   24, 25, 16, 16, 2,     0,  9600,  16,  1,  1,  0,  8);
    add_conv(OP_PW,   12, 13, 16, 64, 1,  9600, 12288,   4, 11,  1,  0,  7);
    add_conv(OP_DW,   12, 13, 64, 64, 1, 12288, 24576,  16,  1,  1,  0,  8);
    add_conv(OP_PW,   12, 13, 64, 64, 1, 24576, 24576,   4,  3,  1,  0,  8);
    lat = 24576;
    if (nrep == 2) begin
      add_conv(OP_DW,   12, 13, 64, 64, 1, 24576, 12288,  16,  1,  1,  0,  8);
      add_conv(OP_PW,   12, 13, 64, 64, 1, 12288, 12288,   4, 13,  1,  0,  8);
      lat = 12288;
    end
    // average over 12 x 13 = 156 positions: 420 / 2^16 ~ 1/156
    add_pool(OP_AVGPOOL, 12, 13, 64, 12, 13, lat, 36864, 420, 16);
    prog[nprog] = '0;
    prog[nprog].op = OP_END;
    nprog++;
    $display("%s: parameter words per bank: %0d of %0d", name, pnext, PBW);
    checks++;
    if (pnext > PBW) begin failures++; $display("model does not fit the parameter memory"); end

    for (int i = 0; i < nprog; i++) begin
      @(negedge clk); inst_wr_en = 1; inst_wr_addr = 5'(i); inst_wr_data = prog[i];
    end
    @(negedge clk); inst_wr_en = 0;
    for (int c = 0; c < 4; c++)
      for (int a = 0; a < pnext; a++) begin
        @(negedge clk); xp_en = 1; xp_we = 1; xp_bank = 2'(c); xp_addr = 10'(a); xp_wdata = pbank[c][a];
      end
    @(negedge clk); xp_en = 0; xp_we = 0;
    for (int a = 0; a < 9600; a++) begin
      @(negedge clk); xa_en = 1; xa_we = 1; xa_addr = 16'(a); xa_wdata = win[a];
    end
    @(negedge clk); xa_en = 0; xa_we = 0;

    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    wait (done);
    @(negedge clk);
    cyc = st_cycles;
    $display("%s: %0d cycles (%0d MAC cycles, %0d zero rows skipped)", name, cyc, st_mac, st_skip);
    $display("%s: latency at 2 MHz %0d.%02d ms (DS-CAE1 reference: 90940 cycles, 45.47 ms)",
             name, cyc / 2000, (cyc % 2000) / 20);
    checks++;
    if (st_layers != 32'(nprog - 1)) begin failures++; $display("layer count %0d", st_layers); end
    // this schedule needs about 7.5x the reference cycles (byte-wide fills
    // with no reuse between jobs): it meets the 50 ms window from 14 MHz up
    checks++;
    if (cyc > 700000) begin failures++; $display("does not fit the 50 ms window at 14 MHz"); end
    $display("%s: latency at 14 MHz %0d.%02d ms (window 50 ms)", name, cyc / 14000, (cyc % 14000) / 140);

    // latent code and the last pointwise layer's output
    for (int a = 0; a < 64; a++) begin
      byte v;
      rd_act(36864 + a, v);
      checks++;
      if (v !== ref_mem[36864 + a]) begin
        failures++;
        if (failures < 20) $display("latent[%0d] = %0d, expected %0d", a, v, ref_mem[36864 + a]);
      end
    end
    for (int a = lat; a < lat + 9984; a++) begin
      byte v;
      rd_act(a, v);
      checks++;
      if (v !== ref_mem[a]) begin
        failures++;
        if (failures < 20) $display("mem[%0d] = %0d, expected %0d", a, v, ref_mem[a]);
      end
    end
    $display("%s: saturated results %0d, padding taps %0d", name, m_sat, m_pad);
  endtask

  initial begin
    start = 0; inst_wr_en = 0; inst_wr_addr = '0; inst_wr_data = '0;
    xa_en = 0; xa_we = 0; xa_addr = '0; xa_wdata = '0;
    xp_en = 0; xp_we = 0; xp_bank = '0; xp_addr = '0; xp_wdata = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_model(2, "DS-CAE1");
    run_model(1, "DS-CAE2");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
