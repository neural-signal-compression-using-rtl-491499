// tb_raman_top: end-to-end test of the RAMAN encoder at its default sizes.
//
// Loads a nine-layer program (standard 3x3 stride-2 convolution, depthwise
// 3x3 stride 1 and 2, pointwise layers pruned to THETA = 4, 8 and 12 non-zeros
// per 1x16 tile, a dense fully connected layer, average and max pooling, a
// residual addition, ReLU and an in-place layer whose outputs overwrite its
// inputs) with random weights, runs it, and compares every byte of the used
// activation memory with a behavioural model computed here from the logical
// (uncompressed) weight tensors. The model regenerates the pruning masks from
// its own table of the 15-state LFSR sequence, so a wrong index anywhere in the
// hardware shows up as a data mismatch. It also counts how often each
// mechanism occurred and fails if one never did.
//
// Interface and timing: no ports; a 10-time-unit clock drives the device
// from its rising edge, inputs change on the falling edge, and the test
// ends with one line `TB_RESULT checks=N failures=M` (a watchdog stops a
// hung run and counts a failure).
// The dataflow, pruning and sparsity skipping follow the paper; the instruction
// format, job schedule and requantization are this design's own.
module tb_raman_top;
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
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------------ main
  initial begin
    int sk_expected;
    start = 0; inst_wr_en = 0; inst_wr_addr = '0; inst_wr_data = '0;
    xa_en = 0; xa_we = 0; xa_addr = '0; xa_wdata = '0;
    xp_en = 0; xp_we = 0; xp_bank = '0; xp_addr = '0; xp_wdata = '0;
    pnext = 0; nprog = 0;
    foreach (ref_mem[a]) ref_mem[a] = 0;
    foreach (pbank[c, a]) pbank[c][a] = '0;

    // input window 6 x 8, a zero band in the top-left corner so that whole
    // cache rows are zero and get skipped
    for (int y = 0; y < 6; y++)
      for (int x = 0; x < 8; x++)
        ref_mem[y * 8 + x] = (y < 3 && x < 5) ? 8'sd0 : byte'($urandom_range(0, 255) - 128);

    //      op       h  w   m   n  st  ia    oa   theta seed relu res qsh
    add_conv(OP_CONV, 6, 8,  1, 16, 2,    0,   64,  16,  1,  1,  0,  6);
    add_conv(OP_DW,   3, 4, 16, 16, 1,   64,  256,  16,  1,  1,  0,  7);
    add_conv(OP_PW,   3, 4, 16, 80, 1,  256,  512,   4,  5,  1,  0,  7);
    add_conv(OP_PW,   3, 4, 80, 16, 1,  512,  512,   8,  9,  0,  0,  8);
    add_conv(OP_DW,   3, 4, 16, 16, 2,  512, 1536,  16,  1,  0,  0,  7);
    add_conv(OP_PW,   2, 2, 16, 16, 1, 1536, 1600,  12,  3,  1,  1,  7);
    add_pool(OP_AVGPOOL, 2, 2, 16, 2, 2, 1600, 1664, 1, 2);
    add_pool(OP_MAXPOOL, 2, 2, 16, 2, 2, 1600, 1680, 1, 0);
    add_conv(OP_PW,   1, 1, 16, 64, 1, 1664, 1696,  16,  1,  0,  0,  6);
    prog[nprog] = '0;   // OP_END
    prog[nprog].op = OP_END;
    nprog++;

    repeat (3) @(posedge clk);
    rst_n = 1;

    // load program, parameters and input
    for (int i = 0; i < nprog; i++) begin
      @(negedge clk); inst_wr_en = 1; inst_wr_addr = 5'(i); inst_wr_data = prog[i];
    end
    @(negedge clk); inst_wr_en = 0;
    for (int c = 0; c < 4; c++)
      for (int a = 0; a < pnext; a++) begin
        @(negedge clk); xp_en = 1; xp_we = 1; xp_bank = 2'(c); xp_addr = 10'(a); xp_wdata = pbank[c][a];
      end
    @(negedge clk); xp_en = 0; xp_we = 0;
    // parameter read-back through the external port
    begin
      @(negedge clk); xp_en = 1; xp_we = 0; xp_bank = 2'd2; xp_addr = 10'd5;
      @(negedge clk); xp_en = 0;
      checks++;
      if (xp_rdata !== pbank[2][5]) begin failures++; $display("param read-back mismatch"); end
    end
    for (int a = 0; a < 48; a++) wr_act(a, ref_mem[a]);

    // run
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    checks++;
    if (!busy) begin failures++; $display("busy not raised"); end
    wait (done);
    @(negedge clk);
    $display("program done: %0d cycles, %0d MAC cycles, %0d zero rows skipped, %0d layers",
             st_cycles, st_mac, st_skip, st_layers);
    checks++;
    if (st_layers != 32'(nprog - 1)) begin failures++; $display("layer count %0d", st_layers); end
    checks++;
    if (busy) begin failures++; $display("busy still high"); end

    // compare the used activation memory
    for (int a = 0; a < CMP_BYTES; a++) begin
      byte v;
      if (a >= 48) begin  // untouched bytes were never written in the DUT: skip those
        if (!(a >= 64 && a < 256 + 192) && !(a >= 512 && a < 512 + 960) &&
            !(a >= 1536 && a < 1760)) continue;
      end
      rd_act(a, v);
      checks++;
      if (v !== ref_mem[a]) begin
        failures++;
        if (failures < 20) $display("mem[%0d] = %0d, expected %0d", a, v, ref_mem[a]);
      end
    end

    // mechanisms
    checks++;
    if (st_skip == 0) begin failures++; $display("zero-row skipping never happened"); end
    begin
      int mech [string];
      mech["saturation"] = m_sat;       mech["ia/oa overlap"] = m_overlap;
      mech["multi-group"] = m_multigroup; mech["partial job"] = m_partial_job;
      mech["residual"] = m_res;         mech["avg pool"] = m_avg;
      mech["max pool"] = m_max;         mech["theta 4"] = m_theta4;
      mech["theta 8"] = m_theta8;       mech["theta 12"] = m_theta12;
      mech["dense"] = m_dense;          mech["padding"] = m_pad;
      mech["stride 2"] = m_stride2;     mech["depthwise"] = m_dw;
      foreach (mech[k]) begin
        checks++;
        $display("mechanism %-14s : %0d", k, mech[k]);
        if (mech[k] == 0) begin failures++; $display("mechanism %s never happened", k); end
      end
    end
    $display("zero rows skipped: %0d", st_skip);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
