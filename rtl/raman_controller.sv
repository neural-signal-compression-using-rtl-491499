// raman_controller: top-level controller of the RAMAN encoder.
//
// Runs the layer program held in the instruction memory, one instruction per
// layer, and sequences the other blocks. The paper gives this block's role
// (scheduling and issuing commands to the compute and memory blocks); the
// schedule below is this design's own, kept simple and sequential.
//
// Convolution-type layers (CONV, DW, PW/FC) are computed in jobs of PE_ROWS
// (3) consecutive output pixels:
//  1. FILL   - every input activation the 3 pixels need is read from global
//              memory (zero padding generated, not read) into the cache as
//              rows of the reduction index i (i = tap*M + m; for PW i = m).
//              The sparsity engine records which rows are non-zero.
//  2. per group of 4 weight tiles (64 output channels):
//     BIAS   - 16 reads of the parameter banks load the group's 64 biases
//              into the post-processing module;
//     CLR    - psum register files cleared;
//     COMP   - PW/CONV: for each non-zero row i, THETA/4 cycles; each cycle
//              one weight word per PE column is read (address
//              w_base + (g*K + i)*THETA/4 + s) and every PE performs 4 MACs
//              at the LFSR indices (the LFSRs are loaded with row i's start
//              states at s = 0 and step for s > 0). DW: for each of the 9 taps, 4 dense
//              cycles with per-MAC channels (address w_base + (g*9+k)*4 + s);
//     WB     - each psum passes through the post-processing module and is
//              written to oa_base + p*N + n: 2 cycles per output (3 with a
//              residual, which is read first); an RF holding no output
//              channel of the layer, or a pixel past the end, costs 1 cycle.
// Because the whole input tile of a job sits in the cache, oa_base may equal
// ia_base for 1x1 layers with N <= M: outputs then overwrite inputs that are
// no longer needed (IA/OA overlap).
// Pooling layers read each window byte by byte through the PPM pooling unit.
//
// Interface: pulse `start` with the program in the instruction memory;
// `busy` is high until the OP_END instruction, then `done` pulses for one
// cycle. The remaining ports drive the blocks named in their prefixes. The
// `stat_*` counters (cleared at start) count MAC cycles, skipped zero rows,
// layers run and total cycles. About half of the output bits are data
// routed through the controller rather than decoded by it: parameter-memory
// words go on to the PE weight bus and the PPM bias input, PE RF reads go to
// the PPM psum input, and activation reads to the PPM residual input; the
// controller only picks which lane or byte is forwarded in each cycle.
// `l_row` is the full row index; the LFSR block uses it modulo 15.
module raman_controller
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
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  output logic                      busy,
  output logic                      done,
  // instruction memory
  output logic                      im_rd_en,
  output logic [IMW-1:0]            im_rd_addr,
  input  instr_t                    im_rd_data,
  // activation memory core port
  output logic                      a_en,
  output logic                      a_we,
  output logic [AAW-1:0]            a_addr,
  output logic [ACT_W-1:0]          a_wdata,
  input  logic [ACT_W-1:0]          a_rdata,
  // parameter memory core port
  output logic                      p_en,
  output logic [PAW-1:0]            p_addr,
  input  logic [PE_COLS-1:0][PWORD_W-1:0] p_rdata,
  // cache
  output logic                      c_wr_en,
  output logic [1:0]                c_wr_r,
  output logic [IW-1:0]             c_wr_i,
  output logic [ACT_W-1:0]          c_wr_data,
  output logic                      c_bcast,
  output logic [IW-1:0]             c_rd_i,
  // activation sparsity engine
  output logic                      s_clr,
  output logic                      s_skip_en,
  output logic                      s_in_valid,
  output logic                      s_in_last,
  output logic [IW-1:0]             s_in_i,
  output logic [ACT_W-1:0]          s_in_data,
  output logic [IW-1:0]             s_rd_ptr,
  input  logic [IW-1:0]             s_rd_i,
  input  logic [IW-1:0]             s_count,
  input  logic [IW-1:0]             s_skipped,
  // LFSR block
  output logic                      l_load,
  output logic                      l_step,
  output logic [11:0]               l_row,
  output logic [4:0]                l_theta,
  output logic [3:0]                l_seed,
  // PE array
  output logic                      pe_clr,
  output logic                      pe_mac_en,
  output logic [PE_COLS-1:0][NMAC-1:0][WGT_W-1:0] pe_wgt,
  output logic [1:0]                pe_rd_row,
  output logic [1:0]                pe_rd_col,
  output logic [IDX_W-1:0]          pe_rd_idx,
  input  logic signed [PSUM_W-1:0]  pe_rd_data,
  // post-processing module
  output logic [15:0]               q_qmul,
  output logic [4:0]                q_qshift,
  output logic                      q_relu,
  output logic                      q_res_en,
  output pool_e                     q_pool_mode,
  output logic                      q_b_wr,
  output logic [IDX_W-1:0]          q_b_idx,
  output logic signed [PE_COLS-1:0][31:0] q_b_data,
  output logic                      q_in_valid,
  output logic signed [PSUM_W-1:0]  q_in_psum,
  output logic [5:0]                q_in_ch,
  output logic signed [ACT_W-1:0]   q_in_res,
  input  logic                      q_out_valid,
  input  logic signed [ACT_W-1:0]   q_out_data,
  output logic                      q_pool_clr,
  output logic                      q_pool_en,
  output logic signed [ACT_W-1:0]   q_pool_in,
  input  logic signed [ACT_W-1:0]   q_pool_out,
  // statistics
  output logic [31:0]               stat_mac_cycles,
  output logic [31:0]               stat_skipped_rows,
  output logic [31:0]               stat_layers,
  output logic [31:0]               stat_cycles
);

  typedef enum logic [4:0] {
    S_IDLE, S_FETCH, S_DECODE, S_JOB, S_FILL, S_FILL_DRAIN, S_BIAS, S_BIAS_DRAIN,
    S_CLR, S_COMP, S_COMP_DRAIN, S_WB_ADDR, S_WB_PPM, S_WB_WR, S_NEXT_GROUP,
    S_POOL_CLR, S_POOL_RD, S_POOL_ACC, S_POOL_WR, S_DONE
  } state_e;

  state_e state;
  instr_t ins;
  logic [IMW-1:0] pc;

  // layer-derived values
  logic [11:0] n_tiles;     // N/16
  logic [9:0]  n_groups;    // ceil(n_tiles/4)
  logic [15:0] k_rows;      // reduction rows K per output pixel
  logic [2:0]  q_steps;     // cycles per row: THETA/4 (PW) or 4
  logic [15:0] n_pix;       // output pixels
  logic        is_pw, is_dw;

  assign is_pw   = (ins.op == OP_PW);
  assign is_dw   = (ins.op == OP_DW);

  // job state: the PE_ROWS output pixels of the job
  logic [15:0] job_p;                  // index of the job's first pixel
  logic [7:0]  job_y, job_x;
  logic [7:0]  py [PE_ROWS];
  logic [7:0]  px [PE_ROWS];
  logic        pv [PE_ROWS];
  logic [7:0]  nxt_y, nxt_x;           // first pixel of the following job

  always_comb begin
    logic [7:0] y, x;
    y = job_y; x = job_x;
    for (int r = 0; r < PE_ROWS; r++) begin
      x = x + 8'd1;
      if (x == ins.out_w) begin x = 8'd0; y = y + 8'd1; end
    end
    nxt_y = y; nxt_x = x;
  end

  // fill counters
  logic [3:0]  f_tap;        // 0..8 (ky*3+kx)
  logic [11:0] f_m;
  logic [1:0]  f_r;
  logic [IW-1:0] f_i;
  logic        fd_v, fd_zero, fd_last;   // one-cycle delayed fill write
  logic [1:0]  fd_r;
  logic [IW-1:0] fd_i;

  // compute counters
  logic [9:0]  grp;
  logic [IW-1:0] c_ptr;      // PW/CONV: position in the non-zero row list
  logic [3:0]  c_tap;        // DW: tap
  logic [2:0]  c_s;          // step within row
  logic        cd_v;         // delayed MAC issue
  logic [IW-1:0] cd_i;
  logic [4:0]  b_e;
  logic        bd_v;
  logic [3:0]  bd_e;

  // write-back counters
  logic [1:0]  w_r, w_c;
  logic [3:0]  w_e;

  // pooling counters
  logic [7:0]  po_y, po_x;
  logic [15:0] po_p;
  logic [11:0] po_n;
  logic [3:0]  po_ky, po_kx;

  // ---------------------------------------------------------------- address arithmetic
  logic signed [11:0] f_iy, f_ix;
  logic        f_inb;
  logic [31:0] f_addr;
  logic [3:0]  f_ky, f_kx;

  always_comb begin
    f_ky = (f_tap >= 4'd6) ? 4'd2 : (f_tap >= 4'd3) ? 4'd1 : 4'd0;
    f_kx = f_tap - 4'd3 * f_ky;
    f_iy = $signed({4'd0, py[f_r]}) * $signed({10'd0, ins.stride}) + $signed({8'd0, f_ky}) - 12'sd1;
    f_ix = $signed({4'd0, px[f_r]}) * $signed({10'd0, ins.stride}) + $signed({8'd0, f_kx}) - 12'sd1;
    f_inb = pv[f_r] && f_iy >= 0 && f_ix >= 0 &&
            f_iy < $signed({4'd0, ins.in_h}) && f_ix < $signed({4'd0, ins.in_w});
    f_addr = 32'(ins.ia_base) +
             (32'(unsigned'(f_iy)) * 32'(ins.in_w) + 32'(unsigned'(f_ix))) * 32'(ins.in_c) + 32'(f_m);
  end

  logic [31:0] c_waddr;
  logic [IW-1:0] c_row_i;
  always_comb begin
    c_row_i = s_rd_i;
    if (is_dw) c_waddr = 32'(ins.w_base) + (32'(grp) * 32'd9 + 32'(c_tap)) * 32'd4 + 32'(c_s);
    else       c_waddr = 32'(ins.w_base) + (32'(grp) * 32'(k_rows) + 32'(c_row_i)) * 32'(q_steps)
                       + 32'(c_s);
  end

  logic [15:0] w_p;
  logic [11:0] w_n;
  logic        w_valid;
  logic [31:0] w_off;
  always_comb begin
    w_p     = job_p + 16'(w_r);
    w_n     = 12'((32'(grp) * 32'd4 + 32'(w_c)) * 32'd16 + 32'(w_e));
    w_valid = pv[w_r] && ((12'(grp) * 12'd4 + 12'(w_c)) < n_tiles);
    w_off   = 32'(w_p) * 32'(ins.out_c) + 32'(w_n);
  end

  logic [31:0] po_raddr, po_waddr;
  always_comb begin
    po_raddr = 32'(ins.ia_base) +
               ((32'(po_y) * 32'(ins.stride) + 32'(po_ky)) * 32'(ins.in_w) +
                 32'(po_x) * 32'(ins.stride) + 32'(po_kx)) * 32'(ins.in_c) + 32'(po_n);
    po_waddr = 32'(ins.oa_base) + 32'(po_p) * 32'(ins.in_c) + 32'(po_n);
  end

  // ---------------------------------------------------------------- static outputs
  assign busy        = (state != S_IDLE);
  assign im_rd_addr  = pc;
  assign q_qmul      = ins.qmul;
  assign q_qshift    = ins.qshift;
  assign q_relu      = ins.relu;
  assign q_res_en    = ins.res_en;
  assign q_pool_mode = (ins.op == OP_AVGPOOL) ? POOL_AVG :
                       (ins.op == OP_MAXPOOL) ? POOL_MAX : POOL_NONE;
  assign l_theta     = is_pw ? ins.theta : 5'd16;
  assign l_seed      = ins.seed;
  assign s_skip_en   = !is_dw;
  assign c_bcast     = !is_dw;
  assign c_rd_i      = cd_i;
  assign pe_mac_en   = cd_v;
  assign pe_wgt      = p_rdata;
  assign q_b_data    = p_rdata;
  assign q_b_wr      = bd_v;
  assign q_b_idx     = bd_e;
  assign q_in_psum   = pe_rd_data;
  assign q_in_res    = a_rdata;
  assign q_in_ch     = 6'({w_c, w_e});
  assign pe_rd_row   = w_r;
  assign pe_rd_col   = w_c;
  assign pe_rd_idx   = w_e;
  assign q_pool_in   = a_rdata;
  assign s_rd_ptr    = c_ptr;
  // delayed fill write into cache and sparsity engine
  assign c_wr_en     = fd_v;
  assign c_wr_r      = fd_r;
  assign c_wr_i      = fd_i;
  assign c_wr_data   = fd_zero ? '0 : a_rdata;
  assign s_in_valid  = fd_v;
  assign s_in_last   = fd_last;
  assign s_in_i      = fd_i;
  assign s_in_data   = c_wr_data;

  // ---------------------------------------------------------------- combinational strobes
  always_comb begin
    im_rd_en   = 1'b0;
    a_en       = 1'b0;
    a_we       = 1'b0;
    a_addr     = '0;
    a_wdata    = '0;
    p_en       = 1'b0;
    p_addr     = '0;
    s_clr      = 1'b0;
    l_load     = 1'b0;
    l_step     = 1'b0;
    l_row      = 12'(c_row_i);
    pe_clr     = 1'b0;
    q_in_valid = 1'b0;
    q_pool_clr = 1'b0;
    q_pool_en  = 1'b0;
    case (state)
      S_FETCH: im_rd_en = 1'b1;
      S_JOB:   s_clr = 1'b1;
      S_FILL: begin
        a_en   = f_inb;
        a_addr = AAW'(f_addr);
      end
      S_BIAS: begin
        p_en   = 1'b1;
        p_addr = PAW'(32'(ins.b_base) + 32'(grp) * 32'd16 + 32'(b_e));
      end
      S_CLR: begin
        pe_clr = 1'b1;
      end
      S_COMP: begin
        p_en   = 1'b1;
        p_addr = PAW'(c_waddr);
        // the LFSRs hold the indices of the cycle after the weight request
        l_load = (c_s == '0);
        l_step = (c_s != '0);
      end
      S_WB_ADDR: begin
        a_en   = w_valid && ins.res_en;
        a_addr = AAW'(32'(ins.res_base) + w_off);
      end
      S_WB_PPM: q_in_valid = 1'b1;
      S_WB_WR: begin
        a_en    = 1'b1;
        a_we    = 1'b1;
        a_addr  = AAW'(32'(ins.oa_base) + w_off);
        a_wdata = q_out_data;
      end
      S_POOL_CLR: q_pool_clr = 1'b1;
      S_POOL_RD: begin
        a_en   = 1'b1;
        a_addr = AAW'(po_raddr);
      end
      S_POOL_ACC: q_pool_en = 1'b1;
      S_POOL_WR: begin
        a_en    = 1'b1;
        a_we    = 1'b1;
        a_addr  = AAW'(po_waddr);
        a_wdata = q_pool_out;
      end
      default: ;
    endcase
  end

  // ---------------------------------------------------------------- sequencing
  logic fill_last_i;
  logic [3:0] tap_hi;
  assign tap_hi      = is_pw ? 4'd4 : 4'd8;
  assign fill_last_i = (f_tap == tap_hi) && (f_m == ins.in_c - 12'd1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      ins   <= '0;
      pc    <= '0;
      done  <= 1'b0;
      n_tiles <= '0; n_groups <= '0; k_rows <= '0; q_steps <= '0; n_pix <= '0;
      job_p <= '0; job_y <= '0; job_x <= '0;
      for (int r = 0; r < PE_ROWS; r++) begin py[r] <= '0; px[r] <= '0; pv[r] <= 1'b0; end
      f_tap <= '0; f_m <= '0; f_r <= '0; f_i <= '0;
      fd_v <= 1'b0; fd_zero <= 1'b0; fd_last <= 1'b0; fd_r <= '0; fd_i <= '0;
      grp <= '0; c_ptr <= '0; c_tap <= '0; c_s <= '0; cd_v <= 1'b0; cd_i <= '0;
      b_e <= '0; bd_v <= 1'b0; bd_e <= '0;
      w_r <= '0; w_c <= '0; w_e <= '0;
      po_y <= '0; po_x <= '0; po_p <= '0; po_n <= '0; po_ky <= '0; po_kx <= '0;
      stat_mac_cycles <= '0; stat_skipped_rows <= '0; stat_layers <= '0; stat_cycles <= '0;
    end else begin
      done <= 1'b0;
      fd_v <= 1'b0;
      cd_v <= 1'b0;
      bd_v <= 1'b0;
      if (busy) stat_cycles <= stat_cycles + 32'd1;
      if (cd_v) stat_mac_cycles <= stat_mac_cycles + 32'd1;

      case (state)
        S_IDLE: begin
          if (start) begin
            pc <= '0;
            state <= S_FETCH;
            stat_mac_cycles <= '0; stat_skipped_rows <= '0; stat_layers <= '0; stat_cycles <= '0;
          end
        end

        S_FETCH: state <= S_DECODE;

        S_DECODE: begin
          ins      <= im_rd_data;
          n_tiles  <= {4'd0, im_rd_data.out_c[11:4]};
          n_groups <= 10'((10'(im_rd_data.out_c[11:4]) + 10'd3) >> 2);
          k_rows   <= (im_rd_data.op == OP_PW) ? 16'(im_rd_data.in_c) : 16'(im_rd_data.in_c) * 16'd9;
          q_steps  <= (im_rd_data.op == OP_PW) ? 3'(im_rd_data.theta[4:2]) : 3'd4;
          n_pix    <= 16'(im_rd_data.out_h) * 16'(im_rd_data.out_w);
          job_p <= '0; job_y <= '0; job_x <= '0;
          po_y <= '0; po_x <= '0; po_p <= '0; po_n <= '0; po_ky <= '0; po_kx <= '0;
          case (im_rd_data.op)
            OP_END:                state <= S_DONE;
            OP_AVGPOOL, OP_MAXPOOL: state <= S_POOL_CLR;
            default:               state <= S_JOB;
          endcase
        end

        // ---- convolution-type layers
        S_JOB: begin
          // latch the pixels of this job and start the fill
          begin
            logic [7:0] y, x;
            y = job_y; x = job_x;
            for (int r = 0; r < PE_ROWS; r++) begin
              py[r] <= y; px[r] <= x;
              pv[r] <= (job_p + 16'(r)) < n_pix;
              x = x + 8'd1;
              if (x == ins.out_w) begin x = 8'd0; y = y + 8'd1; end
            end
          end
          f_tap <= is_pw ? 4'd4 : 4'd0;
          f_m <= '0; f_r <= '0; f_i <= '0;
          state <= S_FILL;
        end

        S_FILL: begin
          fd_v    <= 1'b1;
          fd_zero <= !f_inb;
          fd_r    <= f_r;
          fd_i    <= f_i;
          fd_last <= (f_r == 2'(PE_ROWS - 1));
          if (f_r != 2'(PE_ROWS - 1)) begin
            f_r <= f_r + 2'd1;
          end else begin
            f_r <= '0;
            f_i <= f_i + 1'b1;
            if (fill_last_i) begin
              state <= S_FILL_DRAIN;
            end else if (f_m == ins.in_c - 12'd1) begin
              f_m   <= '0;
              f_tap <= f_tap + 4'd1;
            end else begin
              f_m <= f_m + 12'd1;
            end
          end
        end

        S_FILL_DRAIN: begin
          grp   <= '0;
          b_e   <= '0;
          state <= S_BIAS;
        end

        S_BIAS: begin
          bd_v <= 1'b1;
          bd_e <= b_e[3:0];
          if (b_e == 5'd15) state <= S_BIAS_DRAIN;
          b_e <= b_e + 5'd1;
        end

        S_BIAS_DRAIN: state <= S_CLR;

        S_CLR: begin
          stat_skipped_rows <= (grp == '0) ? stat_skipped_rows + 32'(s_skipped) : stat_skipped_rows;
          c_ptr <= '0; c_tap <= '0; c_s <= '0;
          if (!is_dw && s_count == '0) state <= S_COMP_DRAIN;
          else                         state <= S_COMP;
        end

        S_COMP: begin
          cd_v <= 1'b1;
          cd_i <= is_dw ? IW'(32'(c_tap) * 32'(ins.in_c) + 32'(grp) * 32'd64 + 32'(c_s) * 32'd4)
                        : c_row_i;
          if (c_s != q_steps - 3'd1) begin
            c_s <= c_s + 3'd1;
          end else begin
            c_s <= '0;
            if (is_dw) begin
              if (c_tap == 4'd8) state <= S_COMP_DRAIN;
              c_tap <= c_tap + 4'd1;
            end else begin
              if (c_ptr == s_count - 1'b1) state <= S_COMP_DRAIN;
              c_ptr <= c_ptr + 1'b1;
            end
          end
        end

        S_COMP_DRAIN: begin
          if (!cd_v) begin
            w_r <= '0; w_c <= '0; w_e <= '0;
            state <= S_WB_ADDR;
          end
        end

        S_WB_ADDR: begin
          if (w_valid) state <= S_WB_PPM;
          else begin
            // validity depends only on (row, column): skip the whole RF
            w_e <= '0;
            if (w_c != 2'(PE_COLS - 1)) w_c <= w_c + 2'd1;
            else begin
              w_c <= '0;
              if (w_r != 2'(PE_ROWS - 1)) w_r <= w_r + 2'd1;
              else state <= S_NEXT_GROUP;
            end
          end
        end

        S_WB_PPM: state <= S_WB_WR;

        S_WB_WR: begin
          state <= S_WB_ADDR;
          if (w_e != 4'd15) begin
            // next entry of the same RF is valid too; without a residual
            // there is nothing to read, so go straight to the PPM
            w_e <= w_e + 4'd1;
            if (!ins.res_en) state <= S_WB_PPM;
          end else begin
            w_e <= '0;
            if (w_c != 2'(PE_COLS - 1)) w_c <= w_c + 2'd1;
            else begin
              w_c <= '0;
              if (w_r != 2'(PE_ROWS - 1)) w_r <= w_r + 2'd1;
              else state <= S_NEXT_GROUP;
            end
          end
        end

        S_NEXT_GROUP: begin
          if (grp != n_groups - 10'd1) begin
            grp   <= grp + 10'd1;
            b_e   <= '0;
            state <= S_BIAS;
          end else if (job_p + 16'(PE_ROWS) < n_pix) begin
            job_p <= job_p + 16'(PE_ROWS);
            job_y <= nxt_y;
            job_x <= nxt_x;
            state <= S_JOB;
          end else begin
            stat_layers <= stat_layers + 32'd1;
            pc    <= pc + 1'b1;
            state <= S_FETCH;
          end
        end

        // ---- pooling layers
        S_POOL_CLR: begin
          po_ky <= '0; po_kx <= '0;
          state <= S_POOL_RD;
        end

        S_POOL_RD: state <= S_POOL_ACC;

        S_POOL_ACC: begin
          state <= S_POOL_RD;
          if (po_kx != ins.pool_kw - 4'd1) po_kx <= po_kx + 4'd1;
          else begin
            po_kx <= '0;
            if (po_ky != ins.pool_kh - 4'd1) po_ky <= po_ky + 4'd1;
            else state <= S_POOL_WR;
          end
        end

        S_POOL_WR: begin
          state <= S_POOL_CLR;
          if (po_n != ins.in_c - 12'd1) po_n <= po_n + 12'd1;
          else begin
            po_n <= '0;
            po_p <= po_p + 16'd1;
            if (po_x != ins.out_w - 8'd1) po_x <= po_x + 8'd1;
            else begin
              po_x <= '0;
              if (po_y != ins.out_h - 8'd1) po_y <= po_y + 8'd1;
              else begin
                stat_layers <= stat_layers + 32'd1;
                pc    <= pc + 1'b1;
                state <= S_FETCH;
              end
            end
          end
        end

        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end

        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------------------------------------------------------- program rules
  // Layer shapes this controller relies on.
  always_ff @(posedge clk) begin
    if (state == S_WB_WR) begin
      assert (q_out_valid) else $error("post-processing result missing at write-back");
    end
    if (state == S_JOB) begin
      assert (ins.out_c[3:0] == 4'd0)
        else $error("output channels must be a multiple of 16");
      assert (32'(k_rows) <= MAX_I || is_dw)
        else $error("reduction rows exceed the cache");
      assert (!is_dw || (32'(ins.in_c) * 9 <= MAX_I && ins.in_c == ins.out_c))
        else $error("depthwise tile exceeds the cache");
      assert (!is_pw || ins.theta inside {5'd4, 5'd8, 5'd12, 5'd16})
        else $error("theta must be 4, 8, 12 or 16");
    end
  end

endmodule
