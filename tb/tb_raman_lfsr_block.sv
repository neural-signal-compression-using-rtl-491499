// tb_raman_lfsr_block: checks the pruned-weight index generator.
//
// For every pruning density (THETA = 4, 8, 12 and dense 16), several seeds
// and a range of tile rows (including rows past 15 and repeated rows), the
// generated indices are compared with a table of the 15-state sequence of
// x^4 + x^3 + 1 built here. Each tile must hold THETA distinct indices, `last`
// must mark the final step of each tile, and for pruned densities the rows of
// a layer must not all share one pattern.
//
// Interface and timing: no ports; a 10-time-unit clock drives the device
// from its rising edge, inputs change on the falling edge, and the test
// ends with one line `TB_RESULT checks=N failures=M` (a watchdog stops a
// hung run and counts a failure).
// The 4-bit LFSRs and distinct indices per 1 x 16 tile follow the paper; the
// polynomial and the row-dependent start states are this design's own.
module tb_raman_lfsr_block;
  import raman_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic load, step, last;
  logic [4:0] theta;
  logic [3:0] seed;
  logic [11:0] row;
  logic [NMAC-1:0][IDX_W-1:0] idx;

  raman_lfsr_block dut (.clk(clk), .rst_n(rst_n), .load(load), .step(step), .theta(theta),
                        .seed(seed), .row(row), .idx(idx), .last(last));

  int checks = 0, failures = 0;

  function automatic int expect_idx(input int th, input int sd, input int r, input int k,
                                    input int s);
    int seq[15];
    int t, q;
    if (th == 16) return 4 * s + k;
    q = th / 4;
    t = (sd == 0) ? 1 : sd;
    for (int i = 0; i < 15; i++) begin
      seq[i] = t;
      t = ((t << 1) & 14) | (((t >> 3) ^ (t >> 2)) & 1);
    end
    return seq[((r % 15) * q + k * q + s) % 15] - 1;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ths[4] = '{4, 8, 12, 16};
    int rows[8] = '{0, 1, 2, 7, 14, 15, 31, 575};
    int seen, first_seen;
    bit varies;
    load = 0; step = 0; theta = 5'd4; seed = 4'd1; row = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    foreach (ths[ti]) begin
      for (int sd = 0; sd < 16; sd += 3) begin
        varies = 0;
        foreach (rows[ri]) begin
          seen = 0;
          for (int s = 0; s < ths[ti] / 4; s++) begin
            // request cycle: load at the first step of the tile, else step
            theta = 5'(ths[ti]); seed = 4'(sd); row = 12'(rows[ri]);
            load = (s == 0); step = (s != 0);
            @(negedge clk);
            load = 0; step = 0;
            row = 12'($urandom_range(0, 4095));  // must not matter between loads
            #1;
            for (int k = 0; k < NMAC; k++) begin
              checks++;
              if (int'(idx[k]) != expect_idx(ths[ti], sd, rows[ri], k, s)) begin
                failures++;
                $display("theta %0d seed %0d row %0d step %0d mac %0d: idx %0d expected %0d",
                         ths[ti], sd, rows[ri], s, k, idx[k],
                         expect_idx(ths[ti], sd, rows[ri], k, s));
              end
              seen |= (1 << idx[k]);
            end
            checks++;
            if (last != (s == ths[ti] / 4 - 1)) begin failures++; $display("last wrong at step %0d", s); end
          end
          checks++;
          if ($countones(seen) != ths[ti]) begin
            failures++;
            $display("theta %0d: %0d distinct indices", ths[ti], $countones(seen));
          end
          if (ri == 0) first_seen = seen;
          else if (seen != first_seen) varies = 1;
        end
        checks++;
        if (varies != (ths[ti] != 16)) begin
          failures++;
          $display("theta %0d seed %0d: pattern variation across rows %0d", ths[ti], sd, varies);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
