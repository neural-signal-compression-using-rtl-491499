// tb_raman_ase: checks the activation sparsity engine. Tile rows of three
// bytes are streamed in with random zero patterns; the engine must list
// exactly the indices of rows that hold a non-zero byte, in order, count the
// dropped rows, and keep every row when skipping is disabled.
//
// Interface and timing: no ports; a 10-time-unit clock drives the device
// from its rising edge, inputs change on the falling edge, and the test
// ends with one line `TB_RESULT checks=N failures=M` (a watchdog stops a
// hung run and counts a failure).
// The engine's 3-byte row width and per-row skip follow the paper's
// activation sparsity engine; the list-then-replay interface is this design's.
module tb_raman_ase;
  import raman_pkg::*;

  localparam int MAX_I = 64;
  localparam int IW = $clog2(MAX_I + 1);

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic clr, skip_en, in_valid, in_last;
  logic [IW-1:0] in_i, rd_ptr, rd_i, count, skipped;
  logic [ACT_W-1:0] in_data;

  raman_ase #(.MAX_I(MAX_I)) dut (
    .clk(clk), .rst_n(rst_n), .clr(clr), .skip_en(skip_en), .in_valid(in_valid),
    .in_last(in_last), .in_i(in_i), .in_data(in_data), .rd_ptr(rd_ptr), .rd_i(rd_i),
    .count(count), .skipped(skipped));

  int checks = 0, failures = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_list[$];
    int nskip;
    clr = 0; skip_en = 1; in_valid = 0; in_last = 0; in_i = '0; in_data = '0; rd_ptr = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 6; round++) begin
      int rows;
      skip_en = (round != 5);
      rows = $urandom_range(1, MAX_I);
      @(negedge clk); clr = 1;
      @(negedge clk); clr = 0;
      exp_list.delete();
      nskip = 0;
      for (int i = 0; i < rows; i++) begin
        bit any;
        any = 0;
        for (int r = 0; r < 3; r++) begin
          in_valid = 1; in_i = IW'(i); in_last = (r == 2);
          in_data = ($urandom_range(0, 3) == 0) ? 8'($urandom_range(1, 255)) : 8'd0;
          if (in_data != 0) any = 1;
          @(negedge clk);
        end
        if (any || !skip_en) exp_list.push_back(i); else nskip++;
      end
      in_valid = 0;
      @(negedge clk);
      checks++;
      if (int'(count) != exp_list.size() || int'(skipped) != nskip) begin
        failures++;
        $display("round %0d: count %0d skipped %0d, expected %0d %0d", round, count, skipped,
                 exp_list.size(), nskip);
      end
      foreach (exp_list[p]) begin
        rd_ptr = IW'(p);
        #1;
        checks++;
        if (int'(rd_i) != exp_list[p]) begin
          failures++;
          $display("list[%0d] = %0d expected %0d", p, rd_i, exp_list[p]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
