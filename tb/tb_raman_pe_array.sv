// tb_raman_pe_array: checks that the 3x4 array routes column weights, per-PE
// activations and common indices to the right PEs, and that the read-out
// multiplexer returns each PE's register file, against a model of all 12 PEs.
//
// Interface and timing: no ports; a 10-time-unit clock drives the device
// from its rising edge, inputs change on the falling edge, and the test
// ends with one line `TB_RESULT checks=N failures=M` (a watchdog stops a
// hung run and counts a failure).
// The 3 x 4 array follows the paper; the bus sharing (weights per column,
// activations per PE) and the read-out multiplexer are this design's own.
module tb_raman_pe_array;
  import raman_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic clr, mac_en;
  logic signed [PE_ROWS-1:0][PE_COLS-1:0][NMAC-1:0][ACT_W-1:0] act;
  logic signed [PE_COLS-1:0][NMAC-1:0][WGT_W-1:0] wgt;
  logic [NMAC-1:0][IDX_W-1:0] idx;
  logic [1:0] rd_row, rd_col;
  logic [IDX_W-1:0] rd_idx;
  logic signed [PSUM_W-1:0] rd_data;

  raman_pe_array dut (.clk(clk), .rst_n(rst_n), .clr(clr), .mac_en(mac_en), .act(act), .wgt(wgt),
                      .idx(idx), .rd_row(rd_row), .rd_col(rd_col), .rd_idx(rd_idx), .rd_data(rd_data));

  int checks = 0, failures = 0;
  int model [PE_ROWS][PE_COLS][RF_DEPTH];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clr = 0; mac_en = 0; act = '0; wgt = '0; idx = '0; rd_row = '0; rd_col = '0; rd_idx = '0;
    foreach (model[r, c, e]) model[r][c][e] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 2; round++) begin
      @(negedge clk); clr = 1;
      foreach (model[r, c, e]) model[r][c][e] = 0;
      @(negedge clk); clr = 0;
      for (int n = 0; n < 100; n++) begin
        mac_en = 1;
        foreach (act[r, c, k]) act[r][c][k] = 8'($urandom_range(0, 255));
        foreach (wgt[c, k]) wgt[c][k] = 8'($urandom_range(0, 255));
        for (int k = 0; k < NMAC; k++) idx[k] = 4'($urandom_range(0, 15));
        for (int r = 0; r < PE_ROWS; r++)
          for (int c = 0; c < PE_COLS; c++)
            for (int k = 0; k < NMAC; k++)
              model[r][c][idx[k]] += int'($signed(act[r][c][k])) * int'($signed(wgt[c][k]));
        @(negedge clk);
      end
      mac_en = 0;
      for (int r = 0; r < PE_ROWS; r++)
        for (int c = 0; c < PE_COLS; c++)
          for (int e = 0; e < RF_DEPTH; e++) begin
            rd_row = 2'(r); rd_col = 2'(c); rd_idx = 4'(e);
            #1;
            checks++;
            if (rd_data != PSUM_W'(model[r][c][e])) begin
              failures++;
              if (failures < 10) $display("PE(%0d,%0d)[%0d] = %0d expected %0d", r, c, e, rd_data, model[r][c][e]);
            end
          end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
