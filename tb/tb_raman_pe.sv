// tb_raman_pe: checks the 4-MAC processing element against a model register
// file: random signed products accumulated at random indices (including two
// MACs on one entry), clearing, and the one-cycle read-back.
//
// Interface and timing: no ports; a 10-time-unit clock drives the device
// from its rising edge, inputs change on the falling edge, and the test
// ends with one line `TB_RESULT checks=N failures=M` (a watchdog stops a
// hung run and counts a failure).
// The 4 MACs and 16-entry psum register file follow the paper; the 24-bit
// psum width and the index-addressed accumulate are this design's own.
module tb_raman_pe;
  import raman_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic clr, mac_en;
  logic signed [NMAC-1:0][ACT_W-1:0] act;
  logic signed [NMAC-1:0][WGT_W-1:0] wgt;
  logic [NMAC-1:0][IDX_W-1:0] idx;
  logic [IDX_W-1:0] rd_idx;
  logic signed [PSUM_W-1:0] rd_data;

  raman_pe dut (.clk(clk), .rst_n(rst_n), .clr(clr), .mac_en(mac_en), .act(act), .wgt(wgt),
                .idx(idx), .rd_idx(rd_idx), .rd_data(rd_data));

  int checks = 0, failures = 0;
  int model [RF_DEPTH];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare();
    for (int e = 0; e < RF_DEPTH; e++) begin
      rd_idx = 4'(e);
      #1;
      checks++;
      if (rd_data != PSUM_W'(model[e])) begin
        failures++;
        $display("rf[%0d] = %0d expected %0d", e, rd_data, model[e]);
      end
    end
  endtask

  initial begin
    clr = 0; mac_en = 0; act = '0; wgt = '0; idx = '0; rd_idx = '0;
    foreach (model[e]) model[e] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    compare();
    for (int round = 0; round < 4; round++) begin
      for (int n = 0; n < 200; n++) begin
        @(negedge clk);
        mac_en = ($urandom_range(0, 3) != 0);
        for (int k = 0; k < NMAC; k++) begin
          act[k] = 8'($urandom_range(0, 255));
          wgt[k] = 8'($urandom_range(0, 255));
          idx[k] = 4'($urandom_range(0, 15));
        end
        if (mac_en)
          for (int k = 0; k < NMAC; k++)
            model[idx[k]] += int'($signed(act[k])) * int'($signed(wgt[k]));
      end
      @(negedge clk); mac_en = 0;
      compare();
      // clear wins over a simultaneous MAC
      @(negedge clk); clr = 1; mac_en = 1;
      foreach (model[e]) model[e] = 0;
      @(negedge clk); clr = 0; mac_en = 0;
      compare();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
