// tb_raman_cache: fills the activation cache with random bytes and checks
// both read modes against a model: broadcast (every MAC of a PE row reads the
// same tile entry) and per-MAC (MAC k of column c reads entry i + 16c + k),
// with reads past the end returning zero.
//
// Interface and timing: no ports; a 10-time-unit clock drives the device
// from its rising edge, inputs change on the falling edge, and the test
// ends with one line `TB_RESULT checks=N failures=M` (a watchdog stops a
// hung run and counts a failure).
// The cache follows the paper's activation cache; the tile layout, its two
// read modes and zero-fill past the end are this design's own choices.
module tb_raman_cache;
  import raman_pkg::*;

  localparam int MAX_I = 96;
  localparam int IW = $clog2(MAX_I + 1);

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic wr_en, bcast;
  logic [1:0] wr_r;
  logic [IW-1:0] wr_i, rd_i;
  logic [ACT_W-1:0] wr_data;
  logic [PE_ROWS-1:0][PE_COLS-1:0][NMAC-1:0][ACT_W-1:0] act;

  raman_cache #(.MAX_I(MAX_I)) dut (.clk(clk), .wr_en(wr_en), .wr_r(wr_r), .wr_i(wr_i),
                                    .wr_data(wr_data), .bcast(bcast), .rd_i(rd_i), .act(act));

  int checks = 0, failures = 0;
  byte model [PE_ROWS][MAX_I];

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; bcast = 1; wr_r = '0; wr_i = '0; wr_data = '0; rd_i = '0;
    for (int r = 0; r < PE_ROWS; r++)
      for (int i = 0; i < MAX_I; i++) begin
        @(negedge clk);
        wr_en = 1; wr_r = 2'(r); wr_i = IW'(i); wr_data = 8'($urandom_range(0, 255));
        model[r][i] = byte'(wr_data);
      end
    @(negedge clk); wr_en = 0;
    for (int mode = 0; mode < 2; mode++) begin
      bcast = (mode == 0);
      for (int i = 0; i < MAX_I; i++) begin
        rd_i = IW'(i);
        #1;
        for (int r = 0; r < PE_ROWS; r++)
          for (int c = 0; c < PE_COLS; c++)
            for (int k = 0; k < NMAC; k++) begin
              int a;
              byte e;
              a = bcast ? i : i + 16 * c + k;
              e = (a < MAX_I) ? model[r][a] : 8'sd0;
              checks++;
              if (byte'(act[r][c][k]) != e) begin
                failures++;
                if (failures < 10) $display("mode %0d i %0d (%0d,%0d,%0d): %0d expected %0d",
                                            mode, i, r, c, k, act[r][c][k], e);
              end
            end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
