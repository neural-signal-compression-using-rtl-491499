// tb_raman_inst_mem: writes random layer instructions to every entry of the
// instruction memory and reads them back, checking the one-cycle read and
// that a read is held while rd_en is low.
//
// Interface and timing: no ports; a 10-time-unit clock drives the device
// from its rising edge, inputs change on the falling edge, and the test
// ends with one line `TB_RESULT checks=N failures=M` (a watchdog stops a
// hung run and counts a failure).
// The instruction memory follows the paper's layer-by-layer programming; the
// entry count and instruction fields are this design's own.
module tb_raman_inst_mem;
  import raman_pkg::*;

  localparam int DEPTH = 32;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic wr_en, rd_en;
  logic [4:0] wr_addr, rd_addr;
  instr_t wr_data, rd_data;
  instr_t model [DEPTH];

  raman_inst_mem dut (.clk(clk), .wr_en(wr_en), .wr_addr(wr_addr), .wr_data(wr_data),
                      .rd_en(rd_en), .rd_addr(rd_addr), .rd_data(rd_data));

  int checks = 0, failures = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic instr_t rnd();
    logic [$bits(instr_t)-1:0] v;
    for (int i = 0; i < $bits(instr_t); i++) v[i] = 1'($urandom_range(0, 1));
    return instr_t'(v);
  endfunction

  initial begin
    wr_en = 0; rd_en = 0; wr_addr = '0; rd_addr = '0; wr_data = '0;
    for (int pass = 0; pass < 3; pass++) begin
      for (int i = 0; i < DEPTH; i++) begin
        @(negedge clk);
        wr_en = 1; wr_addr = 5'(i); wr_data = rnd();
        model[i] = wr_data;
      end
      @(negedge clk);
      wr_en = 0;
      for (int i = DEPTH - 1; i >= 0; i--) begin
        rd_en = 1; rd_addr = 5'(i);
        @(negedge clk);
        rd_en = 0; rd_addr = 5'(i ^ 1);
        checks++;
        if (rd_data !== model[i]) begin failures++; $display("entry %0d wrong", i); end
        @(negedge clk);
        checks++;
        if (rd_data !== model[i]) begin failures++; $display("entry %0d not held", i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
