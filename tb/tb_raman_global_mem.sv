// tb_raman_global_mem: checks the global memory at its full default size.
// Random writes through both activation ports and both parameter ports are
// mirrored in a model; reads check the one-cycle latency, the priority of the
// external port, the four-bank parallel read, and that addresses past the
// activation memory are ignored.
//
// Interface and timing: no ports; a 10-time-unit clock drives the device
// from its rising edge, inputs change on the falling edge, and the test
// ends with one line `TB_RESULT checks=N failures=M` (a watchdog stops a
// hung run and counts a failure).
// Memory sizes follow the paper's on-chip SRAM budget; the port layout and
// priority rules are this design's own.
module tb_raman_global_mem;
  import raman_pkg::*;

  localparam int ACT_BYTES = 49152;
  localparam int PBANK_WORDS = 640;
  localparam int AAW = $clog2(ACT_BYTES);
  localparam int PAW = $clog2(PBANK_WORDS);

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic a_en, a_we, xa_en, xa_we, p_en, xp_en, xp_we;
  logic [AAW-1:0] a_addr, xa_addr;
  logic [ACT_W-1:0] a_wdata, a_rdata, xa_wdata;
  logic [PAW-1:0] p_addr, xp_addr;
  logic [1:0] xp_bank;
  logic [PE_COLS-1:0][PWORD_W-1:0] p_rdata;
  logic [PWORD_W-1:0] xp_wdata, xp_rdata;

  raman_global_mem dut (
    .clk(clk), .a_en(a_en), .a_we(a_we), .a_addr(a_addr), .a_wdata(a_wdata), .a_rdata(a_rdata),
    .xa_en(xa_en), .xa_we(xa_we), .xa_addr(xa_addr), .xa_wdata(xa_wdata),
    .p_en(p_en), .p_addr(p_addr), .p_rdata(p_rdata),
    .xp_en(xp_en), .xp_we(xp_we), .xp_bank(xp_bank), .xp_addr(xp_addr), .xp_wdata(xp_wdata),
    .xp_rdata(xp_rdata));

  int checks = 0, failures = 0;
  byte unsigned am [int];
  int unsigned pm [int];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic idle();
    a_en = 0; a_we = 0; xa_en = 0; xa_we = 0; p_en = 0; xp_en = 0; xp_we = 0;
  endtask

  initial begin
    int a, b, w;
    byte unsigned v;
    idle();
    a_addr = '0; xa_addr = '0; a_wdata = '0; xa_wdata = '0; p_addr = '0; xp_addr = '0;
    xp_bank = '0; xp_wdata = '0;
    // activation writes: core and external ports, including the two ends
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      idle();
      a = (t < 2) ? (t == 0 ? 0 : ACT_BYTES - 1) : $urandom_range(0, ACT_BYTES - 1);
      v = 8'($urandom_range(0, 255));
      if (t % 2) begin xa_en = 1; xa_we = 1; xa_addr = AAW'(a); xa_wdata = v; end
      else begin a_en = 1; a_we = 1; a_addr = AAW'(a); a_wdata = v; end
      am[a] = v;
    end
    // both ports writing in the same cycle: external wins
    @(negedge clk);
    idle();
    a_en = 1; a_we = 1; a_addr = AAW'(100); a_wdata = 8'h11;
    xa_en = 1; xa_we = 1; xa_addr = AAW'(100); xa_wdata = 8'h22;
    am[100] = 8'h22;
    // out-of-range write is dropped
    @(negedge clk);
    idle();
    a_en = 1; a_we = 1; a_addr = AAW'(ACT_BYTES); a_wdata = 8'h5a;
    // reads
    foreach (am[k]) begin
      @(negedge clk);
      idle();
      if (k % 3 == 0) begin xa_en = 1; xa_addr = AAW'(k); end
      else begin a_en = 1; a_addr = AAW'(k); end
      @(negedge clk);
      idle();
      checks++;
      if (a_rdata !== am[k]) begin
        failures++;
        if (failures < 10) $display("act[%0d] = %h expected %h", k, a_rdata, am[k]);
      end
    end
    // parameter writes through the external port
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      idle();
      b = $urandom_range(0, 3);
      w = (t < 4) ? PBANK_WORDS - 1 : $urandom_range(0, PBANK_WORDS - 1);
      if (t < 4) b = t;
      xp_en = 1; xp_we = 1; xp_bank = 2'(b); xp_addr = PAW'(w); xp_wdata = $urandom();
      pm[b * PBANK_WORDS + w] = xp_wdata;
    end
    // parallel core reads of all banks
    for (int t = 0; t < PBANK_WORDS; t++) begin
      @(negedge clk);
      idle();
      p_en = 1; p_addr = PAW'(t);
      @(negedge clk);
      idle();
      for (int c = 0; c < PE_COLS; c++)
        if (pm.exists(c * PBANK_WORDS + t)) begin
          checks++;
          if (p_rdata[c] !== pm[c * PBANK_WORDS + t]) begin
            failures++;
            if (failures < 10) $display("bank %0d word %0d = %h expected %h", c, t, p_rdata[c],
                                        pm[c * PBANK_WORDS + t]);
          end
        end
    end
    // external single-bank reads
    foreach (pm[k]) begin
      @(negedge clk);
      idle();
      xp_en = 1; xp_bank = 2'(k / PBANK_WORDS); xp_addr = PAW'(k % PBANK_WORDS);
      @(negedge clk);
      idle();
      checks++;
      if (xp_rdata !== pm[k]) begin
        failures++;
        if (failures < 10) $display("xp %0d = %h expected %h", k, xp_rdata, pm[k]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
