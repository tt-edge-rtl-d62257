// Testbench of the register file: APB writes and reads of every parameter
// register against a shadow copy, read-only result registers, start pulses
// from CTRL (one cycle, correct bit), sticky done flags and their clearing on
// start, busy bits in STATUS, and pslverr for addresses beyond the map.
module tb_reg_file;
  import tt_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // reset edge before the first clock edge
  always #5 clk = ~clk;

  logic psel = 0, penable = 0, pwrite = 0, pready, pslverr;
  logic [11:0] paddr = 0;
  logic [31:0] pwdata = 0, prdata;
  logic [31:0] cfg [NREGS];
  logic start_hbd, start_sort, start_delta, start_trunc;
  logic [2:0] busy = 0, done = 0;
  logic [31:0] delta = 32'h1234_5678, r_k = 7, tiles = 99, swaps = 5, tsteps = 3;
  int checks = 0, failures = 0;
  logic [3:0] seen;

  reg_file dut (.*);

  initial begin
    repeat (100_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // start pulses seen during the last transfer (and the cycle after it)
  always @(posedge clk) seen <= seen | {start_trunc, start_delta, start_sort, start_hbd};

  task automatic apb(input logic w, input int unsigned a, input logic [31:0] d,
                     output logic [31:0] r, output logic err);
    @(negedge clk);
    psel = 1; penable = 0; pwrite = w; paddr = 12'(a); pwdata = d;
    @(negedge clk);
    penable = 1;
    #1;
    r = prdata; err = pslverr;
    check("pready", pready);
    @(negedge clk);
    psel = 0; penable = 0;
  endtask

  initial begin
    logic [31:0] shadow [NREGS];
    logic [31:0] r;
    logic e;
    seen = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // reset values
    for (int i = 2; i < NREGS; i++) begin
      if (i >= R_DELTA && i <= R_TSTEPS) continue;
      apb(0, 4 * i, 0, r, e);
      check("reset value", r == 0 && !e);
    end
    // parameter registers
    for (int rep = 0; rep < 4; rep++) begin
      for (int i = 2; i < NREGS; i++) begin
        shadow[i] = $urandom;
        apb(1, 4 * i, shadow[i], r, e);
        check("write no error", !e);
      end
      for (int i = 2; i < NREGS; i++) begin
        if (i >= R_DELTA && i <= R_TSTEPS) continue;
        apb(0, 4 * i, 0, r, e);
        check($sformatf("read back reg %0d", i), r == shadow[i] && !e);
        check($sformatf("cfg reg %0d", i), cfg[i] == shadow[i]);
      end
    end
    // result registers read the unit outputs, not the written value
    apb(0, 4 * R_DELTA, 0, r, e);  check("delta", r == delta);
    apb(0, 4 * R_RK, 0, r, e);     check("r_k", r == r_k);
    apb(0, 4 * R_TILES, 0, r, e);  check("tiles", r == tiles);
    apb(0, 4 * R_SWAPS, 0, r, e);  check("swaps", r == swaps);
    apb(0, 4 * R_TSTEPS, 0, r, e); check("tsteps", r == tsteps);
    // start pulses, one per CTRL bit
    for (int b = 0; b < 4; b++) begin
      seen = 0;
      apb(1, 4 * R_CTRL, 32'(1) << b, r, e);
      @(negedge clk);
      check($sformatf("start bit %0d", b), seen == 4'(1 << b));
    end
    // a pulse lasts one cycle
    begin
      int cnt = 0;
      fork
        apb(1, 4 * R_CTRL, 32'h1, r, e);
        repeat (6) @(posedge clk) cnt += int'(start_hbd);
      join
      check("start pulse width", cnt == 1);
    end
    // busy and sticky done flags
    for (int b = 0; b < 3; b++) begin
      busy = 3'(1 << b);
      apb(0, 4 * R_STATUS, 0, r, e);
      check("busy bits", r[2:0] == busy && r[3]);
      busy = 0;
      @(negedge clk); done = 3'(1 << b);
      @(negedge clk); done = 0;
      repeat (3) @(negedge clk);
      apb(0, 4 * R_STATUS, 0, r, e);
      check("done flag sticky", r[6:4] == 3'(1 << b) && !r[3]);
      apb(1, 4 * R_CTRL, (b == 2) ? 32'h8 : 32'(1) << b, r, e);
      apb(0, 4 * R_STATUS, 0, r, e);
      check("done flag cleared by start", r[6:4] == 0);
    end
    // STATUS is not writable
    apb(1, 4 * R_STATUS, 32'hFFFF_FFFF, r, e);
    apb(0, 4 * R_STATUS, 0, r, e);
    check("status read-only", r == 0);
    // out of range
    for (int i = NREGS; i < NREGS + 20; i++) begin
      apb($urandom_range(1), 4 * i, $urandom, r, e);
      check("pslverr", e);
    end
    apb(0, 4 * R_A_ADDR, 0, r, e);
    check("no corruption", r == shadow[R_A_ADDR] && !e);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
