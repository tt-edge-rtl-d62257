// Testbench of the scratchpad: random writes over the whole default-size
// array, then reads checked against a shadow copy, including the one-cycle
// read latency and that a write does not change rdata.
module tb_spm;
  import tt_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic en = 0, we = 0;
  addr_t addr = 0;
  logic [31:0] wdata = 0, rdata;
  int checks = 0, failures = 0;
  logic [31:0] shadow [int];

  spm dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a;
    for (int t = 0; t < 3000; t++) begin
      a = (t < 8) ? ((t < 4) ? t : 81920 - 8 + t) : int'($urandom_range(81919));
      @(negedge clk); en = 1; we = 1; addr = addr_t'(a); wdata = $urandom; shadow[a] = wdata;
    end
    @(negedge clk); en = 0; we = 0;
    foreach (shadow[k]) begin
      logic [31:0] prev;
      @(negedge clk); en = 1; we = 0; addr = addr_t'(k);
      @(negedge clk); en = 1; we = 1; addr = addr_t'(k); wdata = ~shadow[k]; prev = rdata;
      checks++;
      if (prev !== shadow[k]) begin failures++; $display("FAIL read %0d: %h", k, prev); end
      @(negedge clk); en = 0; we = 0;
      checks++;
      if (rdata !== prev) begin failures++; $display("FAIL rdata changed by a write"); end
      shadow[k] = ~shadow[k];
    end
    @(negedge clk); en = 1; we = 0; addr = 0;
    @(negedge clk); en = 0;
    checks++;
    if (rdata !== shadow[0]) begin failures++; $display("FAIL rewrite of word 0"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
