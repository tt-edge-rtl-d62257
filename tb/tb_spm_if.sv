// Testbench of the SPM arbiter: five clients issue random reads and writes at
// random times to a shared memory. Checks that exactly the lowest-numbered
// requesting client is granted each cycle, that read data reach only the
// client that was granted, one cycle later, and that every read returns the
// last value written (checked against a shadow memory).
module tb_spm_if;
  import tt_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // reset edge before the first clock edge
  always #5 clk = ~clk;

  localparam int NC = 5;
  mem_req_t creq [NC];
  mem_rsp_t crsp [NC];
  logic en, we;
  addr_t addr;
  logic [31:0] wdata, rdata;
  logic [31:0] mem [64];
  logic [31:0] shadow [64];
  int checks = 0, failures = 0, conflicts = 0;

  spm_if dut (.*);   // default NCLI = 5 = NC

  always @(posedge clk) if (en) begin
    if (we) mem[addr] <= wdata; else rdata <= mem[addr];
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // per-client expected read value (client-side view of the shadow memory)
  logic [31:0] expv [NC];
  logic        expr [NC];
  int          last = -1;

  initial begin
    for (int k = 0; k < 64; k++) begin mem[k] = 32'(k); shadow[k] = 32'(k); end
    for (int c = 0; c < NC; c++) begin creq[c] = '0; expr[c] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      int win, nreq;
      @(negedge clk);
      // the client granted at the last rising edge drops its request
      if (last >= 0) creq[last].req = 0;
      last = -1;
      // read data of the previous cycle's grant
      for (int c = 0; c < NC; c++) begin
        checks++;
        if (crsp[c].rvalid != expr[c] || (expr[c] && crsp[c].rdata != expv[c])) begin
          failures++; $display("FAIL client %0d read return", c);
        end
        expr[c] = 0;
      end
      // new random requests (held ones stay)
      for (int c = 0; c < NC; c++)
        if (!creq[c].req && $urandom_range(2) == 0)
          creq[c] = '{req: 1'b1, we: 1'($urandom_range(1)), addr: addr_t'($urandom_range(63)), wdata: $urandom};
      #1;
      win = -1; nreq = 0;
      for (int c = NC - 1; c >= 0; c--) if (creq[c].req) begin win = c; nreq++; end
      if (nreq > 1) conflicts++;
      for (int c = 0; c < NC; c++) begin
        checks++;
        if (crsp[c].gnt != (c == win)) begin failures++; $display("FAIL grant client %0d", c); end
      end
      if (win >= 0) begin
        if (creq[win].we) shadow[creq[win].addr] = creq[win].wdata;
        else begin expr[win] = 1; expv[win] = shadow[creq[win].addr]; end
        last = win;
      end
    end
    checks++;
    if (conflicts == 0) begin failures++; $display("FAIL no conflicts"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
