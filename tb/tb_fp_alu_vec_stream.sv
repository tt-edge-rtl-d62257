// Testbench of fp_alu_vec_stream: streams random-length vectors out of a
// stalling memory model while the consumer takes words at random, and checks
// every word, the order, the length and that busy ends with the vector.
// Between vectors it stores single words and checks that the word reaches
// memory and that wr_done pulses exactly once.
module tb_fp_alu_vec_stream;
  import tt_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // reset edge before the first clock edge
  always #5 clk = ~clk;

  logic start = 0, busy, s_valid, s_ready = 0;
  addr_t addr = 0;
  dim_t len = 0;
  logic [31:0] s_data, wr_data = 0;
  logic wr_start = 0, wr_done;
  addr_t wr_addr = 0;
  mem_req_t mreq;
  mem_rsp_t mrsp;
  int checks = 0, failures = 0;

  fp_alu_vec_stream dut (.*);
  tb_mem_model #(.WORDS(1024)) u_mem (.clk, .mreq, .mrsp);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 1024; k++) u_mem.mem[k] = 32'hA000_0000 + k * 7;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      int n, base, got, cyc;
      n = 1 + int'($urandom_range(40));
      base = int'($urandom_range(900));
      @(negedge clk); start = 1; addr = addr_t'(base); len = dim_t'(n);
      @(negedge clk); start = 0;
      got = 0; cyc = 0;
      while (got < n && cyc < 2000) begin
        s_ready = ($urandom_range(2) != 0) || (t % 4 == 0);
        #1;
        if (s_valid && s_ready) begin
          checks++;
          if (s_data !== u_mem.mem[base + got]) begin
            failures++; $display("FAIL vec %0d word %0d: %h", t, got, s_data);
          end
          got++;
        end
        @(negedge clk); cyc++;
      end
      s_ready = 0;
      checks++;
      if (got != n) begin failures++; $display("FAIL vec %0d got %0d of %0d", t, got, n); end
      @(negedge clk);
      checks++;
      if (busy || s_valid) begin failures++; $display("FAIL vec %0d: extra data or still busy", t); end
      // one store
      begin
        int a, dn;
        logic [31:0] d;
        a = 960 + int'($urandom_range(63));
        d = $urandom;
        @(negedge clk); wr_start = 1; wr_addr = addr_t'(a); wr_data = d;
        @(negedge clk); wr_start = 0;
        dn = 0;
        repeat (20) begin
          #1; if (wr_done) dn++;
          @(negedge clk);
        end
        checks++;
        if (dn != 1 || u_mem.mem[a] != d) begin
          failures++; $display("FAIL store %0d: %0d done pulses, mem %h expected %h", t, dn, u_mem.mem[a], d);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
