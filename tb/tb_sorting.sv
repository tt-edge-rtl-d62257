// Testbench of the SORTING module: random singular-value vectors (with ties
// and an already sorted case) and random U and V^T are sorted on a stalling
// memory model. The sorted values, the reordered U columns and V^T rows and
// the exchange counter are compared with a reference bubble sort.
module tb_sorting;
  import tt_pkg::*;
  import tb_fp_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // reset edge before the first clock edge
  always #5 clk = ~clk;

  logic start = 0, busy, done;
  addr_t sig_addr = 0, u_src = 100, u_dst = 700, u_ld = 0, v_src = 1300, v_dst = 1900, v_ld = 0;
  dim_t n = 0, u_rows = 0, v_cols = 0;
  mem_req_t mreq;
  mem_rsp_t mrsp;
  logic [31:0] swaps;
  int checks = 0, failures = 0;

  sorting dut (.*);
  tb_mem_model #(.WORDS(2600)) u_mem (.clk, .mreq, .mrsp);

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] sig [64];
    logic [31:0] u0 [2600];
    int perm [64];
    int nsw, sw0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 10; t++) begin
      int nn, rows, cols;
      nn = (t == 0) ? 64 : 1 + int'($urandom_range(20));
      rows = 1 + int'($urandom_range(8)); cols = 1 + int'($urandom_range(8));
      n = dim_t'(nn); u_rows = dim_t'(rows); v_cols = dim_t'(cols);
      u_ld = addr_t'(nn + 1); v_ld = addr_t'(cols);
      for (int k = 0; k < nn; k++) begin
        sig[k] = (t == 3) ? real2fp(100.0 - k) : real2fp(real'($urandom_range(12)) * 0.75);
        u_mem.mem[k] = sig[k];
        perm[k] = k;
      end
      for (int k = 100; k < 2600; k++) begin u_mem.mem[k] = $urandom; u0[k] = u_mem.mem[k]; end
      // reference bubble sort, descending, stable
      nsw = 0;
      for (int p = 0; p < nn - 1; p++)
        for (int k = 0; k < nn - 1 - p; k++)
          if (fp2real(sig[perm[k]]) < fp2real(sig[perm[k + 1]])) begin
            int x; x = perm[k]; perm[k] = perm[k + 1]; perm[k + 1] = x; nsw++;
          end
      sw0 = int'(swaps);
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      for (int k = 0; k < nn; k++) begin
        checks++;
        if (u_mem.mem[k] != sig[perm[k]]) begin failures++; $display("FAIL test %0d sigma[%0d]", t, k); end
      end
      for (int r = 0; r < rows; r++)
        for (int c = 0; c < nn; c++) begin
          checks++;
          if (u_mem.mem[700 + r * (nn + 1) + c] != u0[100 + r * (nn + 1) + perm[c]]) begin
            failures++; $display("FAIL test %0d U[%0d][%0d]", t, r, c);
          end
        end
      for (int r = 0; r < nn; r++)
        for (int c = 0; c < cols; c++) begin
          checks++;
          if (u_mem.mem[1900 + r * cols + c] != u0[1300 + perm[r] * cols + c]) begin
            failures++; $display("FAIL test %0d Vt[%0d][%0d]", t, r, c);
          end
        end
      checks++;
      if (int'(swaps) - sw0 != nsw) begin failures++; $display("FAIL test %0d swaps %0d expected %0d", t, int'(swaps) - sw0, nsw); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
