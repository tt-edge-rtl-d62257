// Testbench of the GEMM accelerator block engine: random block sizes up to
// 16x16x16, plain and transposed operand layouts (through the strides), with
// and without accumulation into C, on a memory model that stalls at random.
// Results are compared with a double-precision reference, within a bound
// scaled by the sum of the magnitudes of the products.
module tb_gemm_acc;
  import tt_pkg::*;
  import tb_fp_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // reset edge before the first clock edge
  always #5 clk = ~clk;

  logic cmd_valid = 0, cmd_ready, done;
  gemm_cmd_t cmd;
  mem_req_t mreq;
  mem_rsp_t mrsp;
  int checks = 0, failures = 0;

  gemm_acc dut (.*);
  tb_mem_model #(.WORDS(2048)) u_mem (.clk, .mreq, .mrsp);

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ea(input gemm_cmd_t c, input int r, input int k);
    return int'(c.a_base) + r * int'(c.a_rs) + k * int'(c.a_cs);
  endfunction
  function automatic int eb(input gemm_cmd_t c, input int k, input int q);
    return int'(c.b_base) + k * int'(c.b_rs) + q * int'(c.b_cs);
  endfunction
  function automatic int ec(input gemm_cmd_t c, input int r, input int q);
    return int'(c.c_base) + r * int'(c.c_rs) + q * int'(c.c_cs);
  endfunction

  initial begin
    real ref_c [16][16], mag [16][16];
    cmd = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 30; t++) begin
      for (int k = 0; k < 2048; k++) u_mem.mem[k] = rand_fp(3);
      cmd = '0;
      cmd.m = dim_t'(1 + $urandom_range(15)); cmd.n = dim_t'(1 + $urandom_range(15));
      cmd.k = dim_t'(1 + $urandom_range(15));
      if (t == 0) begin cmd.m = 16; cmd.n = 16; cmd.k = 16; end
      cmd.acc = 1'(t % 2);
      cmd.a_base = 0;    {cmd.a_rs, cmd.a_cs} = (t % 3 == 0) ? {addr_t'(1), addr_t'(16)} : {addr_t'(16), addr_t'(1)};
      cmd.b_base = 512;  {cmd.b_rs, cmd.b_cs} = (t % 4 == 1) ? {addr_t'(1), addr_t'(16)} : {addr_t'(16), addr_t'(1)};
      cmd.c_base = 1024; cmd.c_rs = 16; cmd.c_cs = 1;
      for (int r = 0; r < int'(cmd.m); r++)
        for (int q = 0; q < int'(cmd.n); q++) begin
          ref_c[r][q] = cmd.acc ? fp2real(u_mem.mem[ec(cmd, r, q)]) : 0.0;
          mag[r][q] = absr(ref_c[r][q]);
          for (int k = 0; k < int'(cmd.k); k++) begin
            real p;
            p = fp2real(u_mem.mem[ea(cmd, r, k)]) * fp2real(u_mem.mem[eb(cmd, k, q)]);
            ref_c[r][q] += p; mag[r][q] += absr(p);
          end
        end
      @(negedge clk); cmd_valid = 1;
      #1; while (!cmd_ready) begin @(negedge clk); #1; end
      @(negedge clk); cmd_valid = 0;
      while (!done) begin @(negedge clk); end
      for (int r = 0; r < 16; r++)
        for (int q = 0; q < 16; q++) begin
          if (r < int'(cmd.m) && q < int'(cmd.n)) begin
            checks++;
            if (absr(fp2real(u_mem.mem[ec(cmd, r, q)]) - ref_c[r][q]) > mag[r][q] * 4.0e-6 + 1e-30) begin
              failures++; $display("FAIL test %0d C[%0d][%0d] = %g expected %g", t, r, q,
                                   fp2real(u_mem.mem[ec(cmd, r, q)]), ref_c[r][q]);
            end
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
