// Testbench of the TRUNCATION module together with the shared FP-ALU and a
// stalling memory model. For random descending singular-value vectors it runs
// the delta command (eps/sqrt(d-1)*||sigma||) and then the rank search, and
// compares delta, r_k and the decrement counter with a real-number reference
// of the same loop. Edge cases: rank 1, all values above delta (no decrement)
// and a tiny tail (many decrements).
module tb_truncation;
  import tt_pkg::*;
  import tb_fp_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // reset edge before the first clock edge
  always #5 clk = ~clk;

  logic start_delta = 0, start_trunc = 0, busy, done;
  addr_t sig_addr = 0;
  dim_t rank = 0, r_k;
  logic [31:0] eps = 0, dm1 = 0, delta, steps;
  logic fp_valid, fp_rsp_valid;
  logic [0:0] fv, fr, frv;
  fp_req_t fp_req, freq [1];
  logic [31:0] fp_rsp;
  logic fp_ready;
  mem_req_t mreq;
  mem_rsp_t mrsp;
  int checks = 0, failures = 0;

  truncation dut (.*);
  assign fv[0] = fp_valid;
  assign freq[0] = fp_req;
  assign fp_ready = fr[0];
  assign fp_rsp_valid = frv[0];
  fp_alu #(.NREQ(1)) u_alu (.clk, .rst_n, .req_valid(fv), .req(freq), .req_ready(fr),
                            .rsp_valid(frv), .rsp_data(fp_rsp), .mreq, .mrsp);
  tb_mem_model #(.WORDS(256)) u_mem (.clk, .mreq, .mrsp);

  initial begin
    repeat (1_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input logic is_delta);
    @(negedge clk);
    if (is_delta) start_delta = 1; else start_trunc = 1;
    @(negedge clk);
    start_delta = 0; start_trunc = 0;
    while (!done) @(negedge clk);
  endtask

  initial begin
    real s [64];
    real nrm, dref, eps_r, d_r, tail;
    int kref, nstep, st0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      int nn;
      nn = (t == 0) ? 1 : 1 + int'($urandom_range(40));
      sig_addr = addr_t'($urandom_range(100));
      rank = dim_t'(nn);
      // descending values; shape varies from flat to fast decay
      s[0] = 1.0 + real'($urandom_range(1000)) / 100.0;
      for (int k = 1; k < nn; k++)
        s[k] = s[k - 1] * ((t % 4 == 1) ? 0.999 : (t % 4 == 2) ? 0.05 : real'($urandom_range(99)) / 100.0);
      nrm = 0.0;
      for (int k = 0; k < nn; k++) begin
        u_mem.mem[int'(sig_addr) + k] = real2fp(s[k]);
        s[k] = fp2real(real2fp(s[k]));
        nrm += s[k] * s[k];
      end
      eps_r = (t % 4 == 1) ? 1.0e-4 : real'($urandom_range(60)) / 100.0 + 0.01;
      d_r = real'(2 + $urandom_range(5));
      eps = real2fp(eps_r);
      dm1 = real2fp(d_r - 1.0);
      run(1'b1);
      dref = eps_r / $sqrt(d_r - 1.0) * $sqrt(nrm);
      checks++;
      if (!close(fp2real(delta), dref, 1.0e-5)) begin
        failures++; $display("FAIL test %0d delta %g expected %g", t, fp2real(delta), dref);
      end
      // reference rank search using the hardware delta
      kref = nn; nstep = 0;
      for (int c = nn - 1; c >= 1; c--) begin
        tail = 0.0;
        for (int k = c; k < nn; k++) tail += s[k] * s[k];
        if ($sqrt(tail) > fp2real(delta)) break;
        kref = c; nstep++;
      end
      st0 = int'(steps);
      run(1'b0);
      checks++;
      if (int'(r_k) != kref) begin
        // tolerate a disagreement only when the tail norm is within rounding of delta
        tail = 0.0;
        for (int k = int'(r_k) - ((int'(r_k) < kref) ? 0 : 1); k < nn; k++) tail += s[k] * s[k];
        if (!close($sqrt(tail), fp2real(delta), 1.0e-5)) begin
          failures++; $display("FAIL test %0d r_k %0d expected %0d", t, r_k, kref);
        end
      end
      checks++;
      if (int'(steps) - st0 != nn - int'(r_k)) begin
        failures++; $display("FAIL test %0d steps %0d", t, int'(steps) - st0);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
