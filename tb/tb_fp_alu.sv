// Testbench of the shared FP-ALU: two clients issue random operations at the
// same time (client 0 ADD/MUL/DIV, client 1 NORM over memory and SQRT). Every
// result is checked against a double-precision reference and must reach only
// the client that asked; the test also counts cycles in which one client had
// to wait for the other and requires some. Every other DIV of client 0 sets
// the store flag: its result must then already be in memory at the response.
module tb_fp_alu;
  import tt_pkg::*;
  import tb_fp_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // reset edge before the first clock edge
  always #5 clk = ~clk;

  logic [1:0] req_valid = 0, req_ready, rsp_valid;
  fp_req_t req [2];
  logic [31:0] rsp_data;
  mem_req_t mreq;
  mem_rsp_t mrsp;
  int checks = 0, failures = 0, waits = 0;
  localparam real TOL = 1.0 / 8388608.0;

  fp_alu dut (.*);
  tb_mem_model #(.WORDS(512)) u_mem (.clk, .mreq, .mrsp);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if ((req_valid & ~req_ready) != 0) waits++;

  task automatic check(input string what, input real got, input real exp, input real tol);
    checks++;
    if (!close(got, exp, tol)) begin failures++; $display("FAIL %s: got %g expected %g", what, got, exp); end
  endtask

  // one request from client c, wait for its own response
  task automatic issue(input int c, input fp_req_t r, output logic [31:0] res);
    @(negedge clk); req[c] = r; req_valid[c] = 1;
    #1; while (!req_ready[c]) begin @(negedge clk); #1; end
    @(negedge clk); req_valid[c] = 0;
    #1; while (!rsp_valid[c]) begin @(negedge clk); #1; end
    res = rsp_data;
    checks++;
    if (rsp_valid[1 - c]) begin failures++; $display("FAIL response given to both clients"); end
  endtask

  initial begin
    req[0] = '0; req[1] = '0;
    for (int k = 0; k < 256; k++) u_mem.mem[k] = rand_fp(4);
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      for (int t = 0; t < 60; t++) begin
        fp_req_t r; logic [31:0] y; real ex;
        r = '0; r.a = rand_fp(10); r.b = rand_fp(10);
        unique case (t % 3)
          0: begin r.op = FP_ADD; ex = fp2real(r.a) + fp2real(r.b); end
          1: begin r.op = FP_MUL; ex = fp2real(r.a) * fp2real(r.b); end
          default: begin
            r.op = FP_DIV; ex = fp2real(r.a) / fp2real(r.b);
            r.store = (t % 2 == 0); r.addr = addr_t'(300 + t);
          end
        endcase
        issue(0, r, y);
        check("client 0", fp2real(y), ex, TOL);
        if (r.store) begin
          @(posedge clk); #1;   // the write takes effect at the end of the answer cycle
          checks++;
          if (u_mem.mem[300 + t] != y) begin failures++; $display("FAIL stored result %0d", t); end
        end
      end
      for (int t = 0; t < 30; t++) begin
        fp_req_t r; logic [31:0] y; real ex;
        r = '0;
        if (t % 2 == 0) begin
          r.op = FP_NORM; r.addr = addr_t'($urandom_range(200)); r.len = dim_t'(1 + $urandom_range(50));
          ex = 0;
          for (int k = 0; k < int'(r.len); k++) ex += fp2real(u_mem.mem[int'(r.addr) + k]) ** 2;
          ex = $sqrt(ex);
          issue(1, r, y);
          check("client 1 norm", fp2real(y), ex, 4.0 * 51 * TOL);
        end else begin
          r.op = FP_SQRT; r.a = rand_fp(10, 0);
          issue(1, r, y);
          check("client 1 sqrt", fp2real(y), $sqrt(fp2real(r.a)), TOL);
        end
      end
    join
    checks++;
    if (waits == 0) begin failures++; $display("FAIL no contention happened"); end
    $display("contention cycles %0d", waits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
