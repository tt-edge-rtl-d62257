// Self-checking testbench of fp_alu_core: random ADD/MUL/MAC/DIV/SQRT operands
// and NORM over a randomly paced stream, compared with double-precision
// reference values; checks the 2-cycle latency of ADD/MUL/MAC as well.
module tb_fp_alu_core;
  import tt_pkg::*;
  import tb_fp_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // reset edge before the first clock edge
  always #5 clk = ~clk;

  logic op_valid, op_ready, s_valid, s_ready, res_valid;
  fp_op_e op;
  logic [31:0] a, b, c, s_data, res;
  dim_t len;
  int checks = 0, failures = 0;

  fp_alu_core dut (.*);

  initial begin
    #2_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_op(input fp_op_e o, input logic [31:0] x, y, z,
                        output logic [31:0] r, output int lat);
    @(negedge clk);
    op = o; a = x; b = y; c = z; op_valid = 1;
    @(posedge clk); while (!op_ready) @(posedge clk);
    @(negedge clk); op_valid = 0;
    lat = 1;
    while (!res_valid) begin @(posedge clk); #1; lat++; end
    r = res;
  endtask

  task automatic check(input string what, input real got, input real exp, input real tol);
    checks++;
    if (!close(got, exp, tol)) begin
      failures++;
      $display("FAIL %s: got %g expected %g", what, got, exp);
    end
  endtask

  localparam real TOL = 1.0 / 8388608.0;   // 2^-23

  initial begin
    logic [31:0] x, y, z, r;
    int lat;
    real acc;
    logic [31:0] vec [0:31];
    op_valid = 0; s_valid = 0; s_data = 0; len = 0; op = FP_ADD; a = 0; b = 0; c = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      x = rand_fp(20); y = rand_fp(20); z = rand_fp(20);
      if (t % 16 == 0) y = {~x[31], x[30:0]} ^ 32'(t % 3);   // near cancellation
      run_op(FP_ADD, x, y, 0, r, lat);
      check("add", fp2real(r), fp2real(x) + fp2real(y), TOL);
      checks++; if (lat != 2) begin failures++; $display("FAIL add latency %0d", lat); end
      run_op(FP_MUL, x, y, 0, r, lat);
      check("mul", fp2real(r), fp2real(x) * fp2real(y), TOL);
      run_op(FP_MAC, x, y, z, r, lat);
      check("mac", fp2real(r), fp2real(real2fp(fp2real(x) * fp2real(y))) + fp2real(z), TOL);
      run_op(FP_DIV, x, y, 0, r, lat);
      check("div", fp2real(r), fp2real(x) / fp2real(y), TOL);
      x[31] = 0;
      run_op(FP_SQRT, x, 0, 0, r, lat);
      check("sqrt", fp2real(r), $sqrt(fp2real(x)), TOL);
    end
    // special cases
    run_op(FP_DIV, FP_ONE, 0, 0, r, lat);
    checks++; if (r != 32'h7F80_0000) begin failures++; $display("FAIL 1/0 = %h", r); end
    run_op(FP_SQRT, 32'hBF80_0000, 0, 0, r, lat);
    checks++; if (r != FP_QNAN) begin failures++; $display("FAIL sqrt(-1) = %h", r); end
    run_op(FP_ADD, FP_ONE, 32'hBF80_0000, 0, r, lat);
    checks++; if (r != 0) begin failures++; $display("FAIL 1-1 = %h", r); end
    // NORM over a stream with random gaps
    for (int t = 0; t < 20; t++) begin
      int n;
      n = 1 + int'($urandom_range(30));
      acc = 0.0;
      for (int k = 0; k < n; k++) begin
        vec[k] = rand_fp(6);
        acc += fp2real(vec[k]) * fp2real(vec[k]);
      end
      @(negedge clk);
      op = FP_NORM; len = dim_t'(n); op_valid = 1;
      @(negedge clk); op_valid = 0;
      fork
        begin
          for (int k = 0; k < n; k++) begin
            s_valid = ($urandom_range(3) != 0);
            s_data = vec[k];
            @(posedge clk);
            while (!(s_valid && s_ready)) begin
              #1; s_valid = 1; @(posedge clk);
            end
            #1; s_valid = 0;
          end
        end
        begin
          while (!res_valid) begin @(posedge clk); #1; end
        end
      join
      check("norm", fp2real(res), $sqrt(acc), 4.0 * n * TOL);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
