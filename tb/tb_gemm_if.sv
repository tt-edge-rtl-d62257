// Testbench of the GEMM I/F block splitter. The testbench plays the GEMM
// accelerator: it executes every block it receives on a real-valued memory
// (checking that no block exceeds 16 in any dimension). After each command the
// full product must equal A x B (+ C), and the number of blocks must be
// ceil(m/16) * ceil(n/16) * ceil(k/16). Operands use strided and transposed
// layouts; a zero-size command must finish without issuing blocks.
module tb_gemm_if;
  import tt_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // reset edge before the first clock edge
  always #5 clk = ~clk;

  logic cmd_valid = 0, cmd_ready, done, tile_valid, tile_ready = 0, tile_done = 0;
  gemm_cmd_t cmd, tile;
  logic [31:0] tiles;
  int checks = 0, failures = 0, ntiles;
  real mem [8192];

  gemm_if dut (.*);

  initial begin
    repeat (1_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // accelerator model
  initial begin
    forever begin
      gemm_cmd_t b;
      @(negedge clk); tile_ready = 1;
      #1; while (!tile_valid) begin @(negedge clk); #1; end
      b = tile;
      @(negedge clk); tile_ready = 0;
      ntiles++;
      checks++;
      if (b.m > 16 || b.n > 16 || b.k > 16 || b.m == 0 || b.n == 0 || b.k == 0) begin
        failures++; $display("FAIL block size %0d %0d %0d", b.m, b.n, b.k);
      end
      for (int r = 0; r < int'(b.m); r++)
        for (int q = 0; q < int'(b.n); q++) begin
          real s;
          int ca;
          ca = int'(b.c_base) + r * int'(b.c_rs) + q * int'(b.c_cs);
          s = b.acc ? mem[ca] : 0.0;
          for (int k = 0; k < int'(b.k); k++)
            s += mem[int'(b.a_base) + r * int'(b.a_rs) + k * int'(b.a_cs)] *
                 mem[int'(b.b_base) + k * int'(b.b_rs) + q * int'(b.b_cs)];
          mem[ca] = s;
        end
      repeat ($urandom_range(3)) @(negedge clk);
      tile_done = 1;
      @(negedge clk); tile_done = 0;
    end
  end

  initial begin
    cmd = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 12; t++) begin
      int m, n, k, expt;
      real c0 [40][40];
      m = 1 + int'($urandom_range(39)); n = 1 + int'($urandom_range(39)); k = 1 + int'($urandom_range(39));
      if (t == 0) begin m = 33; n = 17; k = 40; end
      if (t == 1) begin m = 1; n = 20; k = 16; end
      cmd = '0;
      cmd.m = dim_t'(m); cmd.n = dim_t'(n); cmd.k = dim_t'(k); cmd.acc = 1'(t % 2);
      cmd.a_base = 0;    {cmd.a_rs, cmd.a_cs} = (t % 3 == 0) ? {addr_t'(1), addr_t'(41)} : {addr_t'(41), addr_t'(1)};
      cmd.b_base = 2000; {cmd.b_rs, cmd.b_cs} = (t % 4 == 1) ? {addr_t'(1), addr_t'(43)} : {addr_t'(43), addr_t'(1)};
      cmd.c_base = 4000; cmd.c_rs = 45; cmd.c_cs = 1;
      for (int x = 0; x < 8192; x++) mem[x] = real'($urandom_range(200)) / 16.0 - 6.0;
      for (int r = 0; r < m; r++)
        for (int q = 0; q < n; q++) begin
          c0[r][q] = cmd.acc ? mem[4000 + r * 45 + q] : 0.0;
          for (int x = 0; x < k; x++)
            c0[r][q] += mem[int'(cmd.a_rs) * r + int'(cmd.a_cs) * x] *
                        mem[2000 + int'(cmd.b_rs) * x + int'(cmd.b_cs) * q];
        end
      ntiles = 0;
      @(negedge clk); cmd_valid = 1;
      #1; while (!cmd_ready) begin @(negedge clk); #1; end
      @(negedge clk); cmd_valid = 0;
      while (!done) @(negedge clk);
      expt = ((m + 15) / 16) * ((n + 15) / 16) * ((k + 15) / 16);
      checks++;
      if (ntiles != expt) begin failures++; $display("FAIL test %0d: %0d blocks, expected %0d", t, ntiles, expt); end
      for (int r = 0; r < m; r++)
        for (int q = 0; q < n; q++) begin
          checks++;
          if (mem[4000 + r * 45 + q] != c0[r][q]) begin
            failures++; $display("FAIL test %0d C[%0d][%0d]", t, r, q);
          end
        end
    end
    // zero-size command
    cmd.m = 0; ntiles = 0;
    @(negedge clk); cmd_valid = 1;
    @(negedge clk); cmd_valid = 0;
    repeat (5) @(negedge clk);
    checks++;
    if (ntiles != 0) begin failures++; $display("FAIL zero-size command issued blocks"); end
    $display("blocks issued in total: %0d", tiles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
