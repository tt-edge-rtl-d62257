// Workload testbench: Householder bidiagonalization of the largest ResNet-32
// layer on the TTD-Engine at its default parameters (320 KB SPM).
//
// A 64x64x3x3 convolution kernel (36864 weights) is unfolded into a 576 x 64
// matrix, the first matrix a tensor-train decomposition of that kernel has to
// bidiagonalize. The SPM then holds A, U_B (576 x 64), V_B^T (64 x 64), the
// diagonal and super-diagonal of B and the three vector buffers: 79680 of
// its 81920 words. The weights are random (a trained model is not needed to
// exercise the hardware). The host model loads A through the system port,
// programs the registers over APB, starts HBD and reads the results back; a
// behavioural DMA serves the gathers. Checks, in double precision: A is
// reproduced by U_B * B * V_B^T, U_B has orthonormal columns, V_B^T is
// orthogonal, and the engine issued 4N-2 gathers. The HBD cycle count is
// printed.
module tb_resnet_layer_hbd;
  import tt_pkg::*;
  import tb_fp_pkg::*;

  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  initial #1 rst_n = 0;

  logic        psel = 0, penable = 0, pwrite = 0, pready, pslverr;
  logic [11:0] paddr = 0;
  logic [31:0] pwdata = 0, prdata;
  mem_req_t    ext_req, host_req, dma_req;
  mem_rsp_t    ext_rsp;
  logic        dma_valid, dma_ready, dma_done, dma_active, busy;
  dma_cmd_t    dma_cmd;
  int          dma_cmds;

  ttd_engine dut (
    .clk, .rst_n, .psel, .penable, .pwrite, .paddr, .pwdata, .prdata, .pready, .pslverr,
    .ext_req, .ext_rsp, .dma_valid, .dma_ready, .dma_cmd, .dma_done, .busy
  );

  dma_model u_dma (
    .clk, .rst_n, .cmd_valid(dma_valid), .cmd_ready(dma_ready), .cmd(dma_cmd), .done(dma_done),
    .active(dma_active), .mreq(dma_req), .mrsp(ext_rsp), .ncmds(dma_cmds)
  );
  assign ext_req = dma_active ? dma_req : host_req;

  int checks = 0, failures = 0;

  initial begin
    repeat (400_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apb_write(input int idx, input logic [31:0] d);
    @(negedge clk); psel = 1; penable = 0; pwrite = 1; paddr = 12'(idx * 4); pwdata = d;
    @(negedge clk); penable = 1;
    @(negedge clk); psel = 0; penable = 0; pwrite = 0;
  endtask

  task automatic apb_read(input int idx, output logic [31:0] d);
    @(negedge clk); psel = 1; penable = 0; pwrite = 0; paddr = 12'(idx * 4);
    @(negedge clk); penable = 1; #1 d = prdata;
    @(negedge clk); psel = 0; penable = 0;
  endtask

  task automatic mem_write(input int addr, input logic [31:0] d);
    @(negedge clk); host_req = '{req: 1'b1, we: 1'b1, addr: addr_t'(addr), wdata: d};
    #1; while (!ext_rsp.gnt) begin @(negedge clk); #1; end
    @(negedge clk); host_req.req = 0;
  endtask

  task automatic mem_read(input int addr, output logic [31:0] d);
    @(negedge clk); host_req = '{req: 1'b1, we: 1'b0, addr: addr_t'(addr), wdata: 32'd0};
    #1; while (!ext_rsp.gnt) begin @(negedge clk); #1; end
    @(negedge clk); host_req.req = 0; d = ext_rsp.rdata;
  endtask

  task automatic check(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // layer: 64 output channels x 64 input channels x 3 x 3, unfolded (C_in*3*3) x C_out
  localparam int M = 576, N = 64;
  localparam int A_AD = 0, U_AD = M * N, VT_AD = 2 * M * N, D_AD = VT_AD + N * N, E_AD = D_AD + N;
  localparam int V_AD = E_AD + N, VP_AD = V_AD + M, W_AD = VP_AD + M;

  real a0 [M][N];
  real ub [M][N];
  real vt [N][N];
  real bd [N], be [N];

  initial begin
    logic [31:0] w;
    real maxa, err, s;
    longint t0, t1;
    host_req = '0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    check("buffers fit in the SPM", W_AD + M <= 81920);
    maxa = 0;
    for (int r = 0; r < M; r++)
      for (int c = 0; c < N; c++) begin
        w = rand_fp(2);
        a0[r][c] = fp2real(w);
        if (absr(a0[r][c]) > maxa) maxa = absr(a0[r][c]);
        mem_write(A_AD + r * N + c, w);
      end
    apb_write(R_A_ADDR, A_AD);  apb_write(R_M, M);        apb_write(R_N, N);
    apb_write(R_U_ADDR, U_AD);  apb_write(R_VT_ADDR, VT_AD);
    apb_write(R_D_ADDR, D_AD);  apb_write(R_E_ADDR, E_AD);
    apb_write(R_V_ADDR, V_AD);  apb_write(R_VP_ADDR, VP_AD); apb_write(R_W_ADDR, W_AD);
    t0 = $time;
    apb_write(R_CTRL, 32'h1);
    do apb_read(R_STATUS, w); while (!w[4]);
    t1 = $time;
    apb_read(R_TILES, w);
    $display("HBD of %0d x %0d: %0d cycles, %0d GEMM blocks, %0d DMA gathers",
             M, N, (t1 - t0) / 10, w, dma_cmds);
    check("DMA gathers = 4N-2", dma_cmds == 4 * N - 2);

    for (int r = 0; r < M; r++)
      for (int c = 0; c < N; c++) begin mem_read(U_AD + r * N + c, w); ub[r][c] = fp2real(w); end
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++) begin mem_read(VT_AD + r * N + c, w); vt[r][c] = fp2real(w); end
    for (int k = 0; k < N; k++) begin
      mem_read(D_AD + k, w); bd[k] = fp2real(w);
      mem_read(E_AD + k, w); be[k] = (k < N - 1) ? fp2real(w) : 0.0;
    end
    err = 0;
    for (int r = 0; r < M; r++)
      for (int c = 0; c < N; c++) begin
        s = 0;
        for (int k = 0; k < N; k++) begin
          s += ub[r][k] * bd[k] * vt[k][c];
          if (k < N - 1) s += ub[r][k] * be[k] * vt[k + 1][c];
        end
        if (absr(s - a0[r][c]) > err) err = absr(s - a0[r][c]);
      end
    $display("reconstruction max error %g (max |A| %g)", err, maxa);
    check("A = U_B B V_B^T", err < 1.0e-5 * maxa * N);
    err = 0;
    for (int p = 0; p < N; p++)
      for (int q = p; q < N; q++) begin
        s = 0;
        for (int r = 0; r < M; r++) s += ub[r][p] * ub[r][q];
        if (absr(s - ((p == q) ? 1.0 : 0.0)) > err) err = absr(s - ((p == q) ? 1.0 : 0.0));
      end
    $display("U_B orthogonality error %g", err);
    check("U_B^T U_B = I", err < 1.0e-5 * N);
    err = 0;
    for (int p = 0; p < N; p++)
      for (int q = p; q < N; q++) begin
        s = 0;
        for (int r = 0; r < N; r++) s += vt[p][r] * vt[q][r];
        if (absr(s - ((p == q) ? 1.0 : 0.0)) > err) err = absr(s - ((p == q) ? 1.0 : 0.0));
      end
    $display("V_B^T orthogonality error %g", err);
    check("V_B^T V_B = I", err < 1.0e-5 * N);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
