// Testbench of the HBD-ACC. The accelerator runs with the blocks it talks to
// in the engine: the shared FP-ALU, the GEMM I/F with the GEMM accelerator,
// the SPM behind its arbiter, and a behavioural DMA that gathers columns and
// rows through the arbiter's first port. For several matrix shapes (one
// element, square, tall, and a shape larger than one 16x16 GEMM block) it
// checks that U_B * B * V_B^T reproduces A, that U_B has orthonormal columns
// and V_B^T is orthogonal, and that the number of DMA gathers and GEMM
// requests per decomposition matches the algorithm (2N-1 transforms in each
// of the two phases, one gather and two GEMMs per transform).
module tb_hbd_acc;
  import tt_pkg::*;
  import tb_fp_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // reset edge before the first clock edge
  always #5 clk = ~clk;

  localparam int WORDS = 8192;
  localparam int MMAX = 40, NMAX = 20;
  localparam int A_AD = 0, U_AD = 1000, VT_AD = 2000, D_AD = 2500, E_AD = 2600;
  localparam int V_AD = 2700, VP_AD = 2800, W_AD = 2900;

  logic start = 0, busy, done;
  dim_t m_rows = 0, n_cols = 0;
  logic dma_valid, dma_ready, dma_done, dma_active;
  dma_cmd_t dma_cmd;
  int dma_cmds;
  logic fp_valid, fp_ready, fp_rsp_valid;
  fp_req_t fp_req;
  logic [31:0] fp_rsp;
  logic g_valid, g_ready, g_done, t_valid, t_ready, t_done;
  gemm_cmd_t g_cmd, t_cmd;
  logic [31:0] tiles;
  logic [0:0] fv, fr, frv;
  fp_req_t freq [1];
  mem_req_t creq [4];
  mem_rsp_t crsp [4];
  logic spm_en, spm_we;
  addr_t spm_addr;
  logic [31:0] spm_wdata, spm_rdata;
  int checks = 0, failures = 0, gemm_reqs = 0;

  hbd_acc dut (
    .clk, .rst_n, .start, .busy, .done,
    .a_addr(addr_t'(A_AD)), .m_rows, .n_cols, .u_addr(addr_t'(U_AD)), .vt_addr(addr_t'(VT_AD)),
    .d_addr(addr_t'(D_AD)), .e_addr(addr_t'(E_AD)), .v_addr(addr_t'(V_AD)),
    .vp_addr(addr_t'(VP_AD)), .w_addr(addr_t'(W_AD)),
    .dma_valid, .dma_ready, .dma_cmd, .dma_done,
    .fp_valid, .fp_ready, .fp_req, .fp_rsp_valid, .fp_rsp,
    .mreq(creq[3]), .mrsp(crsp[3]),
    .gemm_valid(g_valid), .gemm_ready(g_ready), .gemm_cmd(g_cmd), .gemm_done(g_done)
  );
  assign fv[0] = fp_valid;
  assign freq[0] = fp_req;
  assign fp_ready = fr[0];
  assign fp_rsp_valid = frv[0];
  fp_alu #(.NREQ(1)) u_alu (.clk, .rst_n, .req_valid(fv), .req(freq), .req_ready(fr),
                            .rsp_valid(frv), .rsp_data(fp_rsp), .mreq(creq[2]), .mrsp(crsp[2]));
  gemm_if u_gif (.clk, .rst_n, .cmd_valid(g_valid), .cmd_ready(g_ready), .cmd(g_cmd), .done(g_done),
                 .tile_valid(t_valid), .tile_ready(t_ready), .tile(t_cmd), .tile_done(t_done), .tiles);
  gemm_acc u_gemm (.clk, .rst_n, .cmd_valid(t_valid), .cmd_ready(t_ready), .cmd(t_cmd), .done(t_done),
                   .mreq(creq[1]), .mrsp(crsp[1]));
  spm_if #(.NCLI(4)) u_arb (.clk, .rst_n, .creq, .crsp, .en(spm_en), .we(spm_we), .addr(spm_addr),
                            .wdata(spm_wdata), .rdata(spm_rdata));
  spm #(.WORDS(WORDS)) u_spm (.clk, .en(spm_en), .we(spm_we), .addr(spm_addr), .wdata(spm_wdata),
                              .rdata(spm_rdata));
  dma_model u_dma (.clk, .rst_n, .cmd_valid(dma_valid), .cmd_ready(dma_ready), .cmd(dma_cmd),
                   .done(dma_done), .active(dma_active), .mreq(creq[0]), .mrsp(crsp[0]), .ncmds(dma_cmds));

  always @(posedge clk) if (g_valid && g_ready) gemm_reqs++;

  initial begin
    repeat (20_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  real a0 [MMAX][NMAX];
  real ub [MMAX][NMAX];
  real vt [NMAX][NMAX];
  real bd [NMAX], be [NMAX];

  task automatic run_case(input int M, input int N);
    real maxa, err, s;
    int c0, g0;
    maxa = 0;
    for (int r = 0; r < M; r++)
      for (int c = 0; c < N; c++) begin
        logic [31:0] w;
        w = rand_fp(2);
        a0[r][c] = fp2real(w);
        if (absr(a0[r][c]) > maxa) maxa = absr(a0[r][c]);
        u_spm.mem[A_AD + r * N + c] = w;
      end
    m_rows = dim_t'(M); n_cols = dim_t'(N);
    c0 = dma_cmds; g0 = gemm_reqs;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    check("busy after start", busy);
    while (!done) @(negedge clk);
    @(negedge clk);
    check("idle after done", !busy);
    for (int r = 0; r < M; r++)
      for (int c = 0; c < N; c++) ub[r][c] = fp2real(u_spm.mem[U_AD + r * N + c]);
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++) vt[r][c] = fp2real(u_spm.mem[VT_AD + r * N + c]);
    for (int k = 0; k < N; k++) begin
      bd[k] = fp2real(u_spm.mem[D_AD + k]);
      be[k] = (k < N - 1) ? fp2real(u_spm.mem[E_AD + k]) : 0.0;
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
    $display("%0dx%0d: reconstruction error %g (max |A| %g), GEMM blocks issued so far %0d",
             M, N, err, maxa, int'(tiles));
    check($sformatf("%0dx%0d A = U_B B V_B^T", M, N), err < 2.0e-5 * maxa * N);
    err = 0;
    for (int p = 0; p < N; p++)
      for (int q = 0; q < N; q++) begin
        s = 0;
        for (int r = 0; r < M; r++) s += ub[r][p] * ub[r][q];
        if (absr(s - ((p == q) ? 1.0 : 0.0)) > err) err = absr(s - ((p == q) ? 1.0 : 0.0));
      end
    check($sformatf("%0dx%0d U_B^T U_B = I (err %g)", M, N, err), err < 2.0e-5 * M);
    err = 0;
    for (int p = 0; p < N; p++)
      for (int q = 0; q < N; q++) begin
        s = 0;
        for (int r = 0; r < N; r++) s += vt[p][r] * vt[q][r];
        if (absr(s - ((p == q) ? 1.0 : 0.0)) > err) err = absr(s - ((p == q) ? 1.0 : 0.0));
      end
    check($sformatf("%0dx%0d V_B^T V_B = I (err %g)", M, N, err), err < 2.0e-5 * N);
    check($sformatf("%0dx%0d DMA gathers %0d", M, N, dma_cmds - c0), dma_cmds - c0 == 4 * N - 2);
    check($sformatf("%0dx%0d GEMM requests %0d", M, N, gemm_reqs - g0), gemm_reqs - g0 == 2 * (4 * N - 2));
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_case(1, 1);
    run_case(5, 5);
    run_case(12, 4);
    run_case(2, 2);
    run_case(37, 18);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
