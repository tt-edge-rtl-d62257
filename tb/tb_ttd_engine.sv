// End-to-end testbench of the TTD-Engine at its default parameters.
//
// A host model drives the APB register file and the SPM's system-side port; a
// behavioural DMA serves the engine's gather commands. The test
//   1. loads a random 20 x 6 matrix A and runs the Householder bidiagonalization
//      (HBD-ACC), checking A = U_B * B * V_B^T and the orthogonality of U_B and
//      V_B^T in double precision;
//   2. while HBD runs, computes the truncation threshold delta and then sorts a
//      vector of singular values with its U and V^T (SORTING) - both compete
//      with HBD for the shared FP-ALU and the SPM;
//   3. truncates the sorted values (TRUNCATION) and checks delta and r_k;
//   4. checks an APB access outside the register map.
// It counts how often each mechanism happened (column and row DMA gathers,
// HOUSE and accumulation steps, GEMM block splitting, FP-ALU and SPM
// contention, sorting exchanges, rank decrements, APB error) and fails any
// that never occurred.
module tb_ttd_engine;
  import tt_pkg::*;
  import tb_fp_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // reset edge before the first clock edge
  always #5 clk = ~clk;

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
  localparam int WATCHDOG = 3_000_000;

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ host tasks
  task automatic apb_write(input int idx, input logic [31:0] d);
    @(negedge clk); psel = 1; penable = 0; pwrite = 1; paddr = 12'(idx * 4); pwdata = d;
    @(negedge clk); penable = 1;
    @(negedge clk); psel = 0; penable = 0; pwrite = 0;
  endtask

  task automatic apb_read(input int idx, output logic [31:0] d, output logic err);
    @(negedge clk); psel = 1; penable = 0; pwrite = 0; paddr = 12'(idx * 4);
    @(negedge clk); penable = 1; #1 d = prdata; err = pslverr;
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

  task automatic wait_done(input int bitpos);
    logic [31:0] s; logic e;
    do apb_read(R_STATUS, s, e); while (!s[4 + bitpos]);
  endtask

  task automatic check(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ------------------------------------------------------------ coverage
  int cov_fp_conflict = 0, cov_spm_conflict = 0, cov_gemm_cmds = 0, cov_col = 0, cov_row = 0;
  int cov_house = 0, cov_accum = 0;
  always @(posedge clk) begin
    if ((dut.fp_valid & ~dut.fp_ready) != 0) cov_fp_conflict++;   // a client waits for the other
    if (int'(dut.creq[0].req) + int'(dut.creq[1].req) + int'(dut.creq[2].req) +
        int'(dut.creq[3].req) + int'(dut.creq[4].req) > 1) cov_spm_conflict++;
    if (dut.g_valid && dut.g_ready && dut.g_cmd.m != 0 && dut.g_cmd.n != 0 && dut.g_cmd.k != 0) cov_gemm_cmds++;
    if (dma_valid && dma_ready) begin
      if (dma_cmd.stride == 1) cov_row++; else cov_col++;
    end
    if (dut.u_hbd.st == dut.u_hbd.H_ADD && dut.fp_rsp_valid[0]) cov_house++;
    if (dut.u_hbd.st == dut.u_hbd.H_RDQ && dut.u_hbd.mrsp.rvalid) cov_accum++;
  end

  // ------------------------------------------------------------ test
  localparam int M = 20, N = 6;
  localparam int A_AD = 0, U_AD = 200, VT_AD = 400, D_AD = 500, E_AD = 520;
  localparam int V_AD = 540, VP_AD = 580, W_AD = 620;
  localparam int NS = 8, SU_ROWS = 5, SV_COLS = 4;
  localparam int SIG_AD = 1000, SUS = 1100, SUD = 1200, SVS = 1300, SVD = 1400;

  real a0 [M][N];
  real ub [M][N];
  real vt [N][N];
  real bd [N], be [N];
  real sig [NS];
  int  perm [NS];
  logic [31:0] usrc [SU_ROWS][NS];
  logic [31:0] vsrc [NS][SV_COLS];

  initial begin
    logic [31:0] w, rk_hw, delta_hw;
    logic e;
    real maxa, err, s, delta_ref, nrm, eps_r;
    int rk_ref, tsteps;

    host_req = '0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    @(negedge clk);

    // matrix A
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

    // singular values (distinct, shuffled) and the matrices to reorder
    for (int k = 0; k < NS; k++) begin
      sig[k] = fp2real(real2fp(0.5 + 1.25 * ((k * 5) % NS)));
      mem_write(SIG_AD + k, real2fp(sig[k]));
    end
    for (int r = 0; r < SU_ROWS; r++)
      for (int c = 0; c < NS; c++) begin usrc[r][c] = $urandom; mem_write(SUS + r * NS + c, usrc[r][c]); end
    for (int r = 0; r < NS; r++)
      for (int c = 0; c < SV_COLS; c++) begin vsrc[r][c] = $urandom; mem_write(SVS + r * SV_COLS + c, vsrc[r][c]); end
    apb_write(R_SIG, SIG_AD); apb_write(R_SIG_N, NS);
    apb_write(R_SU_SRC, SUS); apb_write(R_SU_DST, SUD); apb_write(R_SU_ROWS, SU_ROWS); apb_write(R_SU_LD, NS);
    apb_write(R_SV_SRC, SVS); apb_write(R_SV_DST, SVD); apb_write(R_SV_COLS, SV_COLS); apb_write(R_SV_LD, SV_COLS);
    eps_r = 0.25;
    apb_write(R_EPS, real2fp(eps_r)); apb_write(R_DM1, real2fp(3.0));   // d = 4

    // start HBD, then delta and sorting while it runs
    apb_write(R_CTRL, 32'h1);
    apb_write(R_CTRL, 32'h4);
    wait_done(2);
    apb_write(R_CTRL, 32'h2);
    wait_done(1);
    // truncation on the sorted values
    apb_write(R_CTRL, 32'h8);
    wait_done(2);
    wait_done(0);
    check("engine idle after all commands", !busy);

    // ---- HBD results
    for (int r = 0; r < M; r++)
      for (int c = 0; c < N; c++) begin mem_read(U_AD + r * N + c, w); ub[r][c] = fp2real(w); end
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++) begin mem_read(VT_AD + r * N + c, w); vt[r][c] = fp2real(w); end
    for (int k = 0; k < N; k++) begin
      mem_read(D_AD + k, w); bd[k] = fp2real(w);
      mem_read(E_AD + k, w); be[k] = fp2real(w);
    end
    err = 0;
    for (int r = 0; r < M; r++)
      for (int c = 0; c < N; c++) begin
        s = 0;
        for (int k = 0; k < N; k++)
          for (int l = k; l <= k + 1 && l < N; l++) begin
            real bkl;
            bkl = (l == k) ? bd[k] : be[k];
            s += ub[r][k] * bkl * vt[l][c];
          end
        if (absr(s - a0[r][c]) > err) err = absr(s - a0[r][c]);
      end
    $display("HBD reconstruction max error %g (max |A| %g)", err, maxa);
    check("A = U_B B V_B^T", err < 1.0e-4 * maxa * N);
    err = 0;
    for (int p = 0; p < N; p++)
      for (int q = 0; q < N; q++) begin
        s = 0;
        for (int r = 0; r < M; r++) s += ub[r][p] * ub[r][q];
        if (absr(s - ((p == q) ? 1.0 : 0.0)) > err) err = absr(s - ((p == q) ? 1.0 : 0.0));
      end
    $display("U_B orthogonality error %g", err);
    check("U_B^T U_B = I", err < 1.0e-4);
    err = 0;
    for (int p = 0; p < N; p++)
      for (int q = 0; q < N; q++) begin
        s = 0;
        for (int r = 0; r < N; r++) s += vt[p][r] * vt[q][r];
        if (absr(s - ((p == q) ? 1.0 : 0.0)) > err) err = absr(s - ((p == q) ? 1.0 : 0.0));
      end
    $display("V_B^T orthogonality error %g", err);
    check("V_B^T V_B = I", err < 1.0e-4);

    // ---- sorting: reference order, descending
    for (int k = 0; k < NS; k++) perm[k] = k;
    for (int p = 0; p < NS - 1; p++)
      for (int k = 0; k < NS - 1 - p; k++)
        if (sig[perm[k]] < sig[perm[k + 1]]) begin int t; t = perm[k]; perm[k] = perm[k + 1]; perm[k + 1] = t; end
    for (int k = 0; k < NS; k++) begin
      mem_read(SIG_AD + k, w);
      check($sformatf("sorted sigma[%0d]", k), fp2real(w) == sig[perm[k]]);
    end
    for (int r = 0; r < SU_ROWS; r++)
      for (int c = 0; c < NS; c++) begin
        mem_read(SUD + r * NS + c, w);
        check($sformatf("U_s[%0d][%0d]", r, c), w == usrc[r][perm[c]]);
      end
    for (int r = 0; r < NS; r++)
      for (int c = 0; c < SV_COLS; c++) begin
        mem_read(SVD + r * SV_COLS + c, w);
        check($sformatf("Vt_s[%0d][%0d]", r, c), w == vsrc[perm[r]][c]);
      end

    // ---- truncation
    nrm = 0;
    for (int k = 0; k < NS; k++) nrm += sig[k] * sig[k];
    delta_ref = eps_r / $sqrt(3.0) * $sqrt(nrm);
    apb_read(R_DELTA, delta_hw, e);
    $display("delta %g (expected %g)", fp2real(delta_hw), delta_ref);
    check("delta", close(fp2real(delta_hw), delta_ref, 1.0e-5));
    rk_ref = NS;
    for (int cand = NS - 1; cand >= 1; cand--) begin
      s = 0;
      for (int k = cand; k < NS; k++) s += sig[perm[k]] * sig[perm[k]];
      if ($sqrt(s) > delta_ref) break;
      rk_ref = cand;
    end
    apb_read(R_RK, rk_hw, e);
    $display("r_k %0d (expected %0d)", rk_hw, rk_ref);
    check("r_k", int'(rk_hw) == rk_ref);
    apb_read(R_TSTEPS, w, e);
    tsteps = int'(w);

    // ---- APB error response
    apb_read(40, w, e);
    check("pslverr outside the map", e);

    // ---- mechanisms
    apb_read(R_TILES, w, e);
    apb_read(R_SWAPS, rk_hw, e);
    $display("coverage: dma col %0d row %0d, house %0d, accum %0d, gemm cmds %0d blocks %0d,",
             cov_col, cov_row, cov_house, cov_accum, cov_gemm_cmds, w);
    $display("          fp-alu contention %0d, spm contention %0d, swaps %0d, rank decrements %0d",
             cov_fp_conflict, cov_spm_conflict, rk_hw, tsteps);
    check("DMA column gather", cov_col > 0);
    check("DMA row gather", cov_row > 0);
    check("DMA commands = 4N-2", dma_cmds == 4 * N - 2);
    check("HOUSE steps = 2N-1", cov_house == 2 * N - 1);
    check("accumulation steps = 2N-1", cov_accum == 2 * N - 1);
    check("GEMM split into blocks", int'(w) > cov_gemm_cmds);
    check("FP-ALU contention", cov_fp_conflict > 0);
    check("SPM contention", cov_spm_conflict > 0);
    check("sorting exchanges", rk_hw > 0);
    check("rank decrements", tsteps > 0 && rk_ref > 1);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
