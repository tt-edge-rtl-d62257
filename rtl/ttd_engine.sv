// TTD-Engine: tensor-train decomposition accelerator around an existing GEMM
// accelerator.
//
// The host core configures the engine through the APB register file and
// starts one of its units; while a unit runs, the core can be clock-gated
// (busy tells it when the engine is active). Units:
//   HBD-ACC     Householder bidiagonalization A = U_B B V_B^T (reduction and
//               accumulation), requesting DMA gathers, FP-ALU operations and
//               GEMMs on its own;
//   SORTING     descending bubble sort of the singular values with reordering
//               of U and V^T;
//   TRUNCATION  threshold delta and truncated rank r_k;
//   Shared FP-ALU  the single FP32 MAC/DIV/SQRT unit with its vector streamer,
//               used by HBD-ACC (client 0) and TRUNCATION (client 1);
//   GEMM I/F    cuts a matrix product into 16x16x16 blocks for the GEMM
//               accelerator, which works on the shared SPM;
//   SPM I/F     arbitrates the SPM among the external port (client 0), the
//               GEMM accelerator (1), the FP-ALU streamer (2), HBD-ACC (3) and
//               SORTING (4).
// External interfaces: APB slave (control), ext_req/ext_rsp (the SPM's data
// port towards the system interconnect, used by the system DMA and the core),
// and the DMA command port (dma_valid/dma_ready/dma_cmd, dma_done) through
// which HBD-ACC asks the system DMA to gather a column or row of A into the
// vector buffer. The system DMA itself is outside this module.
// SPM_WORDS sets the scratchpad size (default 81920 words = 320 KB).
module ttd_engine
  import tt_pkg::*;
#(
  parameter int unsigned SPM_WORDS = 81920
) (
  input  logic        clk,
  input  logic        rst_n,
  // APB control
  input  logic        psel,
  input  logic        penable,
  input  logic        pwrite,
  input  logic [11:0] paddr,
  input  logic [31:0] pwdata,
  output logic [31:0] prdata,
  output logic        pready,
  output logic        pslverr,
  // SPM data port (system side)
  input  mem_req_t    ext_req,
  output mem_rsp_t    ext_rsp,
  // DMA command port
  output logic        dma_valid,
  input  logic        dma_ready,
  output dma_cmd_t    dma_cmd,
  input  logic        dma_done,
  // engine active (for core clock gating)
  output logic        busy
);
  logic [31:0] cfg [NREGS];
  logic start_hbd, start_sort, start_delta, start_trunc;
  logic hbd_busy, hbd_done, sort_busy, sort_done, tr_busy, tr_done;
  logic [31:0] delta, tiles, swaps, tr_steps;
  dim_t r_k;

  reg_file u_regs (
    .clk, .rst_n, .psel, .penable, .pwrite, .paddr, .pwdata, .prdata, .pready, .pslverr,
    .cfg, .start_hbd, .start_sort, .start_delta, .start_trunc,
    .busy({tr_busy, sort_busy, hbd_busy}), .done({tr_done, sort_done, hbd_done}),
    .delta, .r_k(32'(r_k)), .tiles, .swaps, .tsteps(tr_steps)
  );
  assign busy = hbd_busy | sort_busy | tr_busy;

  // SPM and its arbiter
  mem_req_t creq [5];
  mem_rsp_t crsp [5];
  logic        spm_en, spm_we;
  addr_t       spm_addr;
  logic [31:0] spm_wdata, spm_rdata;

  assign creq[0] = ext_req;
  assign ext_rsp = crsp[0];

  spm_if #(.NCLI(5)) u_spm_if (
    .clk, .rst_n, .creq, .crsp,
    .en(spm_en), .we(spm_we), .addr(spm_addr), .wdata(spm_wdata), .rdata(spm_rdata)
  );
  spm #(.WORDS(SPM_WORDS)) u_spm (
    .clk, .en(spm_en), .we(spm_we), .addr(spm_addr), .wdata(spm_wdata), .rdata(spm_rdata)
  );

  // GEMM I/F and accelerator
  logic      g_valid, g_ready, g_done, t_valid, t_ready, t_done;
  gemm_cmd_t g_cmd, t_cmd;

  gemm_if u_gemm_if (
    .clk, .rst_n, .cmd_valid(g_valid), .cmd_ready(g_ready), .cmd(g_cmd), .done(g_done),
    .tile_valid(t_valid), .tile_ready(t_ready), .tile(t_cmd), .tile_done(t_done), .tiles
  );
  gemm_acc u_gemm (
    .clk, .rst_n, .cmd_valid(t_valid), .cmd_ready(t_ready), .cmd(t_cmd), .done(t_done),
    .mreq(creq[1]), .mrsp(crsp[1])
  );

  // Shared FP-ALU
  logic [1:0]  fp_valid, fp_ready, fp_rsp_valid;
  fp_req_t     fp_req [2];
  logic [31:0] fp_rsp;

  fp_alu #(.NREQ(2)) u_fp_alu (
    .clk, .rst_n, .req_valid(fp_valid), .req(fp_req), .req_ready(fp_ready),
    .rsp_valid(fp_rsp_valid), .rsp_data(fp_rsp), .mreq(creq[2]), .mrsp(crsp[2])
  );

  // HBD-ACC
  hbd_acc u_hbd (
    .clk, .rst_n, .start(start_hbd), .busy(hbd_busy), .done(hbd_done),
    .a_addr(addr_t'(cfg[R_A_ADDR])), .m_rows(dim_t'(cfg[R_M])), .n_cols(dim_t'(cfg[R_N])),
    .u_addr(addr_t'(cfg[R_U_ADDR])), .vt_addr(addr_t'(cfg[R_VT_ADDR])),
    .d_addr(addr_t'(cfg[R_D_ADDR])), .e_addr(addr_t'(cfg[R_E_ADDR])),
    .v_addr(addr_t'(cfg[R_V_ADDR])), .vp_addr(addr_t'(cfg[R_VP_ADDR])), .w_addr(addr_t'(cfg[R_W_ADDR])),
    .dma_valid, .dma_ready, .dma_cmd, .dma_done,
    .fp_valid(fp_valid[0]), .fp_ready(fp_ready[0]), .fp_req(fp_req[0]),
    .fp_rsp_valid(fp_rsp_valid[0]), .fp_rsp,
    .mreq(creq[3]), .mrsp(crsp[3]),
    .gemm_valid(g_valid), .gemm_ready(g_ready), .gemm_cmd(g_cmd), .gemm_done(g_done)
  );

  // SORTING
  sorting u_sort (
    .clk, .rst_n, .start(start_sort), .busy(sort_busy), .done(sort_done),
    .sig_addr(addr_t'(cfg[R_SIG])), .n(dim_t'(cfg[R_SIG_N])),
    .u_src(addr_t'(cfg[R_SU_SRC])), .u_dst(addr_t'(cfg[R_SU_DST])),
    .u_rows(dim_t'(cfg[R_SU_ROWS])), .u_ld(addr_t'(cfg[R_SU_LD])),
    .v_src(addr_t'(cfg[R_SV_SRC])), .v_dst(addr_t'(cfg[R_SV_DST])),
    .v_cols(dim_t'(cfg[R_SV_COLS])), .v_ld(addr_t'(cfg[R_SV_LD])),
    .mreq(creq[4]), .mrsp(crsp[4]), .swaps
  );

  // TRUNCATION
  truncation u_trunc (
    .clk, .rst_n, .start_delta, .start_trunc, .busy(tr_busy), .done(tr_done),
    .sig_addr(addr_t'(cfg[R_SIG])), .rank(dim_t'(cfg[R_SIG_N])),
    .eps(cfg[R_EPS]), .dm1(cfg[R_DM1]), .delta, .r_k, .steps(tr_steps),
    .fp_valid(fp_valid[1]), .fp_ready(fp_ready[1]), .fp_req(fp_req[1]),
    .fp_rsp_valid(fp_rsp_valid[1]), .fp_rsp
  );
endmodule
