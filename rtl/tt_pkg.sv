// Shared types and constants of the TTD-Engine.
//
// All data are IEEE-754 single-precision words (32 bits). The scratchpad (SPM)
// is word addressed. Memory ports of every SPM client use the mem_req_t /
// mem_rsp_t pair: a request is held until it is granted; read data return
// one cycle after the grant with rvalid. FP-ALU requests use fp_req_t with a
// valid/ready handshake and come back as a single-cycle fp_rsp_t pulse.
// Matrix-multiply commands (gemm_cmd_t) describe C (+)= A x B where every
// operand element (r,c) sits at base + r*rs + c*cs, so transposed or vector
// operands are expressed purely through the strides.
package tt_pkg;

  localparam int unsigned DW        = 32;      // FP32 data word
  localparam int unsigned SPM_AW    = 17;      // word address: 320 KB / 4 B = 81920 words
  localparam int unsigned DIM_W     = 12;      // matrix dimension field width
  localparam int unsigned TILE      = 16;      // GEMM accelerator block edge
  localparam int unsigned FIFO_DEPTH = 4;      // FP-ALU streamer FIFO entries

  localparam logic [31:0] FP_ZERO = 32'h0000_0000;
  localparam logic [31:0] FP_ONE  = 32'h3F80_0000;
  localparam logic [31:0] FP_QNAN = 32'h7FC0_0000;

  typedef logic [SPM_AW-1:0] addr_t;
  typedef logic [DIM_W-1:0]  dim_t;

  // SPM client port
  typedef struct packed {
    logic        req;
    logic        we;
    addr_t       addr;
    logic [31:0] wdata;
  } mem_req_t;

  typedef struct packed {
    logic        gnt;
    logic        rvalid;
    logic [31:0] rdata;
  } mem_rsp_t;

  // Shared FP-ALU operations
  typedef enum logic [2:0] {
    FP_ADD  = 3'd0,   // a + b
    FP_MUL  = 3'd1,   // a * b
    FP_MAC  = 3'd2,   // a * b + c
    FP_DIV  = 3'd3,   // a / b
    FP_SQRT = 3'd4,   // sqrt(a)
    FP_NORM = 3'd5    // sqrt(sum SPM[addr+k]^2), k < len
  } fp_op_e;

  typedef struct packed {
    fp_op_e      op;
    logic [31:0] a;
    logic [31:0] b;
    logic [31:0] c;
    addr_t       addr;
    dim_t        len;
    logic        store;   // 1: write the result to SPM word addr before answering
  } fp_req_t;

  // Strided matrix multiplication C (+)= A(m x k) * B(k x n)
  typedef struct packed {
    addr_t a_base; addr_t a_rs; addr_t a_cs;
    addr_t b_base; addr_t b_rs; addr_t b_cs;
    addr_t c_base; addr_t c_rs; addr_t c_cs;
    dim_t  m;
    dim_t  n;
    dim_t  k;
    logic  acc;      // 1: C += A*B, 0: C = A*B
  } gemm_cmd_t;

  // Strided gather copy issued to the system DMA:
  // dst[j] = mem[src + j*stride], j < len
  typedef struct packed {
    addr_t src;
    addr_t stride;
    addr_t dst;
    dim_t  len;
  } dma_cmd_t;

  // Register map of the TTD-Engine (APB byte address = 4 * index)
  localparam int unsigned NREGS     = 32;
  localparam int unsigned R_CTRL    = 0;   // W: bit0 HBD, bit1 SORT, bit2 DELTA, bit3 TRUNC start
  localparam int unsigned R_STATUS  = 1;   // R: [3:0] busy (HBD,SORT,TRUNC,any), [6:4] done flags
  localparam int unsigned R_A_ADDR  = 2;   // HBD: matrix A
  localparam int unsigned R_M       = 3;   // HBD: rows M
  localparam int unsigned R_N       = 4;   // HBD: columns N
  localparam int unsigned R_U_ADDR  = 5;   // HBD: U_B (M x N)
  localparam int unsigned R_VT_ADDR = 6;   // HBD: V_B^T (N x N)
  localparam int unsigned R_D_ADDR  = 7;   // HBD: diagonal of B
  localparam int unsigned R_E_ADDR  = 8;   // HBD: super-diagonal of B
  localparam int unsigned R_V_ADDR  = 9;   // HBD: vector buffer v
  localparam int unsigned R_VP_ADDR = 10;  // HBD: vector buffer v'
  localparam int unsigned R_W_ADDR  = 11;  // HBD: GEMM work vector w
  localparam int unsigned R_SIG     = 12;  // SORT/TRUNC: singular values
  localparam int unsigned R_SIG_N   = 13;  // SORT/TRUNC: number of singular values
  localparam int unsigned R_SU_SRC  = 14;  // SORT: U source
  localparam int unsigned R_SU_DST  = 15;  // SORT: U destination
  localparam int unsigned R_SU_ROWS = 16;  // SORT: rows of U
  localparam int unsigned R_SU_LD   = 17;  // SORT: row stride of U
  localparam int unsigned R_SV_SRC  = 18;  // SORT: V^T source
  localparam int unsigned R_SV_DST  = 19;  // SORT: V^T destination
  localparam int unsigned R_SV_COLS = 20;  // SORT: columns of V^T
  localparam int unsigned R_SV_LD   = 21;  // SORT: row stride of V^T
  localparam int unsigned R_EPS     = 22;  // TRUNC: prescribed accuracy (FP32)
  localparam int unsigned R_DM1     = 23;  // TRUNC: d-1 (FP32)
  localparam int unsigned R_DELTA   = 24;  // R: threshold delta (FP32)
  localparam int unsigned R_RK      = 25;  // R: truncated rank r_k
  localparam int unsigned R_TILES   = 26;  // R: GEMM blocks issued
  localparam int unsigned R_SWAPS   = 27;  // R: sorting exchanges
  localparam int unsigned R_TSTEPS  = 28;  // R: truncation rank decrements

endpackage
