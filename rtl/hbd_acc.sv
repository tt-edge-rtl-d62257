// HBD-ACC: Householder bidiagonalization accelerator.
//
// Reduces an M x N matrix A (M >= N, row-major, row stride N, in the SPM) to
// upper-bidiagonal form A = U_B * B * V_B^T, running the whole routine without
// the host core. It follows the unified two-phase algorithm:
//   Reduction, i = 0..N-1: left transform (order 0) on column i, then, for
//     i < N-1, right transform (order 1) on row i. Each transform builds the
//     Householder vector v from x (HOUSE: q = -sign(x1)*||x||,
//     v1 = x1 + sign(x1)*||x||), stores q as B[i,i] (order 0, array d) or
//     B[i,i+1] (order 1, array e), writes v1 back into A in place of x1 so the
//     vector stays in the SPM, and updates the trailing sub-array
//     (HOUSE_MM_UPDATE): beta = v1*q, v' = v/beta, then two GEMMs,
//     order 0: w = v^T*S, S += v'*w;  order 1: w = S*v, S += w*v'^T.
//   Accumulation, i = N-1..0: the stored vectors are read back from A and the
//     same update is applied to U_B (order 0) and V_B^T (order 1), which the
//     engine first initialises to identity (U_B is M x N, V_B^T is N x N).
// Every transform passes through the four stages of the paper:
//   PREPARE      address a.addr = A.addr + i*(N+1) + order, DMA gather of the
//                column (stride N) or row (stride 1) into the vector buffer v;
//   HOUSE        NORM of v and ADD ||v|| + |v1| on the shared FP-ALU, sign
//                handling by bit operations (reduction only);
//   VEC DIVISION beta = q*v1 (MUL), then v'[k] = v[k]/beta (DIV) element by
//                element; each DIV carries the FP-ALU's store flag, so the
//                FP-ALU itself writes v'[k] into buffer v' (in accumulation q
//                comes from B and v1 from the SPM);
//   REQUEST GEMM GEMM1 and GEMM2 configurations sent to the GEMM I/F.
// Interfaces: start/busy/done; DMA command (valid/ready + done); FP-ALU client
// (valid/ready + rsp pulse); SPM client port; GEMM I/F command (valid/ready +
// done). Buffers v, v' and w (w needs max(M,N) words) are given by address.
// Departures: the accumulation updates U_B[i:M, i:N] (the paper's listing
// writes i+1:N, which leaves column i of U_B unreflected); a column or row of
// all zeros (beta = 0) is not treated specially; sign(0) is taken as +1.
module hbd_acc
  import tt_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  output logic        busy,
  output logic        done,
  input  addr_t       a_addr,
  input  dim_t        m_rows,
  input  dim_t        n_cols,
  input  addr_t       u_addr,
  input  addr_t       vt_addr,
  input  addr_t       d_addr,
  input  addr_t       e_addr,
  input  addr_t       v_addr,
  input  addr_t       vp_addr,
  input  addr_t       w_addr,
  // DMA command interface
  output logic        dma_valid,
  input  logic        dma_ready,
  output dma_cmd_t    dma_cmd,
  input  logic        dma_done,
  // shared FP-ALU client
  output logic        fp_valid,
  input  logic        fp_ready,
  output fp_req_t     fp_req,
  input  logic        fp_rsp_valid,
  input  logic [31:0] fp_rsp,
  // SPM client
  output mem_req_t    mreq,
  input  mem_rsp_t    mrsp,
  // GEMM I/F
  output logic        gemm_valid,
  input  logic        gemm_ready,
  output gemm_cmd_t   gemm_cmd,
  input  logic        gemm_done
);
  typedef enum logic [4:0] {
    H_IDLE, H_INIT, H_PREP, H_DMAW, H_NORM, H_RDV1, H_ADD, H_WRV, H_WRA, H_WRQ,
    H_RDQ, H_BETA, H_RDK, H_DIVK, H_G1, H_G1W, H_G2, H_G2W, H_NEXT
  } hstate_e;
  hstate_e st;

  logic  ph;       // 0 reduction, 1 accumulation
  logic  order;    // 0 left (column), 1 right (row)
  dim_t  i, k, len, sub_rows, sub_cols;
  dim_t  ir, ic;   // identity initialisation counters
  logic  init_v;   // 0: U_B, 1: V_B^T
  logic  fp_sent, pending;
  logic [31:0] nrm, v1, q, beta, tmp;
  addr_t vec_addr, q_addr, sub_base, rs;

  // ---------------------------------------------------------------- PREPARE
  always_comb begin
    rs = addr_t'(n_cols);
    // a.addr = A.addr + i*(A.width+1) + order
    vec_addr = a_addr + addr_t'(i) * (rs + 1'b1) + addr_t'(order);
    len      = order ? (n_cols - i - 1'b1) : (m_rows - i);
    q_addr   = order ? (e_addr + addr_t'(i)) : (d_addr + addr_t'(i));
    if (!ph) begin
      sub_base = order ? (a_addr + (addr_t'(i) + 1'b1) * rs + (addr_t'(i) + 1'b1))
                       : (a_addr + addr_t'(i) * rs + (addr_t'(i) + 1'b1));
      sub_rows = order ? (m_rows - i - 1'b1) : (m_rows - i);
      sub_cols = order ? (n_cols - i - 1'b1) : (n_cols - i - 1'b1);
    end else begin
      sub_base = order ? (vt_addr + (addr_t'(i) + 1'b1) * rs + (addr_t'(i) + 1'b1))
                       : (u_addr + addr_t'(i) * rs + addr_t'(i));
      sub_rows = order ? (n_cols - i - 1'b1) : (m_rows - i);
      sub_cols = order ? (n_cols - i - 1'b1) : (n_cols - i);
    end
  end

  assign dma_valid      = (st == H_PREP);
  assign dma_cmd.src    = vec_addr;
  assign dma_cmd.stride = order ? addr_t'(1) : rs;
  assign dma_cmd.dst    = v_addr;
  assign dma_cmd.len    = len;

  // ---------------------------------------------------------------- FP-ALU
  always_comb begin
    fp_req = '0;
    fp_req.addr = v_addr;
    fp_req.len  = len;
    unique case (st)
      H_NORM: fp_req.op = FP_NORM;
      H_ADD:  begin fp_req.op = FP_ADD; fp_req.a = nrm; fp_req.b = {1'b0, v1[30:0]}; end
      H_BETA: begin fp_req.op = FP_MUL; fp_req.a = q;   fp_req.b = v1; end
      H_DIVK: begin
        fp_req.op = FP_DIV; fp_req.a = tmp; fp_req.b = beta;
        fp_req.store = 1'b1; fp_req.addr = vp_addr + addr_t'(k);
      end
      default: fp_req.op = FP_ADD;
    endcase
  end
  assign fp_valid = (st inside {H_NORM, H_ADD, H_BETA, H_DIVK}) && !fp_sent;

  // ---------------------------------------------------------------- SPM
  always_comb begin
    mreq = '0;
    unique case (st)
      H_INIT: begin
        mreq.req = 1'b1; mreq.we = 1'b1;
        mreq.addr = (init_v ? vt_addr : u_addr) + addr_t'(ir) * rs + addr_t'(ic);
        mreq.wdata = (ir == ic) ? FP_ONE : FP_ZERO;
      end
      H_RDV1: begin mreq.req = !pending; mreq.addr = v_addr; end
      H_RDQ:  begin mreq.req = !pending; mreq.addr = q_addr; end
      H_RDK:  begin mreq.req = !pending; mreq.addr = v_addr + addr_t'(k); end
      H_WRV:  begin mreq.req = 1'b1; mreq.we = 1'b1; mreq.addr = v_addr;   mreq.wdata = v1; end
      H_WRA:  begin mreq.req = 1'b1; mreq.we = 1'b1; mreq.addr = vec_addr; mreq.wdata = v1; end
      H_WRQ:  begin mreq.req = 1'b1; mreq.we = 1'b1; mreq.addr = q_addr;   mreq.wdata = q; end
      default: ;
    endcase
  end

  // ---------------------------------------------------------------- GEMM
  always_comb begin
    gemm_cmd = '0;
    if (!order) begin
      if (st == H_G1) begin   // w(1 x cols) = v^T * S
        gemm_cmd.a_base = v_addr;   gemm_cmd.a_rs = '0; gemm_cmd.a_cs = addr_t'(1);
        gemm_cmd.b_base = sub_base; gemm_cmd.b_rs = rs; gemm_cmd.b_cs = addr_t'(1);
        gemm_cmd.c_base = w_addr;   gemm_cmd.c_rs = '0; gemm_cmd.c_cs = addr_t'(1);
        gemm_cmd.m = dim_t'(1); gemm_cmd.n = sub_cols; gemm_cmd.k = sub_rows; gemm_cmd.acc = 1'b0;
      end else begin          // S += v' * w
        gemm_cmd.a_base = vp_addr;  gemm_cmd.a_rs = addr_t'(1); gemm_cmd.a_cs = '0;
        gemm_cmd.b_base = w_addr;   gemm_cmd.b_rs = '0; gemm_cmd.b_cs = addr_t'(1);
        gemm_cmd.c_base = sub_base; gemm_cmd.c_rs = rs; gemm_cmd.c_cs = addr_t'(1);
        gemm_cmd.m = sub_rows; gemm_cmd.n = sub_cols; gemm_cmd.k = dim_t'(1); gemm_cmd.acc = 1'b1;
      end
    end else begin
      if (st == H_G1) begin   // w(rows x 1) = S * v
        gemm_cmd.a_base = sub_base; gemm_cmd.a_rs = rs; gemm_cmd.a_cs = addr_t'(1);
        gemm_cmd.b_base = v_addr;   gemm_cmd.b_rs = addr_t'(1); gemm_cmd.b_cs = '0;
        gemm_cmd.c_base = w_addr;   gemm_cmd.c_rs = addr_t'(1); gemm_cmd.c_cs = '0;
        gemm_cmd.m = sub_rows; gemm_cmd.n = dim_t'(1); gemm_cmd.k = sub_cols; gemm_cmd.acc = 1'b0;
      end else begin          // S += w * v'^T
        gemm_cmd.a_base = w_addr;   gemm_cmd.a_rs = addr_t'(1); gemm_cmd.a_cs = '0;
        gemm_cmd.b_base = vp_addr;  gemm_cmd.b_rs = '0; gemm_cmd.b_cs = addr_t'(1);
        gemm_cmd.c_base = sub_base; gemm_cmd.c_rs = rs; gemm_cmd.c_cs = addr_t'(1);
        gemm_cmd.m = sub_rows; gemm_cmd.n = sub_cols; gemm_cmd.k = dim_t'(1); gemm_cmd.acc = 1'b1;
      end
    end
  end
  assign gemm_valid = (st == H_G1) || (st == H_G2);
  assign busy = (st != H_IDLE);

  // ---------------------------------------------------------------- control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= H_IDLE; ph <= 1'b0; order <= 1'b0; i <= '0; k <= '0; ir <= '0; ic <= '0;
      init_v <= 1'b0; fp_sent <= 1'b0; pending <= 1'b0; done <= 1'b0;
      nrm <= '0; v1 <= '0; q <= '0; beta <= '0; tmp <= '0;
    end else begin
      done <= 1'b0;
      if (fp_valid && fp_ready) fp_sent <= 1'b1;
      if (fp_rsp_valid) fp_sent <= 1'b0;
      unique case (st)
        H_IDLE: if (start) begin
          st <= H_INIT; ir <= '0; ic <= '0; init_v <= 1'b0;
          ph <= 1'b0; order <= 1'b0; i <= '0;
        end
        H_INIT: if (mrsp.gnt) begin
          if (ic + 1'b1 < n_cols) ic <= ic + 1'b1;
          else begin
            ic <= '0;
            if (ir + 1'b1 < (init_v ? n_cols : m_rows)) ir <= ir + 1'b1;
            else begin
              ir <= '0;
              if (!init_v) init_v <= 1'b1;
              else st <= H_PREP;
            end
          end
        end
        // PREPARE: DMA gather of the vector into v
        H_PREP: if (dma_ready) st <= H_DMAW;
        H_DMAW: if (dma_done) st <= ph ? H_RDQ : H_NORM;
        // HOUSE (reduction only)
        H_NORM: if (fp_rsp_valid) begin nrm <= fp_rsp; st <= H_RDV1; end
        H_RDV1: begin
          if (mrsp.gnt) pending <= 1'b1;
          if (pending && mrsp.rvalid) begin
            pending <= 1'b0; v1 <= mrsp.rdata;
            st <= ph ? H_BETA : H_ADD;
          end
        end
        // q = -sign(v1)*||v||, new v1 = sign(v1)*(||v|| + |v1|), sign(0) = +1
        H_ADD: if (fp_rsp_valid) begin
          tmp <= fp_rsp;
          q   <= {~v1[31], nrm[30:0]};
          st  <= H_WRV;
          v1  <= {v1[31], fp_rsp[30:0]};    // new v1
        end
        H_WRV: if (mrsp.gnt) st <= H_WRA;
        H_WRA: if (mrsp.gnt) st <= H_WRQ;
        H_WRQ: if (mrsp.gnt) st <= H_BETA;
        // accumulation: q from B, then v1 from the SPM
        H_RDQ: begin
          if (mrsp.gnt) pending <= 1'b1;
          if (pending && mrsp.rvalid) begin
            pending <= 1'b0; q <= mrsp.rdata; st <= H_RDV1;
          end
        end
        // VEC DIVISION
        H_BETA: if (fp_rsp_valid) begin beta <= fp_rsp; k <= '0; st <= H_RDK; end
        H_RDK: begin
          if (mrsp.gnt) pending <= 1'b1;
          if (pending && mrsp.rvalid) begin
            pending <= 1'b0; tmp <= mrsp.rdata; st <= H_DIVK;
          end
        end
        H_DIVK: if (fp_rsp_valid) begin
          if (k + 1'b1 < len) begin k <= k + 1'b1; st <= H_RDK; end
          else st <= H_G1;
        end
        // REQUEST GEMM
        H_G1:  if (gemm_ready) st <= H_G1W;
        H_G1W: if (gemm_done) st <= H_G2;
        H_G2:  if (gemm_ready) st <= H_G2W;
        H_G2W: if (gemm_done) st <= H_NEXT;
        H_NEXT: begin
          st <= H_PREP;
          if (!ph) begin
            if (!order && i + 1'b1 < n_cols) order <= 1'b1;
            else if (order) begin order <= 1'b0; i <= i + 1'b1; end
            else begin ph <= 1'b1; order <= 1'b0; end   // i stays N-1
          end else begin
            if (!order && i + 1'b1 < n_cols) order <= 1'b1;
            else if (i == 0) begin st <= H_IDLE; done <= 1'b1; end
            else begin order <= 1'b0; i <= i - 1'b1; end
          end
        end
        default: st <= H_IDLE;
      endcase
    end
  end
endmodule
