// TRUNCATION module: delta-truncation of the sorted singular values.
//
// Two commands. start_delta computes the truncation threshold once per
// decomposition, delta = eps / sqrt(d-1) * ||sigma||, where ||sigma|| is the
// norm of the first SVD's singular values (equal to the Frobenius norm of the
// input tensor): the shared FP-ALU performs NORM, SQRT, MUL and DIV in turn.
// eps and d-1 are given as FP32 values. start_trunc then finds the truncated
// rank r_k for a descending vector of rank values at sig_addr: starting from a
// candidate equal to rank-1 it forms the error vector e = sigma[cand .. rank-1]
// (address sig_addr + cand, the values that would be dropped), asks the FP-ALU
// for ||e|| and compares it with delta. If ||e|| > delta the candidate cannot
// be taken and r_k = cand + 1 is final; otherwise the candidate is accepted,
// decremented, and the test repeats, down to r_k = 1. Both values are
// non-negative, so the comparison uses their bits 30:0 only (the sign bit of
// the norm stays unused). steps counts the
// accepted decrements since reset. done pulses at the end of either command.
// The FSM + comparator + address adder structure follows the paper; the exact
// loop bounds (keep at least one value, strict ">" test) are this design's
// reading of the text and of the algorithm listing.
module truncation
  import tt_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start_delta,
  input  logic        start_trunc,
  output logic        busy,
  output logic        done,
  input  addr_t       sig_addr,
  input  dim_t        rank,
  input  logic [31:0] eps,
  input  logic [31:0] dm1,
  output logic [31:0] delta,
  output dim_t        r_k,
  output logic [31:0] steps,
  // shared FP-ALU client
  output logic        fp_valid,
  input  logic        fp_ready,
  output fp_req_t     fp_req,
  input  logic        fp_rsp_valid,
  input  logic [31:0] fp_rsp
);
  typedef enum logic [2:0] {T_IDLE, T_NORM, T_SQRT, T_MUL, T_DIV, T_ENORM, T_CMP} tstate_e;
  tstate_e st;
  logic        fp_sent;
  logic [31:0] nrm, sq, prod, enorm;
  dim_t        cand;

  always_comb begin
    fp_req = '0;
    unique case (st)
      T_NORM:  begin fp_req.op = FP_NORM; fp_req.addr = sig_addr; fp_req.len = rank; end
      T_SQRT:  begin fp_req.op = FP_SQRT; fp_req.a = dm1; end
      T_MUL:   begin fp_req.op = FP_MUL;  fp_req.a = eps; fp_req.b = nrm; end
      T_DIV:   begin fp_req.op = FP_DIV;  fp_req.a = prod; fp_req.b = sq; end
      T_ENORM: begin fp_req.op = FP_NORM; fp_req.addr = sig_addr + addr_t'(cand); fp_req.len = rank - cand; end
      default: fp_req.op = FP_ADD;
    endcase
  end
  assign fp_valid = (st inside {T_NORM, T_SQRT, T_MUL, T_DIV, T_ENORM}) && !fp_sent;
  assign busy = (st != T_IDLE);

  // comparator: ||e|| > delta for non-negative FP32 values
  logic e_gt_delta;
  assign e_gt_delta = enorm[30:0] > delta[30:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= T_IDLE; fp_sent <= 1'b0; nrm <= '0; sq <= '0; prod <= '0; enorm <= '0;
      delta <= '0; r_k <= '0; cand <= '0; done <= 1'b0; steps <= '0;
    end else begin
      done <= 1'b0;
      if (fp_valid && fp_ready) fp_sent <= 1'b1;
      if (fp_rsp_valid) fp_sent <= 1'b0;
      unique case (st)
        T_IDLE: begin
          if (start_delta) st <= T_NORM;
          else if (start_trunc) begin
            r_k <= rank;
            if (rank > 1) begin cand <= rank - 1'b1; st <= T_ENORM; end
            else done <= 1'b1;
          end
        end
        T_NORM: if (fp_rsp_valid) begin nrm  <= fp_rsp; st <= T_SQRT; end
        T_SQRT: if (fp_rsp_valid) begin sq   <= fp_rsp; st <= T_MUL; end
        T_MUL:  if (fp_rsp_valid) begin prod <= fp_rsp; st <= T_DIV; end
        T_DIV:  if (fp_rsp_valid) begin delta <= fp_rsp; st <= T_IDLE; done <= 1'b1; end
        T_ENORM: if (fp_rsp_valid) begin enorm <= fp_rsp; st <= T_CMP; end
        T_CMP: begin
          if (e_gt_delta) begin
            st <= T_IDLE; done <= 1'b1;           // r_k stays cand + 1
          end else begin
            r_k <= cand; steps <= steps + 1;
            if (cand > 1) begin cand <= cand - 1'b1; st <= T_ENORM; end
            else begin st <= T_IDLE; done <= 1'b1; end
          end
        end
        default: st <= T_IDLE;
      endcase
    end
  end
endmodule
