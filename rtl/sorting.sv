// SORTING module: orders singular values and the matching singular vectors.
//
// Phase 1 bubble-sorts the n singular values stored at sig_addr in the SPM
// into descending order: adjacent pairs (sigma_j, sigma_j+1) are read, compared
// and, when out of order, written back swapped, while the SORTING index array
// records, for every sorted position, the original position of the value now
// there. A pass without swaps ends the sort early. Phase 2 uses the index array
// to copy U (u_rows x n, row stride u_ld) column by column and V^T (n x v_cols,
// row stride v_ld) row by row from their source to their destination regions:
// Us[:, j] = U[:, idx[j]] and Vts[j, :] = Vt[idx[j], :]. Source and
// destination must not overlap. start/busy/done control, one SPM client port;
// each read costs two cycles and each write one when the port is free. swaps
// counts the exchanges since reset. n may not exceed MAX_N.
// Following the paper's figure, the comparison is done by a comparator inside
// this module (the text says the shared FP-ALU compares; see the design notes).
// The early exit and the copy-to-destination reordering are this design's
// choices.
module sorting
  import tt_pkg::*;
#(
  parameter int unsigned MAX_N = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  output logic        busy,
  output logic        done,
  input  addr_t       sig_addr,
  input  dim_t        n,
  input  addr_t       u_src,
  input  addr_t       u_dst,
  input  dim_t        u_rows,
  input  addr_t       u_ld,
  input  addr_t       v_src,
  input  addr_t       v_dst,
  input  dim_t        v_cols,
  input  addr_t       v_ld,
  output mem_req_t    mreq,
  input  mem_rsp_t    mrsp,
  output logic [31:0] swaps
);
  localparam int unsigned IW = $clog2(MAX_N);
  typedef enum logic [3:0] {
    S_IDLE, S_RD0, S_RD1, S_CMP, S_WR0, S_WR1, S_PASS, S_URD, S_UWR, S_VRD, S_VWR
  } sstate_e;
  sstate_e st;

  logic [IW-1:0] idx [MAX_N];
  dim_t  j, last, r;
  logic  swapped, pending;
  logic [31:0] s0, s1, cp;

  // a < b for IEEE-754 values (zeros of either sign are equal)
  function automatic logic fp_lt(input logic [31:0] a, input logic [31:0] b);
    if (a[30:0] == 0 && b[30:0] == 0) return 1'b0;
    if (a[31] != b[31]) return a[31];
    return a[31] ? (a[30:0] > b[30:0]) : (a[30:0] < b[30:0]);
  endfunction

  always_comb begin
    mreq = '0;
    unique case (st)
      S_RD0: begin mreq.req = !pending; mreq.addr = sig_addr + addr_t'(j); end
      S_RD1: begin mreq.req = !pending; mreq.addr = sig_addr + addr_t'(j) + 1'b1; end
      S_WR0: begin mreq.req = 1'b1; mreq.we = 1'b1; mreq.addr = sig_addr + addr_t'(j); mreq.wdata = s1; end
      S_WR1: begin mreq.req = 1'b1; mreq.we = 1'b1; mreq.addr = sig_addr + addr_t'(j) + 1'b1; mreq.wdata = s0; end
      S_URD: begin mreq.req = !pending; mreq.addr = u_src + addr_t'(r) * u_ld + addr_t'(idx[j[IW-1:0]]); end
      S_UWR: begin mreq.req = 1'b1; mreq.we = 1'b1; mreq.addr = u_dst + addr_t'(r) * u_ld + addr_t'(j); mreq.wdata = cp; end
      S_VRD: begin mreq.req = !pending; mreq.addr = v_src + addr_t'(idx[j[IW-1:0]]) * v_ld + addr_t'(r); end
      S_VWR: begin mreq.req = 1'b1; mreq.we = 1'b1; mreq.addr = v_dst + addr_t'(j) * v_ld + addr_t'(r); mreq.wdata = cp; end
      default: ;
    endcase
  end

  assign busy = (st != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; j <= '0; last <= '0; r <= '0; swapped <= 1'b0; pending <= 1'b0;
      s0 <= '0; s1 <= '0; cp <= '0; done <= 1'b0; swaps <= '0;
      for (int x = 0; x < MAX_N; x++) idx[x] <= IW'(x);
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          for (int x = 0; x < MAX_N; x++) idx[x] <= IW'(x);
          j <= '0; last <= n - 1'b1; swapped <= 1'b0;
          st <= (n > 1) ? S_RD0 : S_URD;
        end
        S_RD0: begin
          if (mrsp.gnt) pending <= 1'b1;
          if (pending && mrsp.rvalid) begin pending <= 1'b0; s0 <= mrsp.rdata; st <= S_RD1; end
        end
        S_RD1: begin
          if (mrsp.gnt) pending <= 1'b1;
          if (pending && mrsp.rvalid) begin pending <= 1'b0; s1 <= mrsp.rdata; st <= S_CMP; end
        end
        S_CMP: begin
          if (fp_lt(s0, s1)) begin
            st <= S_WR0;
            swapped <= 1'b1;
            swaps <= swaps + 1;
            idx[j[IW-1:0]]        <= idx[j[IW-1:0] + 1'b1];
            idx[j[IW-1:0] + 1'b1] <= idx[j[IW-1:0]];
          end else st <= S_PASS;
        end
        S_WR0: if (mrsp.gnt) st <= S_WR1;
        S_WR1: if (mrsp.gnt) st <= S_PASS;
        S_PASS: begin
          if (j + 1'b1 < last) begin j <= j + 1'b1; st <= S_RD0; end
          else if (swapped && last > 1) begin
            j <= '0; last <= last - 1'b1; swapped <= 1'b0; st <= S_RD0;
          end else begin
            j <= '0; r <= '0; st <= (u_rows != 0) ? S_URD : S_VRD;
          end
        end
        // reorder columns of U
        S_URD: begin
          if (n == 0) st <= S_IDLE;
          if (n == 0) done <= 1'b1;
          else begin
            if (mrsp.gnt) pending <= 1'b1;
            if (pending && mrsp.rvalid) begin pending <= 1'b0; cp <= mrsp.rdata; st <= S_UWR; end
          end
        end
        S_UWR: if (mrsp.gnt) begin
          st <= S_URD;
          if (r + 1'b1 < u_rows) r <= r + 1'b1;
          else begin
            r <= '0;
            if (j + 1'b1 < n) j <= j + 1'b1;
            else begin j <= '0; st <= (v_cols != 0) ? S_VRD : S_IDLE; done <= (v_cols == 0); end
          end
        end
        // reorder rows of V^T
        S_VRD: begin
          if (mrsp.gnt) pending <= 1'b1;
          if (pending && mrsp.rvalid) begin pending <= 1'b0; cp <= mrsp.rdata; st <= S_VWR; end
        end
        S_VWR: if (mrsp.gnt) begin
          st <= S_VRD;
          if (r + 1'b1 < v_cols) r <= r + 1'b1;
          else begin
            r <= '0;
            if (j + 1'b1 < n) j <= j + 1'b1;
            else begin st <= S_IDLE; done <= 1'b1; end
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) (start && !busy) |-> (n <= dim_t'(MAX_N)))
    else $error("sorting: n larger than MAX_N");
endmodule
