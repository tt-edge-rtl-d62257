// GEMM accelerator (block engine) working on the shared SPM.
//
// One command computes a block C (+)= A x B with m, n, k <= TILE (16, the
// accelerator's block size in the paper). Every operand element (r,c) lives at
// base + r*rs + c*cs in the SPM, so a transposed operand or a row/column vector
// is only a matter of strides. For each output element the engine reads C (if
// acc) or starts from +0, then for t = 0..k-1 reads A[r,t] and B[t,c] and
// accumulates A*B into the sum with an FP32 multiply and add (each rounded),
// and writes C[r,c] back. A command is accepted when cmd_valid and cmd_ready;
// done pulses once the last element is written. Timing: 2 SPM accesses per
// multiply-accumulate plus 1-2 per output element, each access one cycle when
// the SPM port is free and one more cycle of read latency.
// The paper reuses an existing 64-PE GEMM accelerator whose array and dataflow
// it does not describe; this engine gives the same results with a single
// multiply-accumulate datapath, which is this design's simplification.
module gemm_acc
  import tt_pkg::*;
#(
  parameter int unsigned TILE_MAX = TILE
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      cmd_valid,
  output logic      cmd_ready,
  input  gemm_cmd_t cmd,
  output logic      done,
  output mem_req_t  mreq,
  input  mem_rsp_t  mrsp
);
  typedef enum logic [2:0] {G_IDLE, G_RDC, G_RDA, G_RDB, G_WRC} gstate_e;
  gstate_e st;
  gemm_cmd_t c;
  dim_t r, col, t;
  logic [31:0] sum, av, prod, nsum;
  logic pending;   // a read has been granted, data arrive this cycle

  fp_mul u_mul (.a(av), .b(mrsp.rdata), .y(prod));
  fp_add u_add (.a(prod), .b(sum), .y(nsum));

  addr_t a_addr, b_addr, c_addr;
  always_comb begin
    a_addr = c.a_base + addr_t'(r) * c.a_rs + addr_t'(t) * c.a_cs;
    b_addr = c.b_base + addr_t'(t) * c.b_rs + addr_t'(col) * c.b_cs;
    c_addr = c.c_base + addr_t'(r) * c.c_rs + addr_t'(col) * c.c_cs;
  end

  assign cmd_ready = (st == G_IDLE);

  always_comb begin
    mreq = '0;
    unique case (st)
      G_RDC: begin mreq.req = !pending; mreq.addr = c_addr; end
      G_RDA: begin mreq.req = !pending; mreq.addr = a_addr; end
      G_RDB: begin mreq.req = !pending; mreq.addr = b_addr; end
      G_WRC: begin mreq.req = 1'b1; mreq.we = 1'b1; mreq.addr = c_addr; mreq.wdata = sum; end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= G_IDLE; c <= '0; r <= '0; col <= '0; t <= '0;
      sum <= '0; av <= '0; done <= 1'b0; pending <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        G_IDLE: if (cmd_valid) begin
          c <= cmd; r <= '0; col <= '0; t <= '0; sum <= FP_ZERO;
          if (cmd.m == 0 || cmd.n == 0) done <= 1'b1;
          else st <= cmd.acc ? G_RDC : (cmd.k == 0 ? G_WRC : G_RDA);
        end
        G_RDC: begin
          if (mrsp.gnt) pending <= 1'b1;
          if (pending && mrsp.rvalid) begin
            pending <= 1'b0; sum <= mrsp.rdata;
            st <= (c.k == 0) ? G_WRC : G_RDA;
          end
        end
        G_RDA: begin
          if (mrsp.gnt) pending <= 1'b1;
          if (pending && mrsp.rvalid) begin
            pending <= 1'b0; av <= mrsp.rdata; st <= G_RDB;
          end
        end
        G_RDB: begin
          if (mrsp.gnt) pending <= 1'b1;
          if (pending && mrsp.rvalid) begin
            pending <= 1'b0; sum <= nsum;
            if (t + 1'b1 < c.k) begin t <= t + 1'b1; st <= G_RDA; end
            else st <= G_WRC;
          end
        end
        G_WRC: if (mrsp.gnt) begin
          t <= '0; sum <= FP_ZERO;
          st <= c.acc ? G_RDC : (c.k == 0 ? G_WRC : G_RDA);
          if (col + 1'b1 < c.n) col <= col + 1'b1;
          else if (r + 1'b1 < c.m) begin r <= r + 1'b1; col <= '0; end
          else begin st <= G_IDLE; done <= 1'b1; end
        end
        default: st <= G_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
    (cmd_valid && cmd_ready) |-> (cmd.m <= dim_t'(TILE_MAX) && cmd.n <= dim_t'(TILE_MAX) && cmd.k <= dim_t'(TILE_MAX)))
    else $error("gemm_acc: block larger than %0d", TILE_MAX);
endmodule
