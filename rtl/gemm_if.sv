// GEMM I/F: blockwise matrix multiplication on behalf of the GEMM accelerator.
//
// A command describes C (+)= A x B of any size (m x k times k x n) with strided
// operands in the SPM (see tt_pkg::gemm_cmd_t). The interface cuts it into
// blocks of at most TILE x TILE x TILE, computes each block's base addresses
// (base + r0*rs + c0*cs) and sizes, and hands the blocks one after another to
// the GEMM accelerator: output blocks in row-major order, and for each of them
// the k-blocks in order, the first using the command's acc flag and the rest
// accumulating. done pulses after the last block; a command with m, n or k of
// zero finishes at once without touching memory. tiles counts the blocks issued
// since reset. Computing block parameters here rather than on the host core is
// what the paper proposes; the block order is this design's choice.
module gemm_if
  import tt_pkg::*;
#(
  parameter int unsigned TILE_SIZE = TILE
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  gemm_cmd_t   cmd,
  output logic        done,
  output logic        tile_valid,
  input  logic        tile_ready,
  output gemm_cmd_t   tile,
  input  logic        tile_done,
  output logic [31:0] tiles
);
  typedef enum logic [1:0] {T_IDLE, T_ISSUE, T_WAIT} tstate_e;
  tstate_e st;
  gemm_cmd_t c;
  dim_t r0, c0, k0;

  function automatic dim_t blk(input dim_t total, input dim_t pos);
    return (total - pos > dim_t'(TILE_SIZE)) ? dim_t'(TILE_SIZE) : (total - pos);
  endfunction

  always_comb begin
    tile = c;
    tile.a_base = c.a_base + addr_t'(r0) * c.a_rs + addr_t'(k0) * c.a_cs;
    tile.b_base = c.b_base + addr_t'(k0) * c.b_rs + addr_t'(c0) * c.b_cs;
    tile.c_base = c.c_base + addr_t'(r0) * c.c_rs + addr_t'(c0) * c.c_cs;
    tile.m = blk(c.m, r0);
    tile.n = blk(c.n, c0);
    tile.k = blk(c.k, k0);
    tile.acc = (k0 == 0) ? c.acc : 1'b1;
  end

  assign cmd_ready  = (st == T_IDLE);
  assign tile_valid = (st == T_ISSUE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= T_IDLE; c <= '0; r0 <= '0; c0 <= '0; k0 <= '0; done <= 1'b0; tiles <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        T_IDLE: if (cmd_valid) begin
          c <= cmd; r0 <= '0; c0 <= '0; k0 <= '0;
          if (cmd.m == 0 || cmd.n == 0 || cmd.k == 0) done <= 1'b1;
          else st <= T_ISSUE;
        end
        T_ISSUE: if (tile_ready) begin
          st <= T_WAIT;
          tiles <= tiles + 1;
        end
        T_WAIT: if (tile_done) begin
          st <= T_ISSUE;
          if (k0 + dim_t'(TILE_SIZE) < c.k) k0 <= k0 + dim_t'(TILE_SIZE);
          else begin
            k0 <= '0;
            if (c0 + dim_t'(TILE_SIZE) < c.n) c0 <= c0 + dim_t'(TILE_SIZE);
            else begin
              c0 <= '0;
              if (r0 + dim_t'(TILE_SIZE) < c.m) r0 <= r0 + dim_t'(TILE_SIZE);
              else begin st <= T_IDLE; done <= 1'b1; end
            end
          end
        end
        default: st <= T_IDLE;
      endcase
    end
  end
endmodule
