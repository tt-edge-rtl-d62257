// Testbench memory with one SPM client port (mem_req_t/mem_rsp_t). Requests
// are granted in a random 3 of 4 cycles when STALL is set, every cycle
// otherwise; read data come one cycle after the grant. Testbenches preload and
// inspect the array mem directly.
module tb_mem_model
  import tt_pkg::*;
#(
  parameter int unsigned WORDS = 4096,
  parameter bit          STALL = 1
) (
  input  logic     clk,
  input  mem_req_t mreq,
  output mem_rsp_t mrsp
);
  logic [31:0] mem [WORDS];
  logic allow = 1'b1;

  always @(posedge clk) allow <= !STALL || ($urandom_range(3) != 0);

  assign mrsp.gnt = mreq.req && allow;

  initial mrsp.rvalid = 1'b0;
  always @(posedge clk) begin
    mrsp.rvalid <= mreq.req && allow && !mreq.we;
    if (mreq.req && allow) begin
      if (mreq.we) mem[mreq.addr] <= mreq.wdata;
      else         mrsp.rdata <= mem[mreq.addr];
    end
  end
endmodule
