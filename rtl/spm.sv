// Scratchpad memory (SPM) of the GEMM accelerator, reused by the whole
// TTD-Engine. WORDS 32-bit words (default 81920 = 320 KB, the paper's size),
// one port: on a cycle with en high it writes wdata to addr when we is high,
// otherwise it reads addr and shows the word on rdata in the next cycle.
// Written as an array, so it maps to block RAM or an SRAM macro. The single
// port and the one-cycle read latency are this design's choice.
module spm
  import tt_pkg::*;
#(
  parameter int unsigned WORDS = 81920
) (
  input  logic        clk,
  input  logic        en,
  input  logic        we,
  input  addr_t       addr,
  input  logic [31:0] wdata,
  output logic [31:0] rdata
);
  logic [31:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end

  assert property (@(posedge clk) en |-> (32'(addr) < WORDS))
    else $error("spm: address %0d out of range", addr);
endmodule
