// SPM I/F: arbitration of the single SPM port among NCLI clients.
//
// Every cycle the lowest-numbered client with req high is granted (gnt in the
// same cycle) and its access goes to the SPM. For a read, rvalid and rdata are
// returned to that client one cycle later, when the SPM's registered output
// is valid. Clients must hold their request until granted. Client order in the
// TTD-Engine: 0 external (DMA/AXI), 1 GEMM accelerator, 2 FP-ALU streamer,
// 3 HBD-ACC, 4 SORTING. The paper names this interface only; fixed-priority
// arbitration is this design's choice.
module spm_if
  import tt_pkg::*;
#(
  parameter int unsigned NCLI = 5
) (
  input  logic        clk,
  input  logic        rst_n,
  input  mem_req_t    creq [NCLI],
  output mem_rsp_t    crsp [NCLI],
  output logic        en,
  output logic        we,
  output addr_t       addr,
  output logic [31:0] wdata,
  input  logic [31:0] rdata
);
  localparam int unsigned IW = (NCLI > 1) ? $clog2(NCLI) : 1;
  logic [IW-1:0] win, rd_owner;
  logic          any, rd_pend;

  always_comb begin
    any = 1'b0; win = '0;
    for (int i = NCLI - 1; i >= 0; i--)
      if (creq[i].req) begin any = 1'b1; win = IW'(i); end
  end

  assign en    = any;
  assign we    = creq[win].we;
  assign addr  = creq[win].addr;
  assign wdata = creq[win].wdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_pend <= 1'b0; rd_owner <= '0;
    end else begin
      rd_pend  <= any && !creq[win].we;
      rd_owner <= win;
    end
  end

  always_comb begin
    for (int i = 0; i < NCLI; i++) begin
      crsp[i].gnt    = any && (win == IW'(i));
      crsp[i].rvalid = rd_pend && (rd_owner == IW'(i));
      crsp[i].rdata  = rdata;
    end
  end
endmodule
