// Behavioural model of the system DMA engine, as seen by the TTD-Engine.
// It accepts one gather command at a time (cmd_valid/cmd_ready) and copies
// dst[j] = mem[src + j*stride] for j < len through the SPM's system-side port,
// then pulses done. A random 0-3 cycle delay is inserted before each access to
// imitate interconnect latency. Not synthesizable logic of the design.
module dma_model
  import tt_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      cmd_valid,
  output logic      cmd_ready,
  input  dma_cmd_t  cmd,
  output logic      done,
  output logic      active,
  output mem_req_t  mreq,
  input  mem_rsp_t  mrsp,
  output int        ncmds
);
  initial begin
    cmd_ready = 0; done = 0; active = 0; mreq = '0; ncmds = 0;
    @(posedge rst_n);
    forever begin
      dma_cmd_t c;
      logic [31:0] w;
      @(negedge clk);
      cmd_ready = 1;
      #1; while (!cmd_valid) begin @(negedge clk); #1; end
      c = cmd;
      @(negedge clk); cmd_ready = 0; active = 1; ncmds++;
      for (int j = 0; j < int'(c.len); j++) begin
        repeat ($urandom_range(3)) @(negedge clk);
        // read the source word: request at a falling edge, granted at the
        // next rising edge, data valid after it
        mreq = '{req: 1'b1, we: 1'b0, addr: c.src + addr_t'(j) * c.stride, wdata: 32'd0};
        #1; while (!mrsp.gnt) begin @(negedge clk); #1; end
        @(negedge clk); mreq.req = 0; w = mrsp.rdata;
        mreq = '{req: 1'b1, we: 1'b1, addr: c.dst + addr_t'(j), wdata: w};
        #1; while (!mrsp.gnt) begin @(negedge clk); #1; end
        @(negedge clk); mreq.req = 0;
      end
      active = 0;
      done = 1;
      @(negedge clk); done = 0;
    end
  end
endmodule
