// FP-ALU VEC STREAM: streams a vector out of the SPM into the FP-ALU core.
//
// On start it latches addr and len and clears the element counter cnt_k; it
// then requests SPM word addr + cnt_k for cnt_k = 0 .. len-1 and pushes every
// returned word into a FIFO whose output (valid/ready) feeds the core. A read
// is issued only while the FIFO has room for it and for every read still in
// flight, so the FIFO never overflows. busy stays high until the last word has
// been requested and returned.
// SPM port: mem_req_t/mem_rsp_t, request held until gnt, data one cycle after
// gnt (rvalid). The streamer also stores: wr_start writes one result word
// wr_data to SPM word wr_addr, and wr_done pulses in the cycle the write is
// granted. A store is only started while no vector is being read.
// The FIFO's full flag is left unused: the issue rule above already keeps the
// FIFO from overflowing.
// The structure (addr/len registers, adder, cnt_k, FIFO) follows
// the paper's figure; the FIFO depth of 4 is the number of slots drawn there.
module fp_alu_vec_stream
  import tt_pkg::*;
#(
  parameter int unsigned DEPTH = FIFO_DEPTH
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  addr_t       addr,
  input  dim_t        len,
  output logic        busy,
  output mem_req_t    mreq,
  input  mem_rsp_t    mrsp,
  output logic        s_valid,
  output logic [31:0] s_data,
  input  logic        s_ready,
  input  logic        wr_start,
  input  addr_t       wr_addr,
  input  logic [31:0] wr_data,
  output logic        wr_done
);
  localparam int unsigned CW = $clog2(DEPTH) + 1;
  addr_t base;
  dim_t  n, cnt_k;
  logic  [CW-1:0] inflight, count;
  logic  empty, full, issue;
  addr_t       st_addr;
  logic [31:0] st_data;
  logic        st_pend;


  sync_fifo #(.WIDTH(32), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n,
    .wr_en(mrsp.rvalid), .wr_data(mrsp.rdata),
    .rd_en(s_ready), .rd_data(s_data),
    .empty, .full, .count
  );

  assign s_valid = !empty;
  assign issue   = (cnt_k != n) && ((count + inflight) < CW'(DEPTH)) && !st_pend;
  assign mreq.req   = issue || st_pend;
  assign mreq.we    = st_pend;
  assign mreq.addr  = st_pend ? st_addr : base + addr_t'(cnt_k);
  assign mreq.wdata = st_data;
  assign wr_done    = st_pend && mrsp.gnt;
  assign busy = (cnt_k != n) || (inflight != 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      base <= '0; n <= '0; cnt_k <= '0; inflight <= '0;
      st_pend <= 1'b0; st_addr <= '0; st_data <= '0;
    end else begin
      if (wr_start) begin
        st_pend <= 1'b1; st_addr <= wr_addr; st_data <= wr_data;
      end else if (wr_done) begin
        st_pend <= 1'b0;
      end
      if (start) begin
        base <= addr; n <= len; cnt_k <= '0;
      end else if (issue && mrsp.gnt) begin
        cnt_k <= cnt_k + 1'b1;
      end
      inflight <= inflight + CW'(issue && mrsp.gnt && !start) - CW'(mrsp.rvalid);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) wr_start |-> !busy && !st_pend)
    else $error("fp_alu_vec_stream: store started while the streamer is busy");
endmodule
