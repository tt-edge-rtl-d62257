// Shared FP-ALU: the one floating-point unit of the TTD-Engine, shared by the
// HBD-ACC and the TRUNCATION module (and by any further client).
//
// The FP-ALU DECODER accepts one request at a time from NREQ clients (fixed
// priority, client 0 first), remembers which client owns the operation and
// returns the result to that client only, as a one-cycle rsp_valid pulse with
// the result on rsp_data. Single operations (ADD, MUL, MAC, DIV, SQRT) pass
// their operands straight to the FP-ALU CORE; a NORM request also starts the
// FP-ALU VEC STREAM with the request's SPM address and length, whose FIFO then
// feeds the core's stream input. A client holds req_valid with a stable request
// until req_ready; a new request is accepted only after the previous result.
// A single operation with the store flag set has its result written by the
// streamer to SPM word addr; its rsp_valid then comes in the cycle that write
// is granted, so the client may read the word from then on (store is ignored
// for NORM, whose addr is the vector).
// The decoder/streamer/core split follows the paper; the fixed-priority
// arbitration and the handshakes are this design's choice.
module fp_alu
  import tt_pkg::*;
#(
  parameter int unsigned NREQ = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NREQ-1:0]   req_valid,
  input  fp_req_t           req [NREQ],
  output logic [NREQ-1:0]   req_ready,
  output logic [NREQ-1:0]   rsp_valid,
  output logic [31:0]       rsp_data,
  output mem_req_t          mreq,
  input  mem_rsp_t          mrsp
);
  localparam int unsigned IW = (NREQ > 1) ? $clog2(NREQ) : 1;

  logic          busy;
  logic [IW-1:0] owner, pick;
  logic          any;
  fp_req_t       sel;

  always_comb begin
    any = 1'b0; pick = '0;
    for (int i = NREQ - 1; i >= 0; i--)
      if (req_valid[i]) begin any = 1'b1; pick = IW'(i); end
    sel = req[pick];
  end

  logic core_ready, core_valid, res_valid;
  logic [31:0] res;
  logic s_valid, s_ready, st_busy;
  logic store_f, wr_done, rsp_fire;
  addr_t store_addr;
  logic [31:0] res_q;
  logic [31:0] s_data;

  assign core_valid = any && !busy && core_ready;

  always_comb begin
    req_ready = '0;
    if (core_valid) req_ready[pick] = 1'b1;
  end

  fp_alu_core u_core (
    .clk, .rst_n,
    .op_valid(core_valid), .op_ready(core_ready),
    .op(sel.op), .a(sel.a), .b(sel.b), .c(sel.c), .len(sel.len),
    .s_valid, .s_data, .s_ready,
    .res_valid, .res
  );

  fp_alu_vec_stream u_stream (
    .clk, .rst_n,
    .start(core_valid && sel.op == FP_NORM),
    .addr(sel.addr), .len(sel.len), .busy(st_busy),
    .mreq, .mrsp,
    .s_valid, .s_data, .s_ready,
    .wr_start(res_valid && store_f), .wr_addr(store_addr), .wr_data(res), .wr_done
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; owner <= '0; store_f <= 1'b0; store_addr <= '0; res_q <= '0;
    end else begin
      if (core_valid) begin
        busy <= 1'b1; owner <= pick; store_f <= sel.store && (sel.op != FP_NORM); store_addr <= sel.addr;
      end else if (rsp_fire) begin
        busy <= 1'b0;
      end
      if (res_valid) res_q <= res;
    end
  end

  // a storing operation answers once its result has been written to the SPM
  assign rsp_fire = (res_valid && !store_f) || wr_done;
  always_comb begin
    rsp_valid = '0;
    if (rsp_fire) rsp_valid[owner] = 1'b1;
  end
  assign rsp_data = store_f ? res_q : res;

  // the streamer must have delivered the whole vector when a NORM completes
  assert property (@(posedge clk) disable iff (!rst_n) res_valid |-> !st_busy)
    else $error("fp_alu: result while the vector streamer is still busy");
endmodule
