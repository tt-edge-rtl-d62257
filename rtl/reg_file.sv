// Register file of the TTD-Engine, reached by the host core over APB.
//
// NREGS 32-bit registers at byte addresses 4*index (map in tt_pkg). Writable
// parameter registers are held in an array and presented on cfg; writing the
// CTRL register produces one-cycle start pulses (bit0 HBD, bit1 SORT, bit2
// DELTA, bit3 TRUNC) and clears the done flags of the started units. STATUS
// reads the busy bits and sticky done flags; DELTA, RK, TILES, SWAPS and TSTEPS read
// results from the units. APB3 slave with no wait states (pready always 1);
// an access beyond the map answers pslverr. Registers reset to zero.
// The paper names the register file and its APB connection only; the map and
// the start/done protocol are this design's choice.
module reg_file
  import tt_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // APB slave
  input  logic        psel,
  input  logic        penable,
  input  logic        pwrite,
  input  logic [11:0] paddr,
  input  logic [31:0] pwdata,
  output logic [31:0] prdata,
  output logic        pready,
  output logic        pslverr,
  // to/from the units
  output logic [31:0] cfg [NREGS],
  output logic        start_hbd,
  output logic        start_sort,
  output logic        start_delta,
  output logic        start_trunc,
  input  logic [2:0]  busy,        // HBD, SORT, TRUNC
  input  logic [2:0]  done,        // one-cycle pulses, same order
  input  logic [31:0] delta,
  input  logic [31:0] r_k,
  input  logic [31:0] tiles,
  input  logic [31:0] swaps,
  input  logic [31:0] tsteps
);
  logic [31:0] regs [NREGS];
  logic [2:0]  done_f;
  logic [9:0]  idx;
  logic        wr, rd, bad;

  assign idx     = paddr[11:2];
  assign bad     = (32'(idx) >= NREGS);
  assign wr      = psel && penable && pwrite && !bad;
  assign rd      = psel && !pwrite;
  assign pready  = 1'b1;
  assign pslverr = psel && penable && bad;
  assign cfg     = regs;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < NREGS; r++) regs[r] <= '0;
      start_hbd <= 1'b0; start_sort <= 1'b0; start_delta <= 1'b0; start_trunc <= 1'b0;
      done_f <= '0;
    end else begin
      start_hbd <= 1'b0; start_sort <= 1'b0; start_delta <= 1'b0; start_trunc <= 1'b0;
      done_f <= done_f | done;
      if (wr) begin
        if (32'(idx) == R_CTRL) begin
          start_hbd   <= pwdata[0];
          start_sort  <= pwdata[1];
          start_delta <= pwdata[2];
          start_trunc <= pwdata[3];
          done_f <= (done_f | done) & ~{pwdata[3] | pwdata[2], pwdata[1], pwdata[0]};
        end else if (32'(idx) != R_STATUS) begin
          regs[idx[4:0]] <= pwdata;
        end
      end
    end
  end

  always_comb begin
    prdata = '0;
    if (rd && !bad) begin
      unique case (32'(idx))
        R_STATUS: prdata = {25'd0, done_f, |busy, busy};
        R_DELTA:  prdata = delta;
        R_RK:     prdata = r_k;
        R_TILES:  prdata = tiles;
        R_SWAPS:  prdata = swaps;
        R_TSTEPS: prdata = tsteps;
        default:  prdata = regs[idx[4:0]];
      endcase
    end
  end

  // APB: the access phase follows a setup phase with the same address
  assert property (@(posedge clk) disable iff (!rst_n) (psel && !penable) |=> (psel && penable))
    else $error("reg_file: APB setup phase not followed by access phase");
  assert property (@(posedge clk) disable iff (!rst_n) (psel && !penable) |=> $stable(paddr) && $stable(pwrite))
    else $error("reg_file: APB address or direction changed during a transfer");
endmodule
