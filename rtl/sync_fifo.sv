// Synchronous FIFO (helper). WIDTH-bit entries, DEPTH entries (power of two).
// Write when wr_en and not full; read data are shown combinationally at rd_data
// while not empty and popped by rd_en. count gives the occupancy.
module sync_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 4
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wr_en,
  input  logic [WIDTH-1:0]         wr_data,
  input  logic                     rd_en,
  output logic [WIDTH-1:0]         rd_data,
  output logic                     empty,
  output logic                     full,
  output logic [$clog2(DEPTH):0]   count
);
  localparam int unsigned PW = $clog2(DEPTH);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0] wp, rp;
  logic do_wr, do_rd;

  assign empty   = (count == 0);
  assign full    = (count == (PW+1)'(DEPTH));
  assign rd_data = mem[rp];
  assign do_wr   = wr_en && !full;
  assign do_rd   = rd_en && !empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (do_wr) wp <= wp + 1'b1;
      if (do_rd) rp <= rp + 1'b1;
      count <= count + (PW+1)'(do_wr) - (PW+1)'(do_rd);
    end
  end

  always_ff @(posedge clk) if (do_wr) mem[wp] <= wr_data;

  assert property (@(posedge clk) disable iff (!rst_n) !(wr_en && full))
    else $error("sync_fifo: write while full");
endmodule
