// FP32 multiplier, combinational; one of the two halves of the MAC unit in the
// FP-ALU core and of the GEMM accelerator datapath.
//
// y = a * b with round-to-nearest-even. Subnormal inputs are read as zero and
// results below the normal range are flushed to a signed zero; results above it
// become infinity. A NaN input, or infinity times zero, gives the quiet NaN.
// The 24x24-bit significand product is normalised by at most one position.
// Exception handling and the flush-to-zero policy are this design's choice.
module fp_mul (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  logic        sa, sb, sy;
  logic [7:0]  ea, eb;
  logic [47:0] prod;
  logic [23:0] mant;
  logic        guard, sticky, rnd;
  logic [24:0] mant_r;
  logic signed [10:0] e;

  always_comb begin
    sa = a[31]; sb = b[31]; sy = sa ^ sb;
    ea = a[30:23]; eb = b[30:23];
    prod = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    e = 11'($signed({3'b000, ea})) + 11'($signed({3'b000, eb})) - 11'sd127;
    if (prod[47]) begin
      mant = prod[47:24]; guard = prod[23]; sticky = |prod[22:0];
      e = e + 11'sd1;
    end else begin
      mant = prod[46:23]; guard = prod[22]; sticky = |prod[21:0];
    end
    rnd = guard & (sticky | mant[0]);
    mant_r = {1'b0, mant} + {24'd0, rnd};
    if (mant_r[24]) begin
      mant_r = mant_r >> 1;
      e = e + 11'sd1;
    end
    if ((ea == 8'hFF && a[22:0] != 0) || (eb == 8'hFF && b[22:0] != 0))
      y = tt_pkg::FP_QNAN;
    else if ((ea == 8'hFF && eb == 8'd0) || (eb == 8'hFF && ea == 8'd0))
      y = tt_pkg::FP_QNAN;
    else if (ea == 8'hFF || eb == 8'hFF)
      y = {sy, 8'hFF, 23'd0};
    else if (ea == 8'd0 || eb == 8'd0)
      y = {sy, 31'd0};
    else if (e >= 11'sd255)
      y = {sy, 8'hFF, 23'd0};
    else if (e <= 11'sd0)
      y = {sy, 31'd0};
    else
      y = {sy, e[7:0], mant_r[22:0]};
  end
endmodule
