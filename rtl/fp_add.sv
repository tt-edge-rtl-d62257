// FP32 adder, combinational; the accumulate half of the MAC unit in the FP-ALU
// core and of the GEMM accelerator datapath.
//
// y = a + b with round-to-nearest-even, using a 27-bit aligned significand
// (24 bits plus guard, round and sticky). The operand of larger magnitude is
// put first, the other is shifted right with its shifted-out bits collected in
// the sticky bit, the two are added or subtracted, and the sum is normalised
// by a leading-zero count. Subnormals are read as zero and flushed to zero on
// output; an exact zero sum is +0. Infinity and NaN are passed on. These
// exception policies are this design's choice.
module fp_add (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  logic [31:0] x, z;            // |x| >= |z|
  logic [7:0]  ex, ez, d;
  logic [26:0] mx, mz, mzs;
  logic [27:0] sum;
  logic [26:0] nrm;
  logic [4:0]  lz;
  logic        sub, rnd, found;
  logic [24:0] mant_r;
  logic signed [10:0] e;

  always_comb begin
    if (a[30:0] >= b[30:0]) begin x = a; z = b; end
    else                    begin x = b; z = a; end
    ex = x[30:23]; ez = z[30:23];
    sub = x[31] ^ z[31];
    mx = (ex == 0) ? 27'd0 : {1'b1, x[22:0], 3'b000};
    mz = (ez == 0) ? 27'd0 : {1'b1, z[22:0], 3'b000};
    d  = ex - ez;
    if (d > 8'd26) mzs = {26'd0, |mz};
    else begin
      mzs = mz >> d;
      mzs[0] = mzs[0] | |(mz & ~(27'h7FF_FFFF << d));
    end
    sum = sub ? ({1'b0, mx} - {1'b0, mzs}) : ({1'b0, mx} + {1'b0, mzs});
    e = 11'($signed({3'b000, ex}));
    lz = 5'd0;
    found = 1'b0;
    nrm = sum[26:0];
    if (sum[27]) begin
      nrm = sum[27:1];
      nrm[0] = sum[1] | sum[0];
      e = e + 11'sd1;
    end else begin

      for (int i = 26; i >= 0; i--) begin
        if (!found && sum[i]) begin
          found = 1'b1;
          lz = 5'(26 - i);
        end
      end
      nrm = sum[26:0] << lz;
      e = e - 11'($signed({6'd0, lz}));
    end
    rnd = nrm[2] & (nrm[1] | nrm[0] | nrm[3]);
    mant_r = {1'b0, nrm[26:3]} + {24'd0, rnd};
    if (mant_r[24]) begin
      mant_r = mant_r >> 1;
      e = e + 11'sd1;
    end
    if (ex == 8'hFF) begin
      if (x[22:0] != 0 || (ez == 8'hFF && sub)) y = tt_pkg::FP_QNAN;
      else y = x;
    end else if (sum == 28'd0)
      y = 32'd0;
    else if (e >= 11'sd255)
      y = {x[31], 8'hFF, 23'd0};
    else if (e <= 11'sd0)
      y = {x[31], 31'd0};
    else
      y = {x[31], e[7:0], mant_r[22:0]};
  end
endmodule
