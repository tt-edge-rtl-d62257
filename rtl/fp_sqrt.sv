// FP32 square root, iterative: the SQRT unit of the FP-ALU core.
//
// y = sqrt(a), round-to-nearest-even. The significand, shifted so that the
// unbiased exponent becomes even, forms a 50-bit radicand whose 25-bit integer
// root is found by the digit-by-digit (restoring) method, one root bit per
// cycle; the final remainder supplies the sticky bit. A start pulse loads the
// operand; done pulses 26 cycles later with y valid and held. sqrt(+-0) = +0
// (subnormals count as zero), a negative operand or NaN gives the quiet NaN and
// sqrt(+inf) = +inf. Algorithm and latency are this design's choice.
module fp_sqrt (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] a,
  output logic        done,
  output logic [31:0] y
);
  logic [49:0] rad;
  logic [27:0] rem;
  logic [24:0] root;
  logic [4:0]  cnt;
  logic        busy, is_special;
  logic [7:0]  er;
  logic [31:0] special;
  logic [27:0] rem_n, trial;

  logic [23:0] mant;
  logic        rnd;
  logic [24:0] mant_r;
  logic [8:0]  e;

  always_comb begin
    rem_n = {rem[25:0], rad[49:48]};
    trial = {1'b0, root, 2'b01};
    mant  = root[24:1];
    rnd   = root[0] & ((rem != 0) | root[1]);
    mant_r = {1'b0, mant} + {24'd0, rnd};
    e = {1'b0, er};
    if (mant_r[24]) begin
      mant_r = mant_r >> 1;
      e = e + 9'd1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; y <= '0; rad <= '0; rem <= '0; root <= '0;
      cnt <= '0; er <= '0; special <= '0; is_special <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1;
        cnt  <= 5'd25;
        rem  <= '0;
        root <= '0;
        if (a[23]) begin   // biased exponent odd: unbiased exponent even
          rad <= {1'b1, a[22:0], 26'd0} >> 1;                 // m << 25
          er  <= 8'((9'({1'b0, a[30:23]}) + 9'd127) >> 1);
        end else begin
          rad <= {1'b1, a[22:0], 26'd0};                      // m << 26
          er  <= 8'((9'({1'b0, a[30:23]}) + 9'd126) >> 1);
        end
        is_special <= 1'b1;
        if (a[30:23] == 8'd0)                   special <= 32'd0;
        else if (a[30:23] == 8'hFF && a[22:0] != 0) special <= tt_pkg::FP_QNAN;
        else if (a[31])                          special <= tt_pkg::FP_QNAN;
        else if (a[30:23] == 8'hFF)              special <= a;
        else                                     is_special <= 1'b0;
      end else if (busy) begin
        if (cnt != 0) begin
          cnt <= cnt - 5'd1;
          rad <= rad << 2;
          if (rem_n >= trial) begin
            rem  <= rem_n - trial;
            root <= {root[23:0], 1'b1};
          end else begin
            rem  <= rem_n;
            root <= {root[23:0], 1'b0};
          end
        end else begin
          busy <= 1'b0;
          done <= 1'b1;
          if (is_special) y <= special;
          else            y <= {1'b0, e[7:0], mant_r[22:0]};
        end
      end
    end
  end
endmodule
