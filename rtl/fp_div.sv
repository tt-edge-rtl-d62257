// FP32 divider, iterative: the DIV unit of the FP-ALU core.
//
// y = a / b, round-to-nearest-even. A restoring divider produces one quotient
// bit per cycle from the two 24-bit significands; 26 bits (integer bit, 23
// fraction bits, one spare bit and the guard bit) are produced, and the
// remainder supplies the sticky bit. A start pulse loads the operands; done
// pulses 27 cycles later with y valid in the same cycle and held until the next
// start. Special cases (zero, infinity, NaN) finish in 27 cycles as well.
// Subnormals are treated as zero. The algorithm and latency are this design's
// choice; the paper only states that the unit comes from an open-source FPU.
module fp_div (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic        done,
  output logic [31:0] y
);
  logic [24:0] rem;
  logic [23:0] divisor;
  logic [25:0] q;
  logic [4:0]  cnt;
  logic        busy, sy;
  logic signed [10:0] eq;
  logic [31:0] special;
  logic        is_special;

  // result assembly
  logic [23:0] mant;
  logic        guard, sticky, rnd;
  logic [24:0] mant_r;
  logic signed [10:0] e;

  always_comb begin
    if (q[25]) begin
      mant = q[25:2]; guard = q[1]; sticky = q[0] | (rem != 0);
      e = eq;
    end else begin
      mant = q[24:1]; guard = q[0]; sticky = (rem != 0);
      e = eq - 11'sd1;
    end
    rnd = guard & (sticky | mant[0]);
    mant_r = {1'b0, mant} + {24'd0, rnd};
    if (mant_r[24]) begin
      mant_r = mant_r >> 1;
      e = e + 11'sd1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; y <= '0; cnt <= '0; rem <= '0; q <= '0;
      divisor <= '0; sy <= 1'b0; eq <= '0; special <= '0; is_special <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy    <= 1'b1;
        cnt     <= 5'd26;
        q       <= '0;
        sy      <= a[31] ^ b[31];
        rem     <= {1'b0, 1'b1, a[22:0]};
        divisor <= {1'b1, b[22:0]};
        eq      <= 11'($signed({3'b000, a[30:23]})) - 11'($signed({3'b000, b[30:23]})) + 11'sd127;
        is_special <= 1'b1;
        if ((a[30:23] == 8'hFF && a[22:0] != 0) || (b[30:23] == 8'hFF && b[22:0] != 0))
          special <= tt_pkg::FP_QNAN;
        else if ((a[30:23] == 8'hFF && b[30:23] == 8'hFF) || (a[30:23] == 8'd0 && b[30:23] == 8'd0))
          special <= tt_pkg::FP_QNAN;
        else if (a[30:23] == 8'hFF || b[30:23] == 8'd0)
          special <= {a[31] ^ b[31], 8'hFF, 23'd0};
        else if (a[30:23] == 8'd0 || b[30:23] == 8'hFF)
          special <= {a[31] ^ b[31], 31'd0};
        else
          is_special <= 1'b0;
      end else if (busy) begin
        if (cnt != 0) begin
          cnt <= cnt - 5'd1;
          if (rem >= {1'b0, divisor}) begin
            q   <= {q[24:0], 1'b1};
            rem <= (rem - {1'b0, divisor}) << 1;
          end else begin
            q   <= {q[24:0], 1'b0};
            rem <= rem << 1;
          end
        end else begin
          busy <= 1'b0;
          done <= 1'b1;
          if (is_special)         y <= special;
          else if (e >= 11'sd255) y <= {sy, 8'hFF, 23'd0};
          else if (e <= 11'sd0)   y <= {sy, 31'd0};
          else                    y <= {sy, e[7:0], mant_r[22:0]};
        end
      end
    end
  end
endmodule
