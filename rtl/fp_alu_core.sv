// FP-ALU CORE of the shared FP-ALU: the three floating-point units (MAC, DIV,
// SQRT) and the CORE CTRL sequencer that drives them.
//
// Operations (tt_pkg::fp_op_e) on IEEE-754 single-precision operands:
//   FP_ADD  y = a + b          (MAC unit with multiplier operand 1.0)
//   FP_MUL  y = a * b          (MAC unit with addend +0)
//   FP_MAC  y = a * b + c      (multiply rounded, then add rounded)
//   FP_DIV  y = a / b          (DIV unit, 27 cycles)
//   FP_SQRT y = sqrt(a)        (SQRT unit, 26 cycles)
//   FP_NORM y = sqrt(sum x^2)  over len elements taken from the stream input:
//           every element is squared and accumulated through the MAC unit,
//           then the SQRT unit is applied to the sum.
// Interface: an operation is accepted when op_valid and op_ready are both high
// (op_ready is high only while idle). res_valid pulses for one cycle with res.
// ADD, MUL and MAC take two cycles from acceptance to res_valid; NORM takes one
// cycle per streamed element (when the stream keeps up) plus the SQRT latency.
// The stream input is a valid/ready pair, normally the streamer's FIFO output.
// Following the paper: MAC, DIV and SQRT units, norm = MAC accumulation + SQRT,
// single operations fed directly. This design's own choices: the MAC is not
// fused (two roundings), the unit algorithms and the latencies.
module fp_alu_core
  import tt_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        op_valid,
  output logic        op_ready,
  input  fp_op_e      op,
  input  logic [31:0] a,
  input  logic [31:0] b,
  input  logic [31:0] c,
  input  dim_t        len,
  input  logic        s_valid,
  input  logic [31:0] s_data,
  output logic        s_ready,
  output logic        res_valid,
  output logic [31:0] res
);
  typedef enum logic [2:0] {C_IDLE, C_MAC, C_DIV, C_SQRT, C_NORM} cstate_e;
  cstate_e st;

  // operand registers (CORE CTRL "opcode"/"operand")
  logic [31:0] ra, rb, rc, acc;
  dim_t        cnt;

  // MAC unit
  logic [31:0] mac_a, mac_b, mac_c, mac_p, mac_y;
  fp_mul u_mul (.a(mac_a), .b(mac_b), .y(mac_p));
  fp_add u_add (.a(mac_p), .b(mac_c), .y(mac_y));

  // DIV and SQRT units
  logic        div_start, div_done, sqrt_start, sqrt_done;
  logic [31:0] div_y, sqrt_y, sqrt_a;
  fp_div  u_div  (.clk, .rst_n, .start(div_start), .a(ra), .b(rb), .done(div_done), .y(div_y));
  fp_sqrt u_sqrt (.clk, .rst_n, .start(sqrt_start), .a(sqrt_a), .done(sqrt_done), .y(sqrt_y));

  assign op_ready = (st == C_IDLE);
  assign s_ready  = (st == C_NORM) && (cnt != 0) && !sqrt_start;

  always_comb begin
    if (st == C_NORM) begin
      mac_a = s_data; mac_b = s_data; mac_c = acc;
    end else begin
      mac_a = ra; mac_b = rb; mac_c = rc;
    end
  end

  logic norm_fire;
  assign norm_fire = s_valid && s_ready;
  assign sqrt_a    = (st == C_NORM) ? acc : ra;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= C_IDLE; ra <= '0; rb <= '0; rc <= '0; acc <= '0; cnt <= '0;
      res_valid <= 1'b0; res <= '0; div_start <= 1'b0; sqrt_start <= 1'b0;
    end else begin
      res_valid  <= 1'b0;
      div_start  <= 1'b0;
      sqrt_start <= 1'b0;
      unique case (st)
        C_IDLE: if (op_valid) begin
          ra <= a; rc <= c; acc <= FP_ZERO; cnt <= len;
          unique case (op)
            FP_ADD:  begin rb <= FP_ONE; rc <= b;       st <= C_MAC; end
            FP_MUL:  begin rb <= b;      rc <= FP_ZERO; st <= C_MAC; end
            FP_MAC:  begin rb <= b;                     st <= C_MAC; end
            FP_DIV:  begin rb <= b; div_start <= 1'b1;  st <= C_DIV; end
            FP_SQRT: begin sqrt_start <= 1'b1;          st <= C_SQRT; end
            FP_NORM: begin
              st <= C_NORM;
              if (len == 0) sqrt_start <= 1'b1;
            end
            default: begin res <= FP_QNAN; res_valid <= 1'b1; end
          endcase
        end
        C_MAC: begin
          res <= mac_y; res_valid <= 1'b1; st <= C_IDLE;
        end
        C_DIV: if (div_done) begin
          res <= div_y; res_valid <= 1'b1; st <= C_IDLE;
        end
        C_SQRT, C_NORM: begin
          if (norm_fire) begin
            acc <= mac_y;
            cnt <= cnt - 1'b1;
            if (cnt == 1) sqrt_start <= 1'b1;
          end
          if (sqrt_done) begin
            res <= sqrt_y; res_valid <= 1'b1; st <= C_IDLE;
          end
        end
        default: st <= C_IDLE;
      endcase
    end
  end
endmodule
