// simd_core: vector unit for the operations the PIM macros do not perform
// (ReLU, pooling, residual add, element-wise multiply, quantization). It works
// on LANES signed 32-bit lanes, the width of one output-buffer word.
//   ADD   y = a + b               (residual add; also the add step of a
//                                  depthwise convolution)
//   MUL   y = a * b  (low 32 bits)
//   MAX   y = max(a, b)           (one step of max pooling)
//   RELU  y = max(a, 0)
//   QUANT y = sat8((a + 2^(shift-1)) >>> shift)   (round half up; shift 0 = none)
//   QSTORE same as QUANT; q8 carries the 16 INT8 results for the input buffer
// The paper names these functions only; the operation set, rounding and
// saturation are this design's choices. One vector per cycle: y, q8 and
// out_valid are registered, one cycle after in_valid.
module simd_core #(
  parameter int unsigned LANES = 16,
  parameter int unsigned DW    = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  dbpim_pkg::simd_op_e  op,
  input  logic [LANES*DW-1:0]  a,
  input  logic [LANES*DW-1:0]  b,
  input  logic [4:0]           shift,
  output logic                 out_valid,
  output logic [LANES*DW-1:0]  y,
  output logic [LANES*8-1:0]   q8
);
  import dbpim_pkg::*;

  logic [LANES*DW-1:0] y_d;
  logic [LANES*8-1:0]  q_d;

  always_comb
    for (int l = 0; l < LANES; l++) begin
      logic signed [DW-1:0] x, z, r;
      logic signed [DW:0]   rnd;
      x = $signed(a[l*DW +: DW]);
      z = $signed(b[l*DW +: DW]);
      // quantization path
      rnd = (shift == 0) ? (DW+1)'(x) : ((DW+1)'(x) + ((DW+1)'(1) <<< (shift - 1)));
      rnd = rnd >>> shift;
      if (rnd > 127)       q_d[l*8 +: 8] = 8'sd127;
      else if (rnd < -128) q_d[l*8 +: 8] = -8'sd128;
      else                 q_d[l*8 +: 8] = rnd[7:0];
      unique case (op)
        SIMD_ADD:  r = x + z;
        SIMD_MUL:  r = x * z;
        SIMD_MAX:  r = (x > z) ? x : z;
        SIMD_RELU: r = (x > 0) ? x : '0;
        SIMD_QUANT, SIMD_QSTORE: r = DW'($signed(q_d[l*8 +: 8]));
        default:   r = x;
      endcase
      y_d[l*DW +: DW] = r;
    end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      out_valid <= 1'b0;
      y         <= '0;
      q8        <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        y  <= y_d;
        q8 <= q_d;
      end
    end
endmodule
