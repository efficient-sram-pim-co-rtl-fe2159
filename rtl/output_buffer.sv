// output_buffer: on-chip buffer for MAC results, 256 KB by default (DEPTH words
// of LANES 32-bit values). One word holds the 16 column results of one macro.
// One write port and two synchronous read ports (a, b), so the SIMD core can
// read both operands of a residual add or max in one cycle; rdata_* is valid
// the cycle after raddr_*. The port count is this design's choice.
module output_buffer #(
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned W     = 512,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic [AW-1:0] raddr_a,
  output logic [W-1:0]  rdata_a,
  input  logic [AW-1:0] raddr_b,
  output logic [W-1:0]  rdata_b
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata_a <= mem[raddr_a];
    rdata_b <= mem[raddr_b];
  end
endmodule
