// input_buffer: on-chip buffer for INT8 input features, 128 KB by default
// (DEPTH words of W bits). One word is the window the sparse allocation
// network consumes at once: WIN=128 inputs for each of the Tm=4 input rows,
// input (m, k) at bits [(m*128 + k)*8 +: 8]. The word layout is this design's
// choice. Port A writes whole words (host load); port S writes one SW-bit
// slice (16 INT8 values) of a word, which is how the SIMD core stores a
// re-quantized output vector as input for the next layer; S wins when both hit
// the same word. Reads are synchronous: rdata is valid the cycle after raddr.
module input_buffer #(
  parameter int unsigned DEPTH = 256,
  parameter int unsigned W     = 4096,
  parameter int unsigned SW    = 128,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned NSL  = W / SW
) (
  input  logic                   clk,
  input  logic                   we,
  input  logic [AW-1:0]          waddr,
  input  logic [W-1:0]           wdata,
  input  logic                   swe,
  input  logic [AW-1:0]          saddr,
  input  logic [$clog2(NSL)-1:0] sslice,
  input  logic [SW-1:0]          sdata,
  input  logic [AW-1:0]          raddr,
  output logic [W-1:0]           rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we)  mem[waddr] <= wdata;
    if (swe) mem[saddr][int'(sslice)*SW +: SW] <= sdata;
    rdata <= mem[raddr];
  end
endmodule
