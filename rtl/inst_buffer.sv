// inst_buffer: instruction buffer, 16 KB by default (2048 x 64-bit
// instructions). Written by the host before a run, read by the top
// controller; the read is synchronous (rdata valid the cycle after raddr).
module inst_buffer #(
  parameter int unsigned DEPTH = 2048,
  parameter int unsigned W     = 64,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
