// mask_buffer: the eight 2 Kb mask register files, one per switch. Each holds
// DEPTH masks of WIN bits produced by block-wise pruning (bit k = 1: weight
// row k of this core's filter block is kept). A write goes to one core's RF;
// a read returns the masks of all cores at one address, synchronously
// (rdata valid the cycle after raddr), core s at bits [s*WIN +: WIN].
module mask_buffer #(
  parameter int unsigned NCORE = 8,
  parameter int unsigned DEPTH = 16,
  parameter int unsigned WIN   = 128,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(NCORE)-1:0] wcore,
  input  logic [AW-1:0]            waddr,
  input  logic [WIN-1:0]           wdata,
  input  logic [AW-1:0]            raddr,
  output logic [NCORE*WIN-1:0]     rdata
);
  logic [WIN-1:0] mem [NCORE][DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[wcore][waddr] <= wdata;
    for (int s = 0; s < NCORE; s++)
      rdata[s*WIN +: WIN] <= mem[s][raddr];
  end
endmodule
