// dbmu: dyadic block multiply unit. Sixteen SRAM cells (SC#0..SC#15) share one
// local processing unit (LPU). Each cell stores one complementary-pattern
// dyadic block of a CSD weight: Q is the block's upper bit and Q-bar its lower
// bit, so Q=1 means "10" and Q=0 means "01" (the zero pattern "00" is never
// stored). The word line `row` selects one cell; the LPU gives
//   o_q  = in_bit & Q       o_qb = in_bit & ~Q
// i.e. two one-bit products of the same input bit, as in the paper.
// The cells are modelled as flip-flops and the four-transistor LPU as two AND
// gates; the per-cell write port is this design's own (the paper does not say
// how cells are written). Reads are combinational; writes take effect at the
// next rising clock edge.
module dbmu #(
  parameter int unsigned ROWS = 16
) (
  input  logic                    clk,
  input  logic                    we,
  input  logic [$clog2(ROWS)-1:0] wrow,
  input  logic                    wq,
  input  logic [$clog2(ROWS)-1:0] row,
  input  logic                    in_bit,
  output logic                    o_q,
  output logic                    o_qb
);
  logic [ROWS-1:0] q;

  always_ff @(posedge clk)
    if (we) q[wrow] <= wq;

  always_comb begin
    o_q  = in_bit &  q[row];
    o_qb = in_bit & ~q[row];
  end
endmodule
