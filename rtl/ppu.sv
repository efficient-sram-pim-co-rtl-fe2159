// ppu: post-processing unit of one DBMU column: CSD-based adder tree,
// shift&add and accumulator. For every input bit column the IPU sends, the
// tree sums the 16 compartments' signed dyadic-block products; shift&add
// weighs that sum by 2^col_idx, and by -2^7 for the most significant bit of a
// signed INT8 input (the "signed MSB" path); the accumulator adds the result.
// Accumulation runs across the bit columns of a group, across the SRAM rows
// (Tk2) and across K tiles until acc_clr. The paper shows shift&add as a
// shifter fed back through a flip-flop; here the weighted term is added
// straight into the accumulator, which gives the same sum. The accumulator
// width (ACC_W) is this design's choice.
// Timing: acc updates at the clock edge of the cycle in which col_valid is
// high; acc_clr in the same cycle clears the old value first.
module ppu #(
  parameter int unsigned COMPS = 16,
  parameter int unsigned IW    = 8,
  parameter int unsigned ACC_W = 32
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   col_valid,
  input  logic [$clog2(IW)-1:0]  col_idx,
  input  logic [COMPS-1:0]       o_q,
  input  logic [COMPS-1:0]       o_qb,
  input  logic [COMPS-1:0]       sign,
  input  logic [2*COMPS-1:0]     index,
  input  logic                   acc_clr,
  output logic signed [ACC_W-1:0] acc
);
  localparam int unsigned SW = 9 + $clog2(COMPS);

  logic signed [SW-1:0]    tree_sum;
  logic signed [ACC_W-1:0] weighted;

  csd_adder_tree #(.COMPS(COMPS)) u_tree (
    .o_q  (o_q),
    .o_qb (o_qb),
    .sign (sign),
    .index(index),
    .sum  (tree_sum)
  );

  // shift & add: signed MSB column carries weight -2^(IW-1)
  always_comb begin
    weighted = ACC_W'(tree_sum) <<< col_idx;
    if (col_idx == $clog2(IW)'(IW-1))
      weighted = -weighted;
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)
      acc <= '0;
    else if (acc_clr || col_valid)
      acc <= (acc_clr ? '0 : acc) + (col_valid ? weighted : '0);
endmodule
