// csd_adder_tree: adds, for one DBMU column, the products of all COMPS
// compartments. Because zero-pattern blocks are discarded, each compartment's
// product can sit at any of the four dyadic-block positions of an 8-bit CSD
// weight and can be positive or negative, so a plain adder tree would be wrong.
// Each term is rebuilt here from
//   {o_q, o_qb}  the 2-bit product (10 or 01 when the input bit is 1, else 00)
//   index        the block position (DB#0..DB#3): shift left by 2*index
//   sign         1 = the block is negative (1-bar digit): negate
// giving a 9-bit signed term in [-128,128], zero when o_q|o_qb is 0. CSD
// adders #0..#(COMPS/2-1) add compartment pairs; the rest of the tree follows
// (widths 9, 10, 11, 12 and a 13-bit sum for 16 compartments, as printed in the
// paper's figure). The exact multiplexer arrangement of the figure is replaced
// by an arithmetic negate with the same result. Purely combinational.
module csd_adder_tree #(
  parameter int unsigned COMPS = 16,
  localparam int unsigned LVL  = $clog2(COMPS),
  localparam int unsigned SW   = 9 + LVL
) (
  input  logic [COMPS-1:0]   o_q,
  input  logic [COMPS-1:0]   o_qb,
  input  logic [COMPS-1:0]   sign,
  input  logic [2*COMPS-1:0] index,
  output logic signed [SW-1:0] sum
);
  logic signed [8:0] term [COMPS];

  always_comb
    for (int c = 0; c < COMPS; c++) begin
      logic [7:0] mag;
      mag = 8'({o_q[c], o_qb[c]}) << (2 * index[2*c +: 2]);
      if (!(o_q[c] | o_qb[c]))
        term[c] = '0;
      else if (sign[c])
        term[c] = -$signed({1'b0, mag});
      else
        term[c] = $signed({1'b0, mag});
    end

  // balanced tree: level l holds COMPS>>l partial sums, kept at SW bits
  logic signed [SW-1:0] part [LVL+1][COMPS];

  always_comb begin
    for (int l = 0; l <= LVL; l++)
      for (int i = 0; i < COMPS; i++)
        part[l][i] = '0;
    for (int i = 0; i < COMPS; i++)
      part[0][i] = SW'(term[i]);
    for (int l = 1; l <= LVL; l++)
      for (int i = 0; i < (COMPS >> l); i++)
        part[l][i] = part[l-1][2*i] + part[l-1][2*i+1];
    sum = part[LVL][0];
  end
endmodule
