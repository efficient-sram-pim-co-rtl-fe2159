// tb_csd_adder_tree: random products, signs and indices for 16 compartments,
// plus the corner cases all +128 and all -128; the 13-bit sum must equal the
// sum of the blocks' signed values for every compartment whose product is
// non-zero. Also checks the paper's example: blocks 0(-1) at DB#3 and 10 at
// DB#0 with both inputs 1 give -64 + 2 = -62.
module tb_csd_adder_tree;
  import tb_util_pkg::*;
  localparam int C = 16;
  logic [C-1:0] o_q, o_qb, sign;
  logic [2*C-1:0] index;
  logic signed [12:0] sum;
  int checks = 0, failures = 0;

  csd_adder_tree #(.COMPS(C)) dut (.*);

  task automatic check(string what);
    int exp;
    exp = 0;
    for (int c = 0; c < C; c++)
      if (o_q[c] | o_qb[c]) exp += block_value(o_q[c], sign[c], index[2*c +: 2]);
    #1; checks++;
    if (sum !== 13'(exp)) begin
      failures++; $display("%s: got %0d expected %0d", what, sum, exp);
    end
  endtask

  initial begin
    // paper example (Fig. 10): compartment 0 holds 0(-1) at DB#3, compartment 1 holds 10 at DB#0
    o_q = '0; o_qb = '0; sign = '0; index = '0;
    o_q[0] = 0; o_qb[0] = 1; sign[0] = 1; index[1:0] = 2'd3;
    o_q[1] = 1; o_qb[1] = 0; sign[1] = 0; index[3:2] = 2'd0;
    #1; checks++;
    if (sum !== -13'sd62) begin failures++; $display("paper example: %0d", sum); end
    for (int t = 0; t < 2000; t++) begin
      logic [C-1:0] inb, q;
      inb = C'($urandom); q = C'($urandom);
      o_q = inb & q; o_qb = inb & ~q; sign = C'($urandom); index = $urandom;
      check("random");
    end
    o_q = '1; o_qb = '0; sign = '0; index = '1; check("max");
    sign = '1; check("min");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
