// tb_ppu: feeds random bit columns (index 0..7, each with random products and
// metadata for 16 compartments) into one PPU and checks the accumulator after
// every cycle against  acc += tree * 2^idx  (negated for idx 7, the signed
// MSB), with random clears.
module tb_ppu;
  import tb_util_pkg::*;
  localparam int C = 16;
  logic clk = 0, rst_n, col_valid, acc_clr;
  logic [2:0] col_idx;
  logic [C-1:0] o_q, o_qb, sign;
  logic [2*C-1:0] index;
  logic signed [31:0] acc;
  longint model;
  int checks = 0, failures = 0;

  ppu #(.COMPS(C), .IW(8), .ACC_W(32)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #500000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    rst_n = 0; col_valid = 0; acc_clr = 0; col_idx = 0; o_q = 0; o_qb = 0; sign = 0; index = 0;
    model = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      logic [C-1:0] inb, q;
      int tree;
      @(negedge clk);
      inb = C'($urandom); q = C'($urandom);
      o_q = inb & q; o_qb = inb & ~q; sign = C'($urandom); index = $urandom;
      col_idx = 3'($urandom); col_valid = ($urandom % 4) != 0; acc_clr = ($urandom % 50) == 0;
      tree = 0;
      for (int c = 0; c < C; c++)
        if (o_q[c] | o_qb[c]) tree += block_value(o_q[c], sign[c], index[2*c +: 2]);
      if (acc_clr) model = 0;
      if (col_valid) model += (col_idx == 7) ? -(longint'(tree) <<< 7) : (longint'(tree) <<< col_idx);
      @(posedge clk); #1;
      checks++;
      if (acc !== 32'(model)) begin
        failures++; $display("t=%0d acc %0d expected %0d", t, acc, model);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
