// tb_pim_macro: loads random dyadic blocks (Q bit, sign, index) into all 16
// rows of a macro, then streams random signed INT8 input groups to random rows
// and checks every column accumulator against
//   sum over groups, compartments of  in[c] * block_value(row, c, j).
// It also checks the bit-column skipping rate: a group whose inputs have P
// non-zero bit positions must keep the macro busy for exactly max(1,P) cycles.
module tb_pim_macro;
  import tb_util_pkg::*;
  localparam int C = 16, J = 16, R = 16;
  logic clk = 0, rst_n, in_valid, in_ready, w_we, acc_clr, busy;
  logic [C*8-1:0] in_data;
  logic [3:0] in_row, meta_row, w_row;
  logic [C*J-1:0] meta_sign, w_data;
  logic [2*C*J-1:0] meta_idx;
  logic [J*32-1:0] acc;
  bit   q_m [R][C][J];
  bit   s_m [R][C][J];
  int   i_m [R][C][J];
  longint model [J];
  int checks = 0, failures = 0;

  pim_macro #(.COMPS(C), .COLS(J), .ROWS(R)) dut (.*);
  always #5 clk = ~clk;

  // meta RF model, read by the row the macro is working on
  always_comb
    for (int c = 0; c < C; c++)
      for (int j = 0; j < J; j++) begin
        meta_sign[c*J+j]        = s_m[meta_row][c][j];
        meta_idx[2*(c*J+j) +: 2] = 2'(i_m[meta_row][c][j]);
      end

  initial begin
    #5000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic send(logic [C*8-1:0] d, logic [3:0] r, output int cycles);
    logic [7:0] m;
    int p;
    m = '0;
    for (int c = 0; c < C; c++) m |= d[c*8 +: 8];
    p = $countones(m);
    in_data = d; in_row = r; in_valid = 1;
    while (!in_ready) @(negedge clk);
    for (int j = 0; j < J; j++)
      for (int c = 0; c < C; c++)
        model[j] += longint'($signed(d[c*8 +: 8])) * block_value(q_m[r][c][j], s_m[r][c][j], i_m[r][c][j]);
    @(negedge clk); in_valid = 0;
    cycles = 0;
    while (busy) begin cycles++; @(negedge clk); end
    if (p == 0) cycles = 1;
    checks++;
    if (cycles != ((p == 0) ? 1 : p)) begin
      failures++; $display("group with %0d non-zero bit positions took %0d cycles", p, cycles);
    end
  endtask

  initial begin
    int cyc;
    rst_n = 0; in_valid = 0; w_we = 0; acc_clr = 0; in_data = '0; in_row = '0; w_row = '0; w_data = '0;
    for (int j = 0; j < J; j++) model[j] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < R; r++) begin
      for (int c = 0; c < C; c++)
        for (int j = 0; j < J; j++) begin
          q_m[r][c][j] = 1'($urandom); s_m[r][c][j] = 1'($urandom); i_m[r][c][j] = $urandom % 4;
          w_data[c*J+j] = q_m[r][c][j];
        end
      w_we = 1; w_row = 4'(r); @(negedge clk);
    end
    w_we = 0;
    acc_clr = 1; @(negedge clk); acc_clr = 0;
    for (int g = 0; g < 200; g++) begin
      logic [C*8-1:0] d;
      for (int c = 0; c < C; c++) begin
        d[c*8 +: 8] = 8'($urandom);
        if (g % 3 == 0) d[c*8 +: 8] &= 8'h15;     // sparse bit columns
        if (g % 11 == 0) d[c*8 +: 8] = '0;       // all-zero group
      end
      send(d, 4'($urandom), cyc);
    end
    repeat (3) @(negedge clk);
    for (int j = 0; j < J; j++) begin
      checks++;
      if ($signed(acc[j*32 +: 32]) !== 32'(model[j])) begin
        failures++; $display("col %0d: %0d expected %0d", j, $signed(acc[j*32 +: 32]), model[j]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
