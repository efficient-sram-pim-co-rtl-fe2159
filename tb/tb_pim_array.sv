// tb_pim_array: fills all 16 rows of a 16x16x16 array with random Q bits and
// checks, for random rows and input-bit vectors, that every compartment/column
// gives in_bits[c] & Q and in_bits[c] & ~Q.
module tb_pim_array;
  localparam int C = 16, J = 16, R = 16;
  logic clk = 0, we;
  logic [3:0] wrow, row;
  logic [C*J-1:0] wdata, o_q, o_qb;
  logic [C-1:0] in_bits;
  logic [C*J-1:0] model [R];
  int checks = 0, failures = 0;

  pim_array #(.COMPS(C), .COLS(J), .ROWS(R)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #200000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    we = 0; wrow = 0; row = 0; wdata = '0; in_bits = '0;
    for (int r = 0; r < R; r++) begin
      @(negedge clk); we = 1; wrow = 4'(r);
      for (int k = 0; k < C*J; k += 32) wdata[k +: 32] = $urandom;
      model[r] = wdata;
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 200; t++) begin
      logic [C*J-1:0] eq, eqb;
      row = 4'($urandom); in_bits = C'($urandom); #1;
      for (int c = 0; c < C; c++)
        for (int j = 0; j < J; j++) begin
          eq[c*J+j]  = in_bits[c] &  model[row][c*J+j];
          eqb[c*J+j] = in_bits[c] & ~model[row][c*J+j];
        end
      checks++;
      if (o_q !== eq || o_qb !== eqb) begin
        failures++; $display("mismatch row %0d", row);
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
