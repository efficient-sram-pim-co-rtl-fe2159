// tb_dbmu: writes random Q values into the 16 cells of one DBMU, then reads
// every cell with input bit 0 and 1 and checks o_q = in & Q, o_qb = in & ~Q.
module tb_dbmu;
  logic clk = 0, we, wq, in_bit, o_q, o_qb;
  logic [3:0] wrow, row;
  bit   model [16];
  int checks = 0, failures = 0;

  dbmu #(.ROWS(16)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000; failures++; $display("watchdog"); 
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    we = 0; wq = 0; wrow = 0; row = 0; in_bit = 0;
    for (int pass = 0; pass < 4; pass++) begin
      for (int r = 0; r < 16; r++) begin
        @(negedge clk); we = 1; wrow = 4'(r); wq = 1'($urandom); model[r] = wq;
      end
      @(negedge clk); we = 0;
      for (int r = 0; r < 16; r++)
        for (int b = 0; b < 2; b++) begin
          row = 4'(r); in_bit = 1'(b); #1;
          checks++;
          if (o_q !== (1'(b) & model[r]) || o_qb !== (1'(b) & ~model[r])) begin
            failures++; $display("row %0d in %0d: o_q %0b o_qb %0b", r, b, o_q, o_qb);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
