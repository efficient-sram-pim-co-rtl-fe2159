// tb_meta_rf: writes random metadata into all 16 rows and reads them back on
// four ports with independent random row addresses, checking every sign and
// index field against the written words.
module tb_meta_rf;
  localparam int R = 16, E = 256, P = 4;
  logic clk = 0, we;
  logic [3:0] waddr;
  logic [3*E-1:0] wdata;
  logic [P*4-1:0] raddr;
  logic [P*E-1:0] sign;
  logic [P*2*E-1:0] idx;
  logic [3*E-1:0] model [R];
  int checks = 0, failures = 0;

  meta_rf #(.ROWS(R), .ENT(E), .NRD(P)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    we = 0; waddr = 0; wdata = '0; raddr = '0;
    for (int r = 0; r < R; r++) begin
      @(negedge clk); we = 1; waddr = 4'(r);
      for (int k = 0; k < 3*E; k += 32) wdata[k +: 32] = $urandom;
      model[r] = wdata;
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 100; t++) begin
      raddr = $urandom; #1;
      for (int p = 0; p < P; p++) begin
        int r;
        r = raddr[p*4 +: 4];
        for (int e = 0; e < E; e++) begin
          checks++;
          if (sign[p*E+e] !== model[r][3*e] || idx[p*2*E+2*e +: 2] !== model[r][3*e+1 +: 2]) begin
            failures++; $display("port %0d row %0d entry %0d", p, r, e);
          end
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
