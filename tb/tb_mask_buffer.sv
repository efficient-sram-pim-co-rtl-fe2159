// tb_mask_buffer: writes random masks into each of the eight mask RFs and
// checks that a read returns all eight cores' masks for the address, one
// cycle later.
module tb_mask_buffer;
  localparam int NC = 8, D = 16, WIN = 128;
  logic clk = 0, we;
  logic [2:0] wcore;
  logic [3:0] waddr, raddr;
  logic [WIN-1:0] wdata;
  logic [NC*WIN-1:0] rdata;
  logic [WIN-1:0] model [NC][D];
  int checks = 0, failures = 0;

  mask_buffer #(.NCORE(NC), .DEPTH(D), .WIN(WIN)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    we = 0; wcore = 0; waddr = 0; raddr = 0; wdata = '0;
    for (int s = 0; s < NC; s++)
      for (int a = 0; a < D; a++) begin
        @(negedge clk); we = 1; wcore = 3'(s); waddr = 4'(a);
        wdata = {$urandom, $urandom, $urandom, $urandom}; model[s][a] = wdata;
      end
    @(negedge clk); we = 0;
    for (int t = 0; t < 1000; t++) begin
      logic [NC*WIN-1:0] e;
      we = 1'($urandom); wcore = 3'($urandom); waddr = 4'($urandom);
      wdata = {$urandom, $urandom, $urandom, $urandom};
      raddr = 4'($urandom);
      for (int s = 0; s < NC; s++) e[s*WIN +: WIN] = model[s][raddr];
      if (we) model[wcore][waddr] = wdata;
      @(posedge clk); #1;
      checks++;
      if (rdata !== e) begin failures++; $display("addr %0d", raddr); end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
