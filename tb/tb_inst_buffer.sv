// tb_inst_buffer: fills all 2048 instruction words, then reads random
// addresses (data one cycle after the address) while rewriting some words.
module tb_inst_buffer;
  localparam int D = 2048, W = 64;
  logic clk = 0, we;
  logic [10:0] waddr, raddr;
  logic [W-1:0] wdata, rdata;
  logic [W-1:0] model [D];
  int checks = 0, failures = 0;

  inst_buffer #(.DEPTH(D), .W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    we = 0; waddr = 0; raddr = 0; wdata = '0;
    for (int a = 0; a < D; a++) begin
      @(negedge clk); we = 1; waddr = 11'(a); wdata = {$urandom, $urandom}; model[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 3000; t++) begin
      logic [W-1:0] e;
      we = 1'($urandom); waddr = 11'($urandom); wdata = {$urandom, $urandom};
      raddr = 11'($urandom);
      e = model[raddr];
      if (we) model[waddr] = wdata;
      @(posedge clk); #1;
      checks++;
      if (rdata !== e) begin failures++; $display("addr %0d", raddr); end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
