// tb_output_buffer: random writes and two independent synchronous reads per
// cycle over the whole 4096-word range, checked against a model memory
// (read-before-write: a read of the word being written returns the old word).
module tb_output_buffer;
  localparam int D = 4096, W = 512;
  logic clk = 0, we;
  logic [11:0] waddr, raddr_a, raddr_b;
  logic [W-1:0] wdata, rdata_a, rdata_b;
  logic [W-1:0] model [D];
  int checks = 0, failures = 0;

  output_buffer #(.DEPTH(D), .W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    we = 0; waddr = 0; raddr_a = 0; raddr_b = 0; wdata = '0;
    for (int a = 0; a < D; a++) begin
      @(negedge clk); we = 1; waddr = 12'(a);
      for (int k = 0; k < W; k += 32) wdata[k +: 32] = $urandom;
      model[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 3000; t++) begin
      logic [W-1:0] ea, eb;
      we = 1'($urandom); waddr = 12'($urandom);
      for (int k = 0; k < W; k += 32) wdata[k +: 32] = $urandom;
      raddr_a = 12'($urandom); raddr_b = (t % 5 == 0) ? waddr : 12'($urandom);
      ea = model[raddr_a]; eb = model[raddr_b];
      if (we) model[waddr] = wdata;
      @(posedge clk); #1;
      checks += 2;
      if (rdata_a !== ea) begin failures++; $display("port a %0d", raddr_a); end
      if (rdata_b !== eb) begin failures++; $display("port b %0d", raddr_b); end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
