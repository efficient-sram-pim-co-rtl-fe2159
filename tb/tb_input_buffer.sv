// tb_input_buffer: full-word writes to random addresses, 128-bit slice writes
// (which must change only their slice), and synchronous reads checked one
// cycle after the address, against a model memory.
module tb_input_buffer;
  localparam int D = 256, W = 4096, SW = 128;
  logic clk = 0, we, swe;
  logic [7:0] waddr, saddr, raddr;
  logic [4:0] sslice;
  logic [W-1:0] wdata, rdata;
  logic [SW-1:0] sdata;
  logic [W-1:0] model [D];
  bit   valid [D];
  int checks = 0, failures = 0;

  input_buffer #(.DEPTH(D), .W(W), .SW(SW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    we = 0; swe = 0; waddr = 0; saddr = 0; raddr = 0; sslice = 0; wdata = '0; sdata = '0;
    for (int a = 0; a < D; a++) begin
      @(negedge clk); we = 1; waddr = 8'(a);
      for (int k = 0; k < W; k += 32) wdata[k +: 32] = $urandom;
      model[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 2000; t++) begin
      int op;
      logic [W-1:0] e;
      raddr = 8'($urandom);
      e = model[raddr];                       // read returns the old word
      op = $urandom % 3;
      we = 0; swe = 0;
      if (op == 0) begin
        we = 1; waddr = 8'($urandom);
        for (int k = 0; k < W; k += 32) wdata[k +: 32] = $urandom;
        model[waddr] = wdata;
      end else if (op == 1) begin
        swe = 1; saddr = 8'($urandom); sslice = 5'($urandom);
        for (int k = 0; k < SW; k += 32) sdata[k +: 32] = $urandom;
        model[saddr][int'(sslice)*SW +: SW] = sdata;
      end
      @(posedge clk); #1;
      checks++;
      if (rdata !== e) begin failures++; $display("read %0d mismatch", raddr); end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
