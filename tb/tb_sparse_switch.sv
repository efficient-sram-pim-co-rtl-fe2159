// tb_sparse_switch: random 128-bit masks (dense, sparse, empty, full and the
// paper's example 1,0,1,1,0 -> positions 0,2,3) over random 4x128 input
// windows. A consumer with random ready collects the groups; each must hold
// the kept inputs in increasing position, 16 per group, zero padded, sent to
// macros 0..3 in turn at rows row_base, row_base+1, ... With ready always high
// a window must take exactly 2 + G*(1+TM) cycles from start to done for G
// groups (start, then per group one extraction and TM sends, then the
// final empty-mask check).
module tb_sparse_switch;
  localparam int WIN = 128, TM = 4, G = 16;
  logic clk = 0, rst_n, start, grp_valid, grp_ready, busy, done;
  logic [WIN-1:0] mask;
  logic [TM*WIN*8-1:0] in_win;
  logic [3:0] row_base, grp_row;
  logic [1:0] grp_macro;
  logic [G*8-1:0] grp_data;
  bit   always_ready;
  int checks = 0, failures = 0;

  sparse_switch #(.WIN(WIN), .TM(TM), .GROUP(G), .IW(8), .RW(4)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #20000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  typedef struct { int macro; int row; logic [G*8-1:0] data; } grp_t;
  grp_t exp_q[$];

  always @(negedge clk) grp_ready = always_ready ? 1'b1 : 1'($urandom % 3 != 0);

  always @(posedge clk) if (rst_n && grp_valid && grp_ready) begin
    grp_t e;
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("unexpected group"); end
    else begin
      e = exp_q.pop_front();
      if (int'(grp_macro) != e.macro || int'(grp_row) != e.row || grp_data !== e.data) begin
        failures++; $display("group mismatch macro %0d/%0d row %0d/%0d", grp_macro, e.macro, grp_row, e.row);
      end
    end
  end

  task automatic run_window(logic [WIN-1:0] m, logic [3:0] rb, output int cycles, output int ngroups);
    int pos[$];
    for (int k = 0; k < WIN; k++) if (m[k]) pos.push_back(k);
    ngroups = (pos.size() + G - 1) / G;
    for (int g = 0; g < ngroups; g++)
      for (int t = 0; t < TM; t++) begin
        grp_t e;
        e.macro = t; e.row = (int'(rb) + g) % 16; e.data = '0;
        for (int i = 0; i < G; i++)
          if (g*G + i < pos.size()) e.data[i*8 +: 8] = in_win[(t*WIN + pos[g*G+i])*8 +: 8];
        exp_q.push_back(e);
      end
    mask = m; row_base = rb; start = 1;
    @(negedge clk); start = 0;
    cycles = 1;
    while (!done) begin cycles++; @(negedge clk); end
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d groups missing", exp_q.size()); exp_q.delete(); end
  endtask

  initial begin
    int cyc, ng;
    rst_n = 0; start = 0; mask = '0; row_base = '0; always_ready = 0;
    for (int k = 0; k < TM*WIN*8; k += 32) in_win[k +: 32] = $urandom;
    repeat (2) @(negedge clk); rst_n = 1;
    // paper example: mask 1,0,1,1,0 keeps positions 0, 2, 3
    run_window(128'b01101, 4'd0, cyc, ng);
    for (int t = 0; t < 60; t++) begin
      logic [WIN-1:0] m;
      for (int k = 0; k < WIN; k += 32) m[k +: 32] = $urandom;
      if (t % 3 == 1) for (int k = 0; k < WIN; k += 32) m[k +: 32] &= $urandom;
      if (t == 5) m = '0;
      if (t == 6) m = '1;
      for (int k = 0; k < TM*WIN*8; k += 32) in_win[k +: 32] = $urandom;
      always_ready = (t % 2 == 0);
      @(negedge clk);
      run_window(m, 4'($urandom), cyc, ng);
      if (always_ready) begin
        checks++;
        if (cyc != 2 + ng * (1 + TM)) begin
          failures++; $display("window with %0d groups took %0d cycles", ng, cyc);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
