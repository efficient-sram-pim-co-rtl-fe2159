// tb_sparse_alloc_net: eight switches share one random 4x128 input window and
// each applies its own random mask (densities from empty to full). Eight
// consumers with independent random ready collect the groups; every core must
// receive exactly the kept inputs of its own mask, in order, and busy must
// stay high until the slowest switch is finished.
module tb_sparse_alloc_net;
  localparam int NC = 8, WIN = 128, TM = 4, G = 16;
  logic clk = 0, rst_n, start, busy;
  logic [NC*WIN-1:0] mask;
  logic [TM*WIN*8-1:0] in_win;
  logic [3:0] row_base;
  logic [NC-1:0] grp_valid, grp_ready;
  logic [NC*2-1:0] grp_macro;
  logic [NC*G*8-1:0] grp_data;
  logic [NC*4-1:0] grp_row;
  int checks = 0, failures = 0;

  sparse_alloc_net #(.NCORE(NC), .WIN(WIN), .TM(TM), .GROUP(G), .IW(8), .RW(4)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #20000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  typedef struct { int macro; int row; logic [G*8-1:0] data; } grp_t;
  grp_t exp_q[NC][$];

  always @(negedge clk) for (int s = 0; s < NC; s++) grp_ready[s] = 1'($urandom % 4 != 0);

  always @(posedge clk) if (rst_n)
    for (int s = 0; s < NC; s++)
      if (grp_valid[s] && grp_ready[s]) begin
        grp_t e;
        checks++;
        if (exp_q[s].size() == 0) begin failures++; $display("core %0d: unexpected group", s); end
        else begin
          e = exp_q[s].pop_front();
          if (int'(grp_macro[s*2 +: 2]) != e.macro || int'(grp_row[s*4 +: 4]) != e.row ||
              grp_data[s*G*8 +: G*8] !== e.data) begin
            failures++; $display("core %0d: group mismatch", s);
          end
        end
      end

  initial begin
    rst_n = 0; start = 0; mask = '0; row_base = '0; in_win = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      for (int k = 0; k < TM*WIN*8; k += 32) in_win[k +: 32] = $urandom;
      row_base = 4'($urandom);
      for (int s = 0; s < NC; s++) begin
        logic [WIN-1:0] m;
        int pos[$];
        pos.delete();
        for (int k = 0; k < WIN; k += 32) m[k +: 32] = $urandom;
        if (s % 3 == 1) for (int k = 0; k < WIN; k += 32) m[k +: 32] &= $urandom & $urandom;
        if (s == 7 && t % 2 == 0) m = '0;
        if (s == 6 && t % 2 == 1) m = '1;
        mask[s*WIN +: WIN] = m;
        for (int k = 0; k < WIN; k++) if (m[k]) pos.push_back(k);
        for (int g = 0; g < (pos.size() + G - 1) / G; g++)
          for (int tm = 0; tm < TM; tm++) begin
            grp_t e;
            e.macro = tm; e.row = (int'(row_base) + g) % 16; e.data = '0;
            for (int i = 0; i < G; i++)
              if (g*G + i < pos.size()) e.data[i*8 +: 8] = in_win[(tm*WIN + pos[g*G+i])*8 +: 8];
            exp_q[s].push_back(e);
          end
      end
      start = 1; @(negedge clk); start = 0;
      while (busy) @(negedge clk);
      for (int s = 0; s < NC; s++) begin
        checks++;
        if (exp_q[s].size() != 0) begin
          failures++; $display("core %0d: %0d groups missing when busy fell", s, exp_q[s].size());
          exp_q[s].delete();
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
