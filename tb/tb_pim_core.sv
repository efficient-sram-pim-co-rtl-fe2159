// tb_pim_core: loads random dyadic blocks and metadata into one core (shared by
// its four macros) and a random threshold-2 pair configuration, then sends
// random input groups to random macros and rows, snapshots the results into
// the output RF and checks all 4x16 slots: unpaired columns hold their own
// dot product, a pair (2p, 2p+1) holds the sum in slot 2p and 0 in slot 2p+1.
module tb_pim_core;
  import tb_util_pkg::*;
  localparam int TM = 4, C = 16, J = 16, R = 16, E = C*J;
  logic clk = 0, rst_n, grp_valid, grp_ready, w_we, meta_we, pair_we, acc_clr, out_snap, busy;
  logic [1:0] grp_macro;
  logic [C*8-1:0] grp_data;
  logic [3:0] grp_row, w_row, meta_addr;
  logic [E-1:0] w_data;
  logic [3*E-1:0] meta_wdata;
  logic [J/2-1:0] pair_wdata;
  logic [TM*J*32-1:0] out_rf;
  bit q_m [R][C][J]; bit s_m [R][C][J]; int i_m [R][C][J];
  longint model [TM][J];
  int checks = 0, failures = 0;

  pim_core #(.TM(TM), .COMPS(C), .COLS(J), .ROWS(R)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #20000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check_out(logic [J/2-1:0] pc);
    for (int m = 0; m < TM; m++)
      for (int j = 0; j < J; j++) begin
        longint e;
        if (pc[j/2]) e = (j % 2 == 0) ? model[m][j] + model[m][j+1] : 0;
        else e = model[m][j];
        checks++;
        if ($signed(out_rf[(m*J+j)*32 +: 32]) != 32'(e)) begin
          failures++; $display("macro %0d slot %0d: %0d expected %0d", m, j, $signed(out_rf[(m*J+j)*32 +: 32]), e);
        end
      end
  endtask

  initial begin
    rst_n = 0; grp_valid = 0; w_we = 0; meta_we = 0; pair_we = 0; acc_clr = 0; out_snap = 0;
    grp_macro = 0; grp_data = '0; grp_row = 0; w_row = 0; meta_addr = 0; w_data = '0; meta_wdata = '0; pair_wdata = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < R; r++) begin
      for (int c = 0; c < C; c++)
        for (int j = 0; j < J; j++) begin
          q_m[r][c][j] = 1'($urandom); s_m[r][c][j] = 1'($urandom); i_m[r][c][j] = $urandom % 4;
          w_data[c*J+j] = q_m[r][c][j];
          meta_wdata[3*(c*J+j)] = s_m[r][c][j];
          meta_wdata[3*(c*J+j)+1 +: 2] = 2'(i_m[r][c][j]);
        end
      w_we = 1; w_row = 4'(r); meta_we = 1; meta_addr = 4'(r); @(negedge clk);
    end
    w_we = 0; meta_we = 0;
    for (int rep = 0; rep < 3; rep++) begin
      pair_wdata = 8'($urandom); pair_we = 1; acc_clr = 1; @(negedge clk); pair_we = 0; acc_clr = 0;
      for (int m = 0; m < TM; m++) for (int j = 0; j < J; j++) model[m][j] = 0;
      for (int g = 0; g < 120; g++) begin
        int m, r;
        m = $urandom % TM; r = $urandom % R;
        for (int c = 0; c < C; c++) grp_data[c*8 +: 8] = 8'($urandom & (g % 2 ? 32'hff : 32'h93));
        grp_macro = 2'(m); grp_row = 4'(r); grp_valid = 1;
        #1;   // let grp_ready follow the new grp_macro
        while (!grp_ready) @(negedge clk);
        for (int j = 0; j < J; j++)
          for (int c = 0; c < C; c++)
            model[m][j] += longint'($signed(grp_data[c*8 +: 8])) * block_value(q_m[r][c][j], s_m[r][c][j], i_m[r][c][j]);
        @(negedge clk); grp_valid = 0;
      end
      while (busy) @(negedge clk);
      out_snap = 1; @(negedge clk); out_snap = 0;
      check_out(pair_wdata);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
