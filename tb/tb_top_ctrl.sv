// tb_top_ctrl: runs a small program (MVM with and without clear, STORE, SIMD
// ADD over 3 vectors, SIMD QSTORE over 2 vectors, NOP, HALT) on the controller
// with behavioural models of the instruction buffer (one-cycle read), the
// switches/cores (busy for a random number of cycles after net_start) and the
// SIMD core (out_valid one cycle after simd_valid). It checks the buffer
// addresses, the number of net_start / acc_clr / out_snap pulses, the 32
// STORE writes and their selects, the SIMD reads and writes, that no MVM is
// left before the datapath is idle, and that done rises at HALT.
module tb_top_ctrl;
  import dbpim_pkg::*;
  logic clk = 0, rst_n, start, done, busy;
  logic [10:0] ib_raddr; logic [63:0] ib_rdata;
  logic [7:0] in_raddr; logic [3:0] mask_raddr, net_row_base;
  logic net_start, acc_clr, net_busy, cores_busy, out_snap;
  logic [4:0] st_sel;
  logic ob_we, ob_wsrc_simd; logic [11:0] ob_waddr, ob_raddr_a, ob_raddr_b;
  logic simd_valid, simd_out_valid; simd_op_e simd_op; logic [4:0] simd_shift;
  logic in_swe; logic [7:0] in_saddr; logic [4:0] in_sslice;
  logic [63:0] imem [16];
  int checks = 0, failures = 0;
  int n_start = 0, n_clr = 0, n_snap = 0, n_st_wr = 0, n_simd_wr = 0, n_in_wr = 0, busy_left = 0;

  top_ctrl #(.NC(8), .NM(4)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic expect_eq(string what, int got, int exp);
    checks++;
    if (got != exp) begin failures++; $display("%s: got %0d expected %0d", what, got, exp); end
  endtask

  function automatic logic [63:0] mvm(int in_a, int m_a, int rb, bit clr);
    return {OP_MVM, 8'(in_a), 4'(m_a), 4'(rb), clr, 43'd0};
  endfunction
  function automatic logic [63:0] simd(simd_op_e o, int a, int b, int d, int sh, int cnt);
    return {OP_SIMD, o, 12'(a), 12'(b), 16'(d), 5'(sh), 8'(cnt - 1), 3'd0};
  endfunction

  // models
  always @(posedge clk) ib_rdata <= imem[ib_raddr[3:0]];
  always @(posedge clk) simd_out_valid <= simd_valid;
  int busy_cnt = 0;
  always @(posedge clk) begin
    if (net_start) busy_cnt <= 3 + $urandom % 20;
    else if (busy_cnt > 0) busy_cnt <= busy_cnt - 1;
  end
  assign net_busy   = busy_cnt > 4;
  assign cores_busy = busy_cnt > 0;

  // monitor
  int mvm_k = 0, st_k = 0, sd_k = 0, in_k = 0;
  always @(posedge clk) if (rst_n) begin
    if (net_start) begin
      n_start++;
      mvm_k++;
      expect_eq("row_base", net_row_base, mvm_k == 1 ? 3 : 8);
    end
    if (acc_clr) n_clr++;
    if (out_snap) n_snap++;
    if (ob_we && !ob_wsrc_simd) begin
      expect_eq("store addr", ob_waddr, 100 + st_k);
      expect_eq("store sel", st_sel, st_k);
      st_k++; n_st_wr++;
    end
    if (ob_we && ob_wsrc_simd) begin
      expect_eq("simd dst", ob_waddr, 200 + sd_k);
      expect_eq("simd op", simd_op, SIMD_ADD);
      sd_k++; n_simd_wr++;
    end
    if (in_swe) begin
      expect_eq("qstore word", in_saddr, 5);
      expect_eq("qstore slice", in_sslice, 7 + in_k);
      expect_eq("qstore shift", simd_shift, 6);
      in_k++; n_in_wr++;
    end
    if (simd_valid && simd_op == SIMD_ADD) begin
      // operands were addressed in the previous cycle
    end
  end

  // an MVM may only finish when switches and cores are idle
  always @(posedge clk) if (rst_n && dut.st_q == dut.C_MVM_WAIT && (net_busy || cores_busy)) begin
    #1;
    if (dut.st_q != dut.C_MVM_WAIT) busy_left++;
  end

  // operand addresses for SIMD reads
  always @(posedge clk) if (rst_n && dut.st_q == dut.C_SIMD_RD && simd_op == SIMD_ADD) begin
    expect_eq("src a", ob_raddr_a, 300 + dut.vcnt_q);
    expect_eq("src b", ob_raddr_b, 400 + dut.vcnt_q);
  end

  initial begin
    int cyc;
    rst_n = 0; start = 0;
    for (int i = 0; i < 16; i++) imem[i] = {OP_HALT, 60'd0};
    imem[0] = mvm(17, 2, 3, 1);
    imem[1] = mvm(18, 3, 8, 0);
    imem[2] = {OP_STORE, 12'd100, 48'd0};
    imem[3] = {OP_NOP, 60'd0};
    imem[4] = simd(SIMD_ADD, 300, 400, 200, 0, 3);
    imem[5] = simd(SIMD_QSTORE, 10, 10, 16'h0507, 6, 2);
    imem[6] = {OP_HALT, 60'd0};
    repeat (2) @(negedge clk); rst_n = 1;
    // the first MVM must read input word 17 and mask word 2 while decoding
    fork
      begin
        @(posedge clk iff (dut.st_q == dut.C_DECODE));
        expect_eq("in_raddr", in_raddr, 17);
        expect_eq("mask_raddr", mask_raddr, 2);
      end
    join_none
    start = 1; @(negedge clk); start = 0;
    cyc = 0;
    while (!done && cyc < 2000) begin cyc++; @(negedge clk); end
    expect_eq("done", done, 1);
    expect_eq("net_start pulses", n_start, 2);
    expect_eq("acc_clr pulses", n_clr, 1);
    expect_eq("out_snap pulses", n_snap, 1);
    expect_eq("store writes", n_st_wr, 32);
    expect_eq("simd writes", n_simd_wr, 3);
    expect_eq("qstore writes", n_in_wr, 2);
    expect_eq("left MVM while busy", busy_left, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
