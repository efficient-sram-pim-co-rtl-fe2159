// tb_dbpim_top: end-to-end run of the whole accelerator at its default size
// (8 cores x 4 macros). For every core it draws a block-pruning mask per
// 128-input window and, for each kept weight row and each of its 16 columns,
// an INT8 weight that has exactly 1 (threshold-1 filter) or 2 (threshold-2
// filter, spread over a column pair) non-zero CSD digits; the CSD digits are
// turned into dyadic blocks (Q bit, sign, index) and loaded with the masks,
// metadata, pair configuration, inputs and a program:
//   MVM w0 (clear) + MVM w1      one 256-input K tile of a layer
//   STORE -> words 0..31
//   SIMD QSTORE 0..31 -> input word 2    (re-quantize as next layer input)
//   SIMD RELU / ADD (ResAdd) / MAX / MUL over the results
//   MVM w2 (clear) with mask word 2, STORE -> words 512..543
//   HALT
// All output-buffer words written are read back over the host port and
// compared with a model computed here from the dense (uncompressed) weights.
// It also counts how often each mechanism of the design occurred and fails if
// one never did: pruned inputs skipped by the switches, all-zero input bit
// columns skipped by the IPUs, all-zero input groups, threshold-2 column
// merges, negative CSD digits, signed-MSB columns, switch stalls on a busy
// macro, SIMD saturation.
module tb_dbpim_top;
  import dbpim_pkg::*;
  import tb_util_pkg::*;

  logic clk = 0, rst_n, host_we, start, done, busy;
  ld_target_e host_target;
  logic [2:0] host_core;
  logic [11:0] host_addr, host_raddr;
  logic [INBUF_W-1:0] host_wdata;
  logic [OUTBUF_W-1:0] host_rdata;
  int checks = 0, failures = 0;

  dbpim_top dut (.*);
  always #5 clk = ~clk;

  initial begin
    #50000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---------------- model state ----------------
  // dense weights of core s for uncompressed input position k (0..255) and column j
  int  wdense [NCORE][256][COLS];
  bit  q_m    [NCORE][ROWS][COMPS][COLS];
  bit  s_m    [NCORE][ROWS][COMPS][COLS];
  int  i_m    [NCORE][ROWS][COMPS][COLS];
  logic [WIN-1:0] mask_m [NCORE][3];
  logic [COLS/2-1:0] pair_m [NCORE];
  logic [INBUF_W-1:0] inw [3];
  longint res1 [NCORE][TM][COLS];   // layer-1 results (merged)
  longint res2 [NCORE][TM][COLS];   // second MVM results
  logic [OUTBUF_W-1:0] expw [4096];
  bit   expv [4096];

  // mechanism counters
  int n_pruned = 0, n_bitskip = 0, n_zero_grp = 0, n_pairs = 0, n_neg = 0, n_msb = 0, n_stall = 0, n_sat = 0;

  task automatic host_write(ld_target_e t, int core, int addr, logic [INBUF_W-1:0] d);
    @(negedge clk);
    host_we = 1; host_target = t; host_core = 3'(core); host_addr = 12'(addr); host_wdata = d;
    @(negedge clk);
    host_we = 0;
  endtask

  // a random INT8 with exactly nd non-zero CSD digits, all below bit 8
  task automatic pick_weight(int nd, output int w, output bit [9:0] pos, output bit [9:0] neg);
    do begin
      w = int'($urandom % 256) - 128;
      to_csd(w, pos, neg);
    end while ($countones(pos | neg) != nd || pos[9:8] != 0 || neg[9:8] != 0);
  endtask

  function automatic int q8(longint x, int sh);
    longint r;
    r = (sh == 0) ? x : ((x + (longint'(1) << (sh - 1))) >>> sh);
    if (r > 127) r = 127;
    if (r < -128) r = -128;
    return int'(r);
  endfunction

  function automatic longint lane(logic [OUTBUF_W-1:0] w, int l);
    return longint'($signed(w[l*32 +: 32]));
  endfunction

  // compressed index -> (row, compartment) follows the switch: window w's
  // kept inputs fill rows 8w.., 16 per row, in increasing k
  task automatic build_core(int s);
    int kc;
    pair_m[s] = 8'($urandom);
    for (int p = 0; p < COLS/2; p++) if (pair_m[s][p]) n_pairs++;
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COMPS; c++) for (int j = 0; j < COLS; j++) begin
      q_m[s][r][c][j] = 1'($urandom); s_m[s][r][c][j] = 1'($urandom); i_m[s][r][c][j] = $urandom % 4;
    end
    for (int k = 0; k < 256; k++) for (int j = 0; j < COLS; j++) wdense[s][k][j] = 0;
    for (int w = 0; w < 2; w++) begin
      kc = 0;
      for (int k = 0; k < WIN; k++) begin
        if (!mask_m[s][w][k]) begin n_pruned++; continue; end
        for (int p = 0; p < COLS/2; p++) begin
          int nd;
          nd = pair_m[s][p] ? 2 : 1;
          for (int h = 0; h < (pair_m[s][p] ? 1 : 2); h++) begin
            int wv, d, jj;
            bit [9:0] pos, neg;
            pick_weight(nd, wv, pos, neg);
            d = 0;
            for (int b = 0; b < 8; b++) if (pos[b] || neg[b]) begin
              int r, c;
              r = 8*w + kc / COMPS; c = kc % COMPS;
              jj = 2*p + (pair_m[s][p] ? d : h);
              q_m[s][r][c][jj] = (b % 2 == 1);
              s_m[s][r][c][jj] = neg[b];
              i_m[s][r][c][jj] = b / 2;
              if (neg[b]) n_neg++;
              d++;
            end
            if (pair_m[s][p]) begin
              wdense[s][w*WIN + k][2*p] = wv;       // merged into slot 2p
            end else
              wdense[s][w*WIN + k][2*p + h] = wv;
          end
        end
        kc++;
      end
    end
  endtask

  function automatic logic [INST_W-1:0] i_mvm(int in_a, int m_a, int rb, bit clr);
    return {OP_MVM, 8'(in_a), 4'(m_a), 4'(rb), clr, 43'd0};
  endfunction
  function automatic logic [INST_W-1:0] i_simd(simd_op_e o, int a, int b, int d, int sh, int cnt);
    return {OP_SIMD, o, 12'(a), 12'(b), 16'(d), 5'(sh), 8'(cnt - 1), 3'd0};
  endfunction

  // dense MVM model: inputs word iw (window wsel of the layer), accumulate into acc
  task automatic model_mvm(logic [INBUF_W-1:0] iwd, int wsel, int s, ref longint acc [NCORE][TM][COLS]);
    for (int m = 0; m < TM; m++)
      for (int j = 0; j < COLS; j++)
        for (int k = 0; k < WIN; k++)
          if (mask_m[s][wsel][k])
            acc[s][m][j] += longint'($signed(iwd[(m*WIN + k)*8 +: 8])) * wdense[s][(wsel % 2)*WIN + k][j];
  endtask

  // IPU activity probes: count skipped bit columns, zero groups and MSB columns
  for (genvar s = 0; s < NCORE; s++) begin : g_probe
    for (genvar m = 0; m < TM; m++) begin : g_m
      always @(posedge clk) if (rst_n) begin
        if (dut.g_core[s].u_core.g_macro[m].u_macro.u_ipu.in_valid &&
            dut.g_core[s].u_core.g_macro[m].u_macro.u_ipu.in_ready) begin
          int pc;
          pc = $countones(dut.g_core[s].u_core.g_macro[m].u_macro.u_ipu.bit_mask);
          n_bitskip += 8 - pc;
          if (pc == 0) n_zero_grp++;
        end
        if (dut.g_core[s].u_core.g_macro[m].u_macro.u_ipu.col_valid &&
            dut.g_core[s].u_core.g_macro[m].u_macro.u_ipu.col_idx == 3'd7) n_msb++;
      end
    end
    always @(posedge clk) if (rst_n && dut.g_valid[s] && !dut.g_ready[s]) n_stall++;
  end

  initial begin
    int pc, cyc, kept;
    longint ck;
    rst_n = 0; host_we = 0; host_target = LD_INST; host_core = 0; host_addr = 0; host_wdata = '0;
    host_raddr = 0; start = 0;
    repeat (3) @(negedge clk); rst_n = 1;

    // masks: density varies per core; word 2 is the second layer's mask
    for (int s = 0; s < NCORE; s++)
      for (int w = 0; w < 3; w++) begin
        for (int k = 0; k < WIN; k += 32) mask_m[s][w][k +: 32] = $urandom | (s < 2 ? $urandom : 0);
        if (s == 7 && w == 1) mask_m[s][w] = '0;     // a fully pruned window
        if (s == 6 && w == 0) mask_m[s][w] = '1;     // an unpruned window
      end
    // layer-2 mask equals window 0's structure for the model (same weights, rows 0..7)
    for (int s = 0; s < NCORE; s++) mask_m[s][2] = mask_m[s][0];
    for (int s = 0; s < NCORE; s++) build_core(s);

    // inputs: window 0 dense-ish signed, window 1 sparse in high bits, some zero rows
    for (int w = 0; w < 2; w++)
      for (int b = 0; b < INBUF_W/8; b++) begin
        logic [7:0] v;
        v = 8'($urandom);
        if (w == 1) v &= 8'h0b;
        if ((b / 16) % 9 == 4) v = '0;
        inw[w][b*8 +: 8] = v;
      end

    // ---- load ----
    for (int s = 0; s < NCORE; s++) begin
      for (int w = 0; w < 3; w++) host_write(LD_MASK, s, w, INBUF_W'(mask_m[s][w]));
      host_write(LD_PAIR, s, 0, INBUF_W'(pair_m[s]));
      for (int r = 0; r < ROWS; r++) begin
        logic [INBUF_W-1:0] wq, mt;
        wq = '0; mt = '0;
        for (int c = 0; c < COMPS; c++) for (int j = 0; j < COLS; j++) begin
          wq[c*COLS+j] = q_m[s][r][c][j];
          mt[3*(c*COLS+j)] = s_m[s][r][c][j];
          mt[3*(c*COLS+j)+1 +: 2] = 2'(i_m[s][r][c][j]);
        end
        host_write(LD_WEIGHT, s, r, wq);
        host_write(LD_META, s, r, mt);
      end
    end
    host_write(LD_INBUF, 0, 0, inw[0]);
    host_write(LD_INBUF, 0, 1, inw[1]);
    pc = 0;
    host_write(LD_INST, 0, pc++, INBUF_W'(i_mvm(0, 0, 0, 1)));
    host_write(LD_INST, 0, pc++, INBUF_W'(i_mvm(1, 1, 8, 0)));
    host_write(LD_INST, 0, pc++, INBUF_W'({OP_STORE, 12'd0, 48'd0}));
    host_write(LD_INST, 0, pc++, INBUF_W'(i_simd(SIMD_QSTORE, 0, 0, 16'h0200, 9, 32)));
    host_write(LD_INST, 0, pc++, INBUF_W'(i_simd(SIMD_RELU, 0, 0, 64, 0, 32)));
    host_write(LD_INST, 0, pc++, INBUF_W'(i_simd(SIMD_ADD, 64, 0, 128, 0, 32)));
    host_write(LD_INST, 0, pc++, INBUF_W'(i_simd(SIMD_MAX, 0, 128, 192, 0, 32)));
    host_write(LD_INST, 0, pc++, INBUF_W'(i_simd(SIMD_MUL, 0, 64, 256, 0, 4)));
    host_write(LD_INST, 0, pc++, INBUF_W'(i_mvm(2, 2, 0, 1)));
    host_write(LD_INST, 0, pc++, INBUF_W'({OP_STORE, 12'd512, 48'd0}));
    host_write(LD_INST, 0, pc++, INBUF_W'({OP_HALT, 60'd0}));

    // ---- model ----
    for (int s = 0; s < NCORE; s++) for (int m = 0; m < TM; m++) for (int j = 0; j < COLS; j++) begin
      res1[s][m][j] = 0; res2[s][m][j] = 0;
    end
    for (int s = 0; s < NCORE; s++) begin
      model_mvm(inw[0], 0, s, res1);
      model_mvm(inw[1], 1, s, res1);
    end
    for (int a = 0; a < 4096; a++) expv[a] = 0;
    for (int i = 0; i < NCORE*TM; i++) begin
      for (int j = 0; j < COLS; j++) expw[i][j*32 +: 32] = 32'(res1[i/TM][i%TM][j]);
      expv[i] = 1;
    end
    // QSTORE: output word i -> input word 2, slice i
    for (int i = 0; i < NCORE*TM; i++)
      for (int j = 0; j < COLS; j++) begin
        int v;
        v = q8(lane(expw[i], j), 9);
        if (v == 127 || v == -128) n_sat++;
        inw[2][(i*16 + j)*8 +: 8] = 8'(v);
      end
    for (int i = 0; i < NCORE*TM; i++) begin
      for (int j = 0; j < COLS; j++) begin
        longint x;
        x = lane(expw[i], j);
        expw[64+i][j*32 +: 32] = 32'(x > 0 ? x : 0);
      end
      expv[64+i] = 1;
    end
    for (int i = 0; i < NCORE*TM; i++) begin
      for (int j = 0; j < COLS; j++) expw[128+i][j*32 +: 32] = 32'(lane(expw[64+i], j) + lane(expw[i], j));
      expv[128+i] = 1;
    end
    for (int i = 0; i < NCORE*TM; i++) begin
      for (int j = 0; j < COLS; j++) begin
        longint a, b;
        a = lane(expw[i], j); b = lane(expw[128+i], j);
        expw[192+i][j*32 +: 32] = 32'(a > b ? a : b);
      end
      expv[192+i] = 1;
    end
    for (int i = 0; i < 4; i++) begin
      for (int j = 0; j < COLS; j++) expw[256+i][j*32 +: 32] = 32'(lane(expw[i], j) * lane(expw[64+i], j));
      expv[256+i] = 1;
    end
    for (int s = 0; s < NCORE; s++) model_mvm(inw[2], 2, s, res2);
    for (int i = 0; i < NCORE*TM; i++) begin
      for (int j = 0; j < COLS; j++) expw[512+i][j*32 +: 32] = 32'(res2[i/TM][i%TM][j]);
      expv[512+i] = 1;
    end

    // ---- run ----
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cyc = 0;
    while (!done) begin cyc++; @(negedge clk); end
    $display("program finished in %0d cycles", cyc);

    // ---- read back ----
    for (int a = 0; a < 4096; a++) if (expv[a]) begin
      host_raddr = 12'(a);
      @(negedge clk);
      checks++;
      if (host_rdata !== expw[a]) begin
        failures++;
        if (failures < 10)
          for (int j = 0; j < COLS; j++)
            if (host_rdata[j*32 +: 32] !== expw[a][j*32 +: 32])
              $display("word %0d lane %0d: %0d expected %0d", a, j, $signed(host_rdata[j*32 +: 32]), $signed(expw[a][j*32 +: 32]));
      end
    end
    checks++;
    if (dut.u_inbuf.mem[2] !== inw[2]) begin failures++; $display("QSTORE input word mismatch"); end

    $display("mechanisms: pruned=%0d bitskip=%0d zero_groups=%0d pairs=%0d neg_digits=%0d msb_cols=%0d stalls=%0d saturations=%0d",
             n_pruned, n_bitskip, n_zero_grp, n_pairs, n_neg, n_msb, n_stall, n_sat);
    begin
      int cnts[8];
      cnts = '{n_pruned, n_bitskip, n_zero_grp, n_pairs, n_neg, n_msb, n_stall, n_sat};
      foreach (cnts[i]) begin
        checks++;
        if (cnts[i] == 0) begin failures++; $display("mechanism %0d never happened", i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
