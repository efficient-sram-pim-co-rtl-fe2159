// tb_ipu: offers random groups of 16 INT8 inputs (sparse random bit patterns,
// plus all-zero and paper-example groups) with random gaps and checks that the
// IPU emits exactly the bit positions where some input is 1, from MSB to LSB,
// with the right bits and row, and col_last on the last one; the number of
// column cycles per group must equal the number of non-zero positions.
module tb_ipu;
  localparam int N = 16;
  logic clk = 0, rst_n, in_valid, in_ready, col_valid, col_last;
  logic [N*8-1:0] in_data;
  logic [3:0] in_row, col_row;
  logic [N-1:0] col_bits;
  logic [2:0] col_idx;
  logic [7:0] bit_mask_o;
  int checks = 0, failures = 0;

  ipu #(.N_IN(N), .IW(8), .RW(4)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // expected stream of columns
  typedef struct { logic [N-1:0] bits; int idx; int row; bit last; } col_t;
  col_t exp_q[$];
  int   groups = 0, cols_seen = 0, cols_exp = 0;

  task automatic push_group(logic [N*8-1:0] d, logic [3:0] r);
    logic [7:0] m;
    int last_b;
    m = '0;
    for (int i = 0; i < N; i++) m |= d[i*8 +: 8];
    last_b = -1;
    for (int b = 0; b < 8; b++) if (m[b]) begin last_b = b; break; end
    for (int b = 7; b >= 0; b--)
      if (m[b]) begin
        col_t c;
        for (int i = 0; i < N; i++) c.bits[i] = d[i*8 + b];
        c.idx = b; c.row = r; c.last = (b == last_b);
        exp_q.push_back(c);
        cols_exp++;
      end
  endtask

  // monitor
  always @(posedge clk) if (rst_n && col_valid) begin
    col_t e;
    cols_seen++;
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("unexpected column"); end
    else begin
      e = exp_q.pop_front();
      if (col_bits !== e.bits || int'(col_idx) != e.idx || int'(col_row) != e.row || col_last != e.last) begin
        failures++;
        $display("col mismatch: idx %0d/%0d bits %h/%h last %0b/%0b", col_idx, e.idx, col_bits, e.bits, col_last, e.last);
      end
    end
  end

  initial begin
    int start_cyc, cyc;
    rst_n = 0; in_valid = 0; in_data = '0; in_row = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    // paper example (Fig. 10): bit mask 0100_1101 -> columns 6,3,2,0
    in_data = '0;
    in_data[0*8 +: 8] = 8'b0100_1001; in_data[1*8 +: 8] = 8'b0000_1100; in_data[2*8 +: 8] = 8'b0000_0001;
    for (int g = 0; g < 300; g++) begin
      if (g > 0) begin
        for (int i = 0; i < N; i++) in_data[i*8 +: 8] = 8'($urandom & $urandom & $urandom);
        if (g % 17 == 0) in_data = '0;
      end
      in_row = 4'($urandom);
      in_valid = 1;
      while (!in_ready) @(negedge clk);
      push_group(in_data, in_row);
      if (g == 0) begin
        #1; checks++;
        if (bit_mask_o !== 8'b0100_1101) begin failures++; $display("bit mask %b", bit_mask_o); end
      end
      @(negedge clk); in_valid = 0;
      if ($urandom % 3 == 0) @(negedge clk);
      groups++;
    end
    in_valid = 0;
    repeat (20) @(negedge clk);
    checks++;
    if (cols_seen != cols_exp || exp_q.size() != 0) begin
      failures++; $display("columns seen %0d expected %0d", cols_seen, cols_exp);
    end
    // cycle count: one group with 5 non-zero positions takes 5 column cycles
    in_data = '0; in_data[7:0] = 8'b1011_0101; in_valid = 1;
    while (!in_ready) @(negedge clk);
    push_group(in_data, in_row);
    @(negedge clk); in_valid = 0;
    cyc = 0;
    while (col_valid) begin cyc++; @(negedge clk); end
    checks++;
    if (cyc != 5) begin failures++; $display("group took %0d cycles, expected 5", cyc); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
