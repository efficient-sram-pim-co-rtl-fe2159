// tb_simd_core: every operation on random lanes (plus saturation corners),
// result checked one cycle after in_valid against a reference written here.
module tb_simd_core;
  import dbpim_pkg::*;
  localparam int L = 16;
  logic clk = 0, rst_n, in_valid, out_valid;
  simd_op_e op;
  logic [L*32-1:0] a, b, y;
  logic [4:0] shift;
  logic [L*8-1:0] q8;
  int checks = 0, failures = 0;

  simd_core #(.LANES(L), .DW(32)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic int quant(int x, int sh);
    longint r;
    r = (sh == 0) ? longint'(x) : ((longint'(x) + (longint'(1) << (sh - 1))) >>> sh);
    if (r > 127) r = 127;
    if (r < -128) r = -128;
    return int'(r);
  endfunction

  initial begin
    rst_n = 0; in_valid = 0; op = SIMD_ADD; a = '0; b = '0; shift = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 600; t++) begin
      int ea [L]; int eq [L];
      op = simd_op_e'(t % 6); shift = 5'($urandom % 12);
      for (int l = 0; l < L; l++) begin
        int x, z;
        x = (t % 4 == 0) ? int'($urandom) : (int'($urandom % 65536) - 32768);
        z = int'($urandom % 4096) - 2048;
        a[l*32 +: 32] = x; b[l*32 +: 32] = z;
        eq[l] = quant(x, shift);
        case (op)
          SIMD_ADD:  ea[l] = x + z;
          SIMD_MUL:  ea[l] = x * z;
          SIMD_MAX:  ea[l] = (x > z) ? x : z;
          SIMD_RELU: ea[l] = (x > 0) ? x : 0;
          default:   ea[l] = eq[l];
        endcase
      end
      in_valid = 1;
      @(posedge clk); #1;
      checks++;
      if (!out_valid) begin failures++; $display("no out_valid"); end
      for (int l = 0; l < L; l++) begin
        checks++;
        if ($signed(y[l*32 +: 32]) != ea[l] || $signed(q8[l*8 +: 8]) != eq[l]) begin
          failures++; $display("op %0d lane %0d: y %0d/%0d q %0d/%0d", op, l, $signed(y[l*32 +: 32]), ea[l], $signed(q8[l*8 +: 8]), eq[l]);
        end
      end
      @(negedge clk); in_valid = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
