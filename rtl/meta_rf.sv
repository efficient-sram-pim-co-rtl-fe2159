// meta_rf: metadata register file of one PIM core. For every dyadic block
// stored in the core's macros it keeps the block's sign (1 bit) and index
// (2 bits, DB#0..DB#3): 16 rows x 16 compartments x 16 columns x 3 bits =
// 1.5 KB, the size the paper gives. One word holds a whole SRAM row; entry
// e = c*COLS + j occupies bits [3e] (sign) and [3e+2:3e+1] (index). The four
// macros of a core hold identical weights but may work on different rows, so
// the file has NRD combinational read ports. Writes are synchronous.
module meta_rf #(
  parameter int unsigned ROWS = 16,
  parameter int unsigned ENT  = 256,   // compartments x columns
  parameter int unsigned NRD  = 4,
  localparam int unsigned RW  = $clog2(ROWS)
) (
  input  logic                  clk,
  input  logic                  we,
  input  logic [RW-1:0]         waddr,
  input  logic [3*ENT-1:0]      wdata,
  input  logic [NRD*RW-1:0]     raddr,
  output logic [NRD*ENT-1:0]    sign,
  output logic [NRD*2*ENT-1:0]  idx
);
  logic [3*ENT-1:0] mem [ROWS];

  always_ff @(posedge clk)
    if (we) mem[waddr] <= wdata;

  always_comb
    for (int p = 0; p < NRD; p++)
      for (int e = 0; e < ENT; e++) begin
        sign[p*ENT + e]           = mem[raddr[p*RW +: RW]][3*e];
        idx[p*2*ENT + 2*e +: 2]   = mem[raddr[p*RW +: RW]][3*e+1 +: 2];
      end
endmodule
