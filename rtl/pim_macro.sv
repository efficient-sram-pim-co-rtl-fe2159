// pim_macro: customized digital SRAM-PIM macro. It holds COMPS x COLS x ROWS
// complementary-pattern dyadic blocks (4096 for 16/16/16) and computes, for
// a group of COMPS INT8 inputs applied to SRAM row r,
//   acc[j] += sum_c  in[c] * w(r, c, j)
// where w is the signed dyadic block (value +-{1,2} * 4^index) stored at
// compartment c, column j, row r. The IPU turns the group into non-zero bit
// columns (one per cycle, all-zero bit positions skipped); each column is
// ANDed with row r of the array and the 16 PPUs (one per column) reduce and
// accumulate. The weight metadata (sign, index) of the row being computed is
// read from the core's meta RF through meta_row / meta_sign / meta_idx
// (flattened [c*COLS+j]).
// Latency: a group takes max(1, P) cycles, P = number of non-zero bit
// positions in the group; acc is updated at the edge ending each column cycle.
// busy is high while a group is still being processed.
// Lint notes: the IPU's col_last is unused here; the macro reports busy from
// col_valid and the IPU's own in_ready already accounts for the last column.
module pim_macro #(
  parameter int unsigned COMPS = 16,
  parameter int unsigned COLS  = 16,
  parameter int unsigned ROWS  = 16,
  parameter int unsigned IW    = 8,
  parameter int unsigned ACC_W = 32,
  localparam int unsigned RW   = $clog2(ROWS)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // input groups
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic [COMPS*IW-1:0]     in_data,
  input  logic [RW-1:0]           in_row,
  // metadata of the active row
  output logic [RW-1:0]           meta_row,
  input  logic [COMPS*COLS-1:0]   meta_sign,
  input  logic [2*COMPS*COLS-1:0] meta_idx,
  // weight load
  input  logic                    w_we,
  input  logic [RW-1:0]           w_row,
  input  logic [COMPS*COLS-1:0]   w_data,
  // results
  input  logic                    acc_clr,
  output logic [COLS*ACC_W-1:0]   acc,
  output logic                    busy
);
  logic                   col_valid, col_last;
  logic [COMPS-1:0]       col_bits;
  logic [$clog2(IW)-1:0]  col_idx;
  logic [RW-1:0]          col_row;
  logic [IW-1:0]          bit_mask_unused;
  logic [COMPS*COLS-1:0]  o_q, o_qb;

  ipu #(.N_IN(COMPS), .IW(IW), .RW(RW)) u_ipu (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data, .in_row,
    .col_valid, .col_bits, .col_idx, .col_row, .col_last,
    .bit_mask_o(bit_mask_unused)
  );

  assign meta_row = col_row;
  assign busy     = col_valid;

  pim_array #(.COMPS(COMPS), .COLS(COLS), .ROWS(ROWS)) u_array (
    .clk, .we(w_we), .wrow(w_row), .wdata(w_data),
    .row(col_row), .in_bits(col_bits), .o_q, .o_qb
  );

  for (genvar j = 0; j < COLS; j++) begin : g_ppu
    logic [COMPS-1:0]   q_j, qb_j, s_j;
    logic [2*COMPS-1:0] i_j;
    always_comb
      for (int c = 0; c < COMPS; c++) begin
        q_j[c]        = o_q[c*COLS+j];
        qb_j[c]       = o_qb[c*COLS+j];
        s_j[c]        = meta_sign[c*COLS+j];
        i_j[2*c +: 2] = meta_idx[2*(c*COLS+j) +: 2];
      end
    ppu #(.COMPS(COMPS), .IW(IW), .ACC_W(ACC_W)) u_ppu (
      .clk, .rst_n, .col_valid, .col_idx,
      .o_q(q_j), .o_qb(qb_j), .sign(s_j), .index(i_j),
      .acc_clr, .acc(acc[j*ACC_W +: ACC_W])
    );
  end
endmodule
