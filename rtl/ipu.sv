// ipu: input pre-processing unit of a PIM macro. It takes a group of N_IN
// input features (one per compartment) and skips bit positions that are zero
// in every input of the group:
//   zero detection   bit_mask[b] = OR over inputs of in[i][b]
//   leading one      the highest bit still set in the remaining mask
//   input selection  col_bits[i] = in[i][that bit]
// One non-zero bit column is presented per cycle, from MSB to LSB, with its
// index; a group whose mask has P bits set therefore takes P cycles, and an
// all-zero group is absorbed in its accept cycle with no column at all.
// Handshake (own choice): a group is taken when in_valid & in_ready; in_ready
// is high when idle or while the last column of the current group is shown,
// so groups follow each other without a bubble. The SRAM row of the group
// travels with it (col_row).
module ipu #(
  parameter int unsigned N_IN = 16,
  parameter int unsigned IW   = 8,
  parameter int unsigned RW   = 4
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  logic [N_IN*IW-1:0]      in_data,
  input  logic [RW-1:0]           in_row,
  output logic                    col_valid,
  output logic [N_IN-1:0]         col_bits,
  output logic [$clog2(IW)-1:0]   col_idx,
  output logic [RW-1:0]           col_row,
  output logic                    col_last,
  output logic [IW-1:0]           bit_mask_o   // mask of the group just taken
);
  logic [N_IN*IW-1:0] data_q;
  logic [RW-1:0]      row_q;
  logic [IW-1:0]      rem_q;       // bit columns still to send
  logic [IW-1:0]      bit_mask;
  logic [IW-1:0]      rem_next;

  // zero detection over the offered group
  always_comb begin
    bit_mask = '0;
    for (int i = 0; i < N_IN; i++)
      bit_mask |= in_data[i*IW +: IW];
  end
  assign bit_mask_o = bit_mask;

  // leading one detection on the remaining mask
  always_comb begin
    col_idx = '0;
    for (int b = 0; b < IW; b++)
      if (rem_q[b]) col_idx = b[$clog2(IW)-1:0];
  end

  assign col_valid = |rem_q;
  assign rem_next  = rem_q & ~(IW'(1) << col_idx);
  assign col_last  = col_valid && (rem_next == '0);
  assign in_ready  = !col_valid || col_last;
  assign col_row   = row_q;

  // input selection
  always_comb
    for (int i = 0; i < N_IN; i++)
      col_bits[i] = data_q[i*IW + int'(col_idx)];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      rem_q  <= '0;
      data_q <= '0;
      row_q  <= '0;
    end else if (in_valid && in_ready) begin
      rem_q  <= bit_mask;
      data_q <= in_data;
      row_q  <= in_row;
    end else if (col_valid) begin
      rem_q  <= rem_next;
    end
endmodule
