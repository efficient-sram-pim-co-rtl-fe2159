// pim_array: the SRAM-PIM array of one macro: COMPS compartments, each a row of
// COLS dyadic block multiply units (DBMUs) of ROWS cells. All compartments read
// the same row at once (the SRAM row loop Tk2 is sequential, the compartment
// loop Tk1 and the column loop are spatial); compartment c ANDs its stored
// blocks with its own input bit in_bits[c]. Outputs are flattened [c*COLS+j].
// A write stores the Q bits of one whole row (all compartments and columns),
// which is this design's own loading scheme. Reads are combinational.
module pim_array #(
  parameter int unsigned COMPS = 16,
  parameter int unsigned COLS  = 16,
  parameter int unsigned ROWS  = 16
) (
  input  logic                    clk,
  input  logic                    we,
  input  logic [$clog2(ROWS)-1:0] wrow,
  input  logic [COMPS*COLS-1:0]   wdata,
  input  logic [$clog2(ROWS)-1:0] row,
  input  logic [COMPS-1:0]        in_bits,
  output logic [COMPS*COLS-1:0]   o_q,
  output logic [COMPS*COLS-1:0]   o_qb
);
  for (genvar c = 0; c < COMPS; c++) begin : g_comp
    for (genvar j = 0; j < COLS; j++) begin : g_col
      dbmu #(.ROWS(ROWS)) u_dbmu (
        .clk   (clk),
        .we    (we),
        .wrow  (wrow),
        .wq    (wdata[c*COLS+j]),
        .row   (row),
        .in_bit(in_bits[c]),
        .o_q   (o_q[c*COLS+j]),
        .o_qb  (o_qb[c*COLS+j])
      );
    end
  end
endmodule
