// sparse_alloc_net: the sparse allocation network. NCORE switches share one
// input window (WIN inputs for each of the TM input rows, read once from the
// input buffer) and each applies its own core's block-pruning mask, so every
// core receives only the inputs its compressed weights need. Each switch
// drives the group interface of one PIM core (flattened per core). start
// launches all switches at once; busy stays high until the last switch is
// finished, because cores with sparser masks finish earlier.
// Lint notes: the switches' done pulses are left unconnected; the controller
// waits on the OR of the busy flags, which covers every switch.
module sparse_alloc_net #(
  parameter int unsigned NCORE = 8,
  parameter int unsigned WIN   = 128,
  parameter int unsigned TM    = 4,
  parameter int unsigned GROUP = 16,
  parameter int unsigned IW    = 8,
  parameter int unsigned RW    = 4,
  localparam int unsigned MW   = $clog2(TM)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  logic [NCORE*WIN-1:0]        mask,
  input  logic [TM*WIN*IW-1:0]        in_win,
  input  logic [RW-1:0]               row_base,
  output logic [NCORE-1:0]            grp_valid,
  input  logic [NCORE-1:0]            grp_ready,
  output logic [NCORE*MW-1:0]         grp_macro,
  output logic [NCORE*GROUP*IW-1:0]   grp_data,
  output logic [NCORE*RW-1:0]         grp_row,
  output logic                        busy
);
  logic [NCORE-1:0] sw_busy, sw_done;

  for (genvar s = 0; s < NCORE; s++) begin : g_sw
    sparse_switch #(.WIN(WIN), .TM(TM), .GROUP(GROUP), .IW(IW), .RW(RW)) u_sw (
      .clk, .rst_n, .start,
      .mask     (mask[s*WIN +: WIN]),
      .in_win,
      .row_base,
      .grp_valid(grp_valid[s]),
      .grp_ready(grp_ready[s]),
      .grp_macro(grp_macro[s*MW +: MW]),
      .grp_data (grp_data[s*GROUP*IW +: GROUP*IW]),
      .grp_row  (grp_row[s*RW +: RW]),
      .busy     (sw_busy[s]),
      .done     (sw_done[s])
    );
  end

  assign busy = |sw_busy;
endmodule
