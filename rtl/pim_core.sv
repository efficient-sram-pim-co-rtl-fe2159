// pim_core: one of the eight PIM cores. It holds the core's meta RF, TM PIM
// macros and the output RF. All macros store the same weights (loaded by one
// broadcast write) and each works on a different input row m, so the core
// computes TM output rows for the same COLS filter columns.
// Filters with FTA threshold 2 have two non-zero CSD digits per weight and
// occupy two neighbouring columns (2p, 2p+1); when pair_cfg[p] is set the
// output RF adds those two column results into slot 2p and clears slot 2p+1.
// Where that merge happens is this design's choice; the paper only states
// that a 16-column macro serves 16 filters at threshold 1 and 8 at threshold 2.
// Interface: the switch offers a group on grp_* for macro grp_macro and it
// is taken when grp_valid & grp_ready. out_snap copies the (merged) macro
// accumulators into the output RF at the next edge; out_rf is flattened as
// [(m*COLS + j)*ACC_W].
module pim_core #(
  parameter int unsigned TM    = 4,
  parameter int unsigned COMPS = 16,
  parameter int unsigned COLS  = 16,
  parameter int unsigned ROWS  = 16,
  parameter int unsigned IW    = 8,
  parameter int unsigned ACC_W = 32,
  localparam int unsigned RW   = $clog2(ROWS),
  localparam int unsigned ENT  = COMPS * COLS
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      grp_valid,
  output logic                      grp_ready,
  input  logic [$clog2(TM)-1:0]     grp_macro,
  input  logic [COMPS*IW-1:0]       grp_data,
  input  logic [RW-1:0]             grp_row,
  input  logic                      w_we,
  input  logic [RW-1:0]             w_row,
  input  logic [ENT-1:0]            w_data,
  input  logic                      meta_we,
  input  logic [RW-1:0]             meta_addr,
  input  logic [3*ENT-1:0]          meta_wdata,
  input  logic                      pair_we,
  input  logic [COLS/2-1:0]         pair_wdata,
  input  logic                      acc_clr,
  input  logic                      out_snap,
  output logic [TM*COLS*ACC_W-1:0]  out_rf,
  output logic                      busy
);
  logic [TM-1:0]          m_ready, m_busy;
  logic [TM*RW-1:0]       m_row;
  logic [TM*ENT-1:0]      m_sign;
  logic [TM*2*ENT-1:0]    m_idx;
  logic [TM*COLS*ACC_W-1:0] m_acc;
  logic [COLS/2-1:0]      pair_cfg;
  logic [TM*COLS*ACC_W-1:0] merged;

  meta_rf #(.ROWS(ROWS), .ENT(ENT), .NRD(TM)) u_meta (
    .clk, .we(meta_we), .waddr(meta_addr), .wdata(meta_wdata),
    .raddr(m_row), .sign(m_sign), .idx(m_idx)
  );

  for (genvar m = 0; m < TM; m++) begin : g_macro
    pim_macro #(.COMPS(COMPS), .COLS(COLS), .ROWS(ROWS), .IW(IW), .ACC_W(ACC_W)) u_macro (
      .clk, .rst_n,
      .in_valid (grp_valid && (grp_macro == m)),
      .in_ready (m_ready[m]),
      .in_data  (grp_data),
      .in_row   (grp_row),
      .meta_row (m_row[m*RW +: RW]),
      .meta_sign(m_sign[m*ENT +: ENT]),
      .meta_idx (m_idx[m*2*ENT +: 2*ENT]),
      .w_we, .w_row, .w_data,
      .acc_clr,
      .acc      (m_acc[m*COLS*ACC_W +: COLS*ACC_W]),
      .busy     (m_busy[m])
    );
  end

  assign grp_ready = m_ready[grp_macro];
  assign busy      = |m_busy;

  always_comb
    for (int m = 0; m < TM; m++)
      for (int p = 0; p < COLS/2; p++) begin
        logic [ACC_W-1:0] a0, a1;
        a0 = m_acc[(m*COLS + 2*p)*ACC_W +: ACC_W];
        a1 = m_acc[(m*COLS + 2*p+1)*ACC_W +: ACC_W];
        merged[(m*COLS + 2*p)*ACC_W +: ACC_W]   = pair_cfg[p] ? a0 + a1 : a0;
        merged[(m*COLS + 2*p+1)*ACC_W +: ACC_W] = pair_cfg[p] ? '0 : a1;
      end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      pair_cfg <= '0;
      out_rf   <= '0;
    end else begin
      if (pair_we)  pair_cfg <= pair_wdata;
      if (out_snap) out_rf   <= merged;
    end
endmodule
