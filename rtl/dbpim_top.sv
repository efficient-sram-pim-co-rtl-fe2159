// dbpim_top: the DB-PIM accelerator. A digital SRAM processing-in-memory
// engine for INT8 matrix multiplications O = I x W that skips three kinds of
// zeros: weight rows removed by block-wise pruning (sparse allocation network),
// zero CSD digits inside weights (only non-zero dyadic blocks are stored, with
// sign and index metadata, and a CSD adder tree puts them back in place), and
// bit positions that are zero across a whole group of inputs (IPU).
// Blocks: instruction buffer, top controller, input buffer (128 KB), mask
// buffer (8 x 2 Kb), sparse allocation network (8 switches), 8 PIM cores of 4
// macros each (32 macros, 16 KB of weight cells), output buffer (256 KB) and a
// SIMD core. These follow the paper's architecture; the host load port, the
// instruction encoding and the buffer word layouts are this design's own.
// Host interface: while the controller is idle, host_we with host_target
// writes one word: LD_INST (inst[addr] = wdata[63:0]), LD_INBUF (input word),
// LD_MASK (core's mask RF word addr), LD_META (core's meta RF row), LD_WEIGHT
// (core's SRAM row: Q bits [c*16+j], written to all four macros) or LD_PAIR
// (core's threshold-2 column pairs). start runs the program from address 0;
// done rises at HALT. host_raddr reads the output buffer (host_rdata one cycle
// later) while the controller is idle.
// Lint notes: host_addr[11] is unused because the largest memory addressed
// over the host port, the instruction buffer, needs 11 bits; the port keeps 12
// to match host_raddr.
module dbpim_top
  import dbpim_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 host_we,
  input  ld_target_e           host_target,
  input  logic [2:0]           host_core,
  input  logic [11:0]          host_addr,
  input  logic [INBUF_W-1:0]   host_wdata,
  input  logic [11:0]          host_raddr,
  output logic [OUTBUF_W-1:0]  host_rdata,
  input  logic                 start,
  output logic                 done,
  output logic                 busy
);
  localparam int unsigned RW  = $clog2(ROWS);
  localparam int unsigned ENT = COMPS * COLS;
  localparam int unsigned MW  = $clog2(TM);

  // controller wires
  logic [10:0] ib_raddr;  logic [INST_W-1:0] ib_rdata;
  logic [7:0]  in_raddr;  logic [3:0] mask_raddr;
  logic        net_start, acc_clr, net_busy, cores_busy, out_snap;
  logic [3:0]  net_row_base;
  logic [$clog2(NCORE*TM)-1:0] st_sel;
  logic        ob_we, ob_wsrc_simd;
  logic [11:0] ob_waddr, ob_raddr_a, ob_raddr_b;
  logic        simd_valid, simd_out_valid;
  simd_op_e    simd_op;
  logic [4:0]  simd_shift;
  logic        in_swe;  logic [7:0] in_saddr;  logic [4:0] in_sslice;

  top_ctrl #(.NC(NCORE), .NM(TM)) u_ctrl (
    .clk, .rst_n, .start, .done, .busy,
    .ib_raddr, .ib_rdata,
    .in_raddr, .mask_raddr, .net_start, .net_row_base, .acc_clr,
    .net_busy, .cores_busy,
    .out_snap, .st_sel,
    .ob_we, .ob_wsrc_simd, .ob_waddr, .ob_raddr_a, .ob_raddr_b,
    .simd_valid, .simd_op, .simd_shift, .simd_out_valid,
    .in_swe, .in_saddr, .in_sslice
  );

  inst_buffer #(.DEPTH(INST_DEPTH), .W(INST_W)) u_ib (
    .clk,
    .we   (host_we && host_target == LD_INST),
    .waddr(host_addr[10:0]),
    .wdata(host_wdata[INST_W-1:0]),
    .raddr(ib_raddr), .rdata(ib_rdata)
  );

  // ---- input side ---------------------------------------------------------
  logic [INBUF_W-1:0]  in_win;
  logic [OUTBUF_W-1:0] simd_y;
  logic [LANES*8-1:0]  simd_q8;

  input_buffer #(.DEPTH(INBUF_DEPTH), .W(INBUF_W), .SW(LANES*8)) u_inbuf (
    .clk,
    .we    (host_we && host_target == LD_INBUF),
    .waddr (host_addr[7:0]),
    .wdata (host_wdata),
    .swe   (in_swe), .saddr(in_saddr), .sslice(in_sslice), .sdata(simd_q8),
    .raddr (in_raddr), .rdata(in_win)
  );

  logic [NCORE*WIN-1:0] masks;
  mask_buffer #(.NCORE(NCORE), .DEPTH(MASK_DEPTH), .WIN(WIN)) u_mask (
    .clk,
    .we   (host_we && host_target == LD_MASK),
    .wcore(host_core), .waddr(host_addr[3:0]), .wdata(host_wdata[WIN-1:0]),
    .raddr(mask_raddr), .rdata(masks)
  );

  logic [NCORE-1:0]          g_valid, g_ready, c_busy;
  logic [NCORE*MW-1:0]       g_macro;
  logic [NCORE*COMPS*IW-1:0] g_data;
  logic [NCORE*RW-1:0]       g_row;

  sparse_alloc_net #(.NCORE(NCORE), .WIN(WIN), .TM(TM), .GROUP(COMPS), .IW(IW), .RW(RW)) u_net (
    .clk, .rst_n, .start(net_start), .mask(masks), .in_win, .row_base(net_row_base),
    .grp_valid(g_valid), .grp_ready(g_ready), .grp_macro(g_macro),
    .grp_data(g_data), .grp_row(g_row), .busy(net_busy)
  );

  // ---- PIM cores ----------------------------------------------------------
  logic [NCORE*TM*COLS*ACC_W-1:0] out_rf;

  for (genvar s = 0; s < NCORE; s++) begin : g_core
    logic sel;
    assign sel = host_we && (host_core == s);
    pim_core #(.TM(TM), .COMPS(COMPS), .COLS(COLS), .ROWS(ROWS), .IW(IW), .ACC_W(ACC_W)) u_core (
      .clk, .rst_n,
      .grp_valid (g_valid[s]), .grp_ready(g_ready[s]),
      .grp_macro (g_macro[s*MW +: MW]),
      .grp_data  (g_data[s*COMPS*IW +: COMPS*IW]),
      .grp_row   (g_row[s*RW +: RW]),
      .w_we      (sel && host_target == LD_WEIGHT),
      .w_row     (host_addr[RW-1:0]),
      .w_data    (host_wdata[ENT-1:0]),
      .meta_we   (sel && host_target == LD_META),
      .meta_addr (host_addr[RW-1:0]),
      .meta_wdata(host_wdata[3*ENT-1:0]),
      .pair_we   (sel && host_target == LD_PAIR),
      .pair_wdata(host_wdata[COLS/2-1:0]),
      .acc_clr, .out_snap,
      .out_rf    (out_rf[s*TM*COLS*ACC_W +: TM*COLS*ACC_W]),
      .busy      (c_busy[s])
    );
  end
  assign cores_busy = |c_busy;

  // ---- output side ----------------------------------------------------------
  logic [OUTBUF_W-1:0] ob_wdata, ob_rdata_a, ob_rdata_b;
  assign ob_wdata = ob_wsrc_simd ? simd_y : out_rf[int'(st_sel)*OUTBUF_W +: OUTBUF_W];

  output_buffer #(.DEPTH(OUTBUF_DEPTH), .W(OUTBUF_W)) u_outbuf (
    .clk, .we(ob_we), .waddr(ob_waddr), .wdata(ob_wdata),
    .raddr_a(busy ? ob_raddr_a : host_raddr), .rdata_a(ob_rdata_a),
    .raddr_b(ob_raddr_b), .rdata_b(ob_rdata_b)
  );
  assign host_rdata = ob_rdata_a;

  simd_core #(.LANES(LANES), .DW(ACC_W)) u_simd (
    .clk, .rst_n, .in_valid(simd_valid), .op(simd_op),
    .a(ob_rdata_a), .b(ob_rdata_b), .shift(simd_shift),
    .out_valid(simd_out_valid), .y(simd_y), .q8(simd_q8)
  );
endmodule
