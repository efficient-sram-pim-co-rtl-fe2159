// top_ctrl: top controller. After start it fetches 64-bit instructions from the
// instruction buffer, starting at address 0, and runs each to completion
// (the outer N-K-M loops of the mapping are unrolled into the program by the
// compiler; the inner loops run in the hardware):
//   MVM    read one input-buffer word and one mask word; next cycle start all
//          switches (optionally clearing the accumulators first) and wait until
//          the switches and all PIM cores are idle
//   STORE  copy the macro accumulators into the output RFs, then write the
//          NCORE*TM result words to the output buffer, word base+core*TM+macro
//   SIMD   for each of cnt+1 vectors: read operands a+i, b+i from the output
//          buffer, run the SIMD core, write the result to output-buffer word
//          dst+i or (QSTORE) to input-buffer word dst[15:8], slice dst[7:0]+i
//   HALT   stop and raise done
// The instruction set and all cycle timings are this design's own; the paper
// says only that the controller decodes instructions and dispatches control.
// Memories have a one-cycle read latency, which the states below account for.
// Lint notes: the reserved bits of the instruction formats (and the opcode
// bits once decoded) are read by no logic; they are kept for future fields.
module top_ctrl
  import dbpim_pkg::*;
#(
  parameter int unsigned NC = 8,
  parameter int unsigned NM = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  output logic                 done,
  output logic                 busy,
  // instruction buffer
  output logic [10:0]          ib_raddr,
  input  logic [INST_W-1:0]    ib_rdata,
  // MVM
  output logic [7:0]           in_raddr,
  output logic [3:0]           mask_raddr,
  output logic                 net_start,
  output logic [3:0]           net_row_base,
  output logic                 acc_clr,
  input  logic                 net_busy,
  input  logic                 cores_busy,
  // STORE
  output logic                 out_snap,
  output logic [$clog2(NC*NM)-1:0] st_sel,
  // output buffer
  output logic                 ob_we,
  output logic                 ob_wsrc_simd,
  output logic [11:0]          ob_waddr,
  output logic [11:0]          ob_raddr_a,
  output logic [11:0]          ob_raddr_b,
  // SIMD
  output logic                 simd_valid,
  output simd_op_e             simd_op,
  output logic [4:0]           simd_shift,
  input  logic                 simd_out_valid,
  output logic                 in_swe,
  output logic [7:0]           in_saddr,
  output logic [4:0]           in_sslice
);
  typedef enum logic [3:0] {
    C_IDLE, C_FETCH, C_DECODE, C_MVM_GO, C_MVM_WAIT0, C_MVM_WAIT,
    C_ST_SNAP, C_ST_WR, C_SIMD_RD, C_SIMD_EX, C_SIMD_WR, C_HALT
  } cstate_e;

  cstate_e  st_q;
  logic [10:0] pc_q;
  inst_t    inst_q;
  mvm_f_t   mvm;
  simd_f_t  sf;
  logic [7:0]  vcnt_q;
  logic [$clog2(NC*NM)-1:0] scnt_q;

  assign mvm = mvm_f_t'(inst_q.body);
  assign sf  = simd_f_t'(inst_q.body);

  assign ib_raddr     = pc_q;
  assign busy         = (st_q != C_IDLE) && (st_q != C_HALT);
  assign done         = (st_q == C_HALT);

  // MVM: buffer reads are issued in DECODE from the fetched word
  inst_t      ib_inst;
  mvm_f_t     ib_mvm;
  assign ib_inst      = inst_t'(ib_rdata);
  assign ib_mvm       = mvm_f_t'(ib_inst.body);
  assign in_raddr     = ib_mvm.in_addr;
  assign mask_raddr   = ib_mvm.mask_addr;
  assign net_start    = (st_q == C_MVM_GO);
  assign net_row_base = mvm.row_base;
  assign acc_clr      = (st_q == C_MVM_GO) && mvm.acc_clr;

  assign out_snap     = (st_q == C_ST_SNAP);
  assign st_sel       = scnt_q;

  assign ob_raddr_a   = sf.src_a + 12'(vcnt_q);
  assign ob_raddr_b   = sf.src_b + 12'(vcnt_q);
  assign simd_valid   = (st_q == C_SIMD_EX);
  assign simd_op      = sf.sop;
  assign simd_shift   = sf.shift;

  always_comb begin
    ob_we        = 1'b0;
    ob_wsrc_simd = 1'b0;
    ob_waddr     = '0;
    in_swe       = 1'b0;
    in_saddr     = sf.dst[15:8];
    in_sslice    = 5'(sf.dst[7:0] + vcnt_q);
    if (st_q == C_ST_WR) begin
      ob_we    = 1'b1;
      ob_waddr = inst_q.body[59:48] + 12'(scnt_q);
    end else if (st_q == C_SIMD_WR && simd_out_valid) begin
      if (sf.sop == SIMD_QSTORE) in_swe = 1'b1;
      else begin
        ob_we        = 1'b1;
        ob_wsrc_simd = 1'b1;
        ob_waddr     = sf.dst[11:0] + 12'(vcnt_q);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      st_q   <= C_IDLE;
      pc_q   <= '0;
      inst_q <= '0;
      vcnt_q <= '0;
      scnt_q <= '0;
    end else begin
      unique case (st_q)
        C_IDLE, C_HALT:
          if (start) begin
            pc_q <= '0;
            st_q <= C_FETCH;
          end
        C_FETCH: st_q <= C_DECODE;          // ib_rdata valid next cycle
        C_DECODE: begin
          inst_q <= ib_inst;
          pc_q   <= pc_q + 1'b1;
          vcnt_q <= '0;
          scnt_q <= '0;
          unique case (ib_inst.op)
            OP_MVM:   st_q <= C_MVM_GO;     // buffers read this cycle
            OP_STORE: st_q <= C_ST_SNAP;
            OP_SIMD:  st_q <= C_SIMD_RD;
            OP_HALT:  st_q <= C_HALT;
            default:  st_q <= C_FETCH;
          endcase
        end
        C_MVM_GO:    st_q <= C_MVM_WAIT0;
        C_MVM_WAIT0: st_q <= C_MVM_WAIT;    // switches raise busy now
        C_MVM_WAIT:  if (!net_busy && !cores_busy) st_q <= C_FETCH;
        C_ST_SNAP:   st_q <= C_ST_WR;
        C_ST_WR: begin
          if (scnt_q == $clog2(NC*NM)'(NC*NM-1)) st_q <= C_FETCH;
          scnt_q <= scnt_q + 1'b1;
        end
        C_SIMD_RD:   st_q <= C_SIMD_EX;     // operands valid next cycle
        C_SIMD_EX:   st_q <= C_SIMD_WR;
        C_SIMD_WR: begin
          if (vcnt_q == sf.cnt_m1) st_q <= C_FETCH;
          else                     st_q <= C_SIMD_RD;
          vcnt_q <= vcnt_q + 1'b1;
        end
        default: st_q <= C_IDLE;
      endcase
    end
endmodule
