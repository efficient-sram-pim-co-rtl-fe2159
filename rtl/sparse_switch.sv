// sparse_switch: one switch of the sparse allocation network. Block-wise
// pruning removes whole weight rows (the same input position k for a block of
// filters), and the compressed weights of a core are stored without them; the
// switch removes the matching inputs. Given a WIN-input window for each of the
// TM input rows and the core's WIN-bit mask (1 = weight row kept), it finds the
// kept positions with a chain of GROUP leading-one detectors (lowest position
// first) and muxes those inputs into a group of GROUP features, one per
// compartment. Groups go to successive SRAM rows starting at row_base; a last,
// partly filled group is padded with zeros.
// The macros of a core share the switch: each group is sent to macro 0..TM-1
// in turn, one per accepted handshake (grp_valid & grp_ready), macro m getting
// the features of input row m.
// Timing: start (1 cycle, while busy is low) latches mask, window and
// row_base; each group then takes one extraction cycle plus TM send cycles
// when the macros are ready. done pulses for one cycle when the window is
// finished; a mask of all zeros finishes without sending anything.
module sparse_switch #(
  parameter int unsigned WIN   = 128,
  parameter int unsigned TM    = 4,
  parameter int unsigned GROUP = 16,
  parameter int unsigned IW    = 8,
  parameter int unsigned RW    = 4
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [WIN-1:0]           mask,
  input  logic [TM*WIN*IW-1:0]     in_win,
  input  logic [RW-1:0]            row_base,
  output logic                     grp_valid,
  input  logic                     grp_ready,
  output logic [$clog2(TM)-1:0]    grp_macro,
  output logic [GROUP*IW-1:0]      grp_data,
  output logic [RW-1:0]            grp_row,
  output logic                     busy,
  output logic                     done
);
  typedef enum logic [1:0] {S_IDLE, S_EXTRACT, S_SEND} state_e;
  state_e state_q;

  logic [WIN-1:0]        rem_q, rem_after;
  logic [TM*WIN*IW-1:0]  win_q;
  logic [RW-1:0]         row_q;
  logic [$clog2(TM)-1:0] mcnt_q;
  logic [GROUP*IW-1:0]   grp_q [TM];
  logic [GROUP*IW-1:0]   grp_d [TM];

  // chain of leading-one detectors: position of the g-th kept input
  logic [$clog2(WIN)-1:0] pos   [GROUP];
  logic [GROUP-1:0]       found;

  always_comb begin
    logic [WIN-1:0] r;
    r = rem_q;
    for (int g = 0; g < GROUP; g++) begin
      pos[g]   = '0;
      found[g] = 1'b0;
      for (int k = WIN-1; k >= 0; k--)
        if (r[k]) begin
          pos[g]   = k[$clog2(WIN)-1:0];
          found[g] = 1'b1;
        end
      if (found[g]) r[pos[g]] = 1'b0;
    end
    rem_after = r;
  end

  // multiplexers: pick the kept inputs of every input row
  always_comb
    for (int m = 0; m < TM; m++)
      for (int g = 0; g < GROUP; g++)
        grp_d[m][g*IW +: IW] = found[g] ? win_q[(m*WIN + int'(pos[g]))*IW +: IW] : '0;

  assign grp_valid = (state_q == S_SEND);
  assign grp_macro = mcnt_q;
  assign grp_data  = grp_q[mcnt_q];
  assign grp_row   = row_q;
  assign busy      = (state_q != S_IDLE);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      state_q <= S_IDLE;
      rem_q   <= '0;
      win_q   <= '0;
      row_q   <= '0;
      mcnt_q  <= '0;
      done    <= 1'b0;
      for (int m = 0; m < TM; m++) grp_q[m] <= '0;
    end else begin
      done <= 1'b0;
      unique case (state_q)
        S_IDLE:
          if (start) begin
            rem_q   <= mask;
            win_q   <= in_win;
            row_q   <= row_base;
            state_q <= S_EXTRACT;
          end
        S_EXTRACT:
          if (rem_q == '0) begin
            done    <= 1'b1;
            state_q <= S_IDLE;
          end else begin
            for (int m = 0; m < TM; m++) grp_q[m] <= grp_d[m];
            rem_q   <= rem_after;
            mcnt_q  <= '0;
            state_q <= S_SEND;
          end
        S_SEND:
          if (grp_ready) begin
            if (mcnt_q == $clog2(TM)'(TM-1)) begin
              row_q   <= row_q + 1'b1;
              state_q <= S_EXTRACT;
            end else begin
              mcnt_q  <= mcnt_q + 1'b1;
            end
          end
        default: state_q <= S_IDLE;
      endcase
    end
endmodule
