// dial: N-row cyclic register file of W-bit entries (one row per one-bit-flip
// syndrome s_i, or per index i when used as an index dial).
//
// How it works: the first `len` rows are active, the rest hold the null
// vector. Each clock edge applies one operation (grand_pkg::dial_op_e):
//   ROT      row r <- row r+1 for r < len-1, row len-1 <- row 0.
//   SHIFT_UP as ROT, but row len-1 gets the null vector and len decreases;
//            later rotations skip the null rows.
//   LOAD     reset to ld_data (s_1..s_n), shifted up by ld_shift rows and
//            then cyclically shifted by ld_rot (0 or 1) rows, in one edge.
//   CLEAR    every row null, all N rows active.
// ROT and SHIFT_UP follow the paper's description of the dial. The paper
// says a dial is "reset, shifted-up by 2 and cyclically shifted by 1" in one
// time step; LOAD does exactly that for any shift. CLEAR gives the all-null
// dial 2 of the one-bit-flip step. The explicit `len` counter, the null-row
// value 0 and the synchronous operation codes are this design's choices.
//
// Interface: `row` and `len` are register outputs, valid the cycle after the
// operation. Reset empties the dial (all null, len = N).
module dial
  import grand_pkg::*;
#(
  parameter int unsigned N = N_DEFAULT,
  parameter int unsigned W = SW_DEFAULT,
  localparam int unsigned LW = $clog2(N + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  dial_ctrl_t       ctrl,
  input  logic [W-1:0]     ld_data [N],
  output logic [W-1:0]     row     [N],
  output logic [LW-1:0]    len
);

  logic [W-1:0]  row_n [N];
  logic [LW-1:0] len_n;
  logic [LW-1:0] ld_len;

  assign ld_len = LW'(N) - LW'(ctrl.ld_shift);

  always_comb begin
    len_n = len;
    for (int unsigned r = 0; r < N; r++) row_n[r] = row[r];
    unique case (ctrl.op)
      DIAL_HOLD: ;
      DIAL_CLEAR: begin
        len_n = LW'(N);
        for (int unsigned r = 0; r < N; r++) row_n[r] = '0;
      end
      DIAL_LOAD: begin
        len_n = ld_len;
        for (int unsigned r = 0; r < N; r++) begin
          if (r < 32'(ld_len)) begin
            // Row r of the shifted-up dial is s_(ld_shift + r); a cyclic
            // shift by one moves row r+1 to r and row 0 to the last active row.
            if (ctrl.ld_rot && (r == 32'(ld_len) - 1))
              row_n[r] = ld_data[$clog2(N)'(ctrl.ld_shift)];
            else
              row_n[r] = ld_data[32'(ctrl.ld_shift) + r + 32'(ctrl.ld_rot)];
          end else begin
            row_n[r] = '0;
          end
        end
      end
      DIAL_ROT, DIAL_SHIFT_UP: begin
        for (int unsigned r = 0; r < N; r++) begin
          if (r + 1 < 32'(len))       row_n[r] = row[r+1];
          else if (r + 1 == 32'(len)) row_n[r] = (ctrl.op == DIAL_ROT) ? row[0] : '0;
          else                        row_n[r] = '0;
        end
        if (ctrl.op == DIAL_SHIFT_UP && len != '0) len_n = len - 1'b1;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      len <= LW'(N);
      for (int unsigned r = 0; r < N; r++) row[r] <= '0;
    end else begin
      len <= len_n;
      for (int unsigned r = 0; r < N; r++) row[r] <= row_n[r];
    end
  end

  // A load may shift at most N-1 rows (at least one row stays active).
  assert property (@(posedge clk) disable iff (!rst_n)
    ctrl.op == DIAL_LOAD |-> 32'(ctrl.ld_shift) < N);

endmodule
