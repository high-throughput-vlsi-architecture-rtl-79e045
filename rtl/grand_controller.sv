// grand_controller: holds the parity-check matrix H and schedules the
// GRANDAB search, one time step per clock cycle.
//
// Schedule (the paper's, with 0-based positions; m = rows still active):
//   W0  1 step      test H.r^T itself (both dials cleared)
//   W1  1 step      dial 1 = s_0..s_(N-1), dial 2 null: N one-bit flips
//   W2  N/2 steps   dial 2 = dial 1 cyclically shifted by t, t = 1..N/2:
//                   N two-bit flips per step
//   W3  for j = 0..N-3 the controller outputs s_j and its index j; dial 1
//       holds s_(j+1)..s_(N-1) (shifted up once more per j), dial 2 is
//       reset, shifted up by j+1 and cyclically shifted by 1 on entry and
//       then rotated by one per step, for floor(m/2) steps, m = N-1-j.
// Total 2 + sum_{i=2..N} floor(i/2) steps (4098 for N = 128) when AB = 3;
// with AB = 2 the search ends after W2 (2 + floor(N/2) steps, 41 for N = 79
// as in the paper's comparison). The search stops at the first step in
// which a row matches (`found`), or after the last step (abandon).
//
// Interface: a new vector is accepted when in_valid && in_ready; the next
// cycle is step W0. in_ready is high when idle and also in the last cycle
// of a decode, so zero-error words decode back to back at one per cycle.
// `finish` marks the last cycle of a decode, `steps` counts its time steps.
// dial control words take effect at the clock edge ending the current step.
// H is written whole with h_load (one column per row of h_in, rows beyond
// n-k zero) while no decode is running; in_ready is low during the load.
// The FSM encoding, handshake and H port are this design's choices; the
// paper leaves control signals out of its architecture figure.
module grand_controller
  import grand_pkg::*;
#(
  parameter int unsigned N  = N_DEFAULT,
  parameter int unsigned SW = SW_DEFAULT,
  parameter int unsigned AB = AB_DEFAULT,
  localparam int unsigned IW = $clog2(N),
  localparam int unsigned TW = $clog2(N) + 1,
  localparam int unsigned CW = 2 * $clog2(N) + 2
) (
  input  logic          clk,
  input  logic          rst_n,
  // parity-check matrix
  input  logic          h_load,
  input  logic [SW-1:0] h_in [N],
  output logic [SW-1:0] hcol [N],
  // word handshake
  input  logic          in_valid,
  output logic          in_ready,
  output logic          accept,
  // search status
  input  logic          found,
  output logic          busy,
  output phase_e        phase,
  output logic [1:0]    weight,
  output logic          finish,
  output logic [CW-1:0] steps,
  // dials and first-flip syndrome
  output dial_ctrl_t    d1_ctrl,
  output dial_ctrl_t    d2_ctrl,
  output logic [SW-1:0] ctrl_syn,
  output logic [IW-1:0] ctrl_idx
);

  logic [TW-1:0] t;     // step within W2, or within the current j of W3
  logic [IW-1:0] j;     // first flipped position in W3
  logic [TW-1:0] t_last;
  logic          last_step;

  // ---------------------------------------------------------------- H store
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < N; i++) hcol[i] <= '0;
    end else if (h_load) begin
      for (int unsigned i = 0; i < N; i++) hcol[i] <= h_in[i];
    end
  end

  // ------------------------------------------------------------ step status
  assign busy = (phase != PH_IDLE);

  always_comb begin
    t_last    = '0;
    last_step = 1'b0;
    unique case (phase)
      PH_W2: begin
        t_last    = TW'(N / 2);
        last_step = (t == t_last) && (AB < 3);
      end
      PH_W3: begin
        // m = N-1-j active rows, floor(m/2) steps
        t_last    = TW'((N - 1 - 32'(j)) / 2);
        last_step = (t == t_last) && (32'(j) == N - 3);
      end
      default: ;
    endcase
  end

  assign finish   = busy && (found || last_step);
  assign in_ready = (!busy || finish) && !h_load;
  assign accept   = in_valid && in_ready;

  always_comb begin
    unique case (phase)
      PH_W1:   weight = 2'd1;
      PH_W2:   weight = 2'd2;
      PH_W3:   weight = 2'd3;
      default: weight = 2'd0;
    endcase
  end

  assign ctrl_idx = j;
  assign ctrl_syn = (phase == PH_W3) ? hcol[j] : '0;

  // ------------------------------------------------------ next step / dials
  phase_e        phase_n;
  logic [TW-1:0] t_n;
  logic [IW-1:0] j_n;

  function automatic dial_ctrl_t dc(dial_op_e op, logic [7:0] sh, logic rot);
    dc.op       = op;
    dc.ld_shift = sh;
    dc.ld_rot   = rot;
  endfunction

  always_comb begin
    phase_n = phase;
    t_n     = t;
    j_n     = j;
    d1_ctrl = dc(DIAL_HOLD, 8'd0, 1'b0);
    d2_ctrl = dc(DIAL_HOLD, 8'd0, 1'b0);
    if (accept) begin
      phase_n = PH_W0;
      d1_ctrl = dc(DIAL_CLEAR, 8'd0, 1'b0);
      d2_ctrl = dc(DIAL_CLEAR, 8'd0, 1'b0);
    end else if (finish) begin
      phase_n = PH_IDLE;
    end else begin
      unique case (phase)
        PH_W0: begin
          phase_n = PH_W1;
          d1_ctrl = dc(DIAL_LOAD, 8'd0, 1'b0);     // s_0 .. s_(N-1)
          d2_ctrl = dc(DIAL_CLEAR, 8'd0, 1'b0);    // null
        end
        PH_W1: begin
          phase_n = PH_W2;
          t_n     = TW'(1);
          d2_ctrl = dc(DIAL_LOAD, 8'd0, 1'b1);     // dial 1 shifted by one
        end
        PH_W2: begin
          if (t != t_last) begin
            t_n     = t + 1'b1;
            d2_ctrl = dc(DIAL_ROT, 8'd0, 1'b0);
          end else begin
            phase_n = PH_W3;
            t_n     = TW'(1);
            j_n     = '0;
            d1_ctrl = dc(DIAL_SHIFT_UP, 8'd0, 1'b0);
            d2_ctrl = dc(DIAL_LOAD, 8'd1, 1'b1);
          end
        end
        PH_W3: begin
          if (t != t_last) begin
            t_n     = t + 1'b1;
            d2_ctrl = dc(DIAL_ROT, 8'd0, 1'b0);
          end else begin
            t_n     = TW'(1);
            j_n     = j + 1'b1;
            d1_ctrl = dc(DIAL_SHIFT_UP, 8'd0, 1'b0);
            d2_ctrl = dc(DIAL_LOAD, 8'(32'(j) + 2), 1'b1);
          end
        end
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase <= PH_IDLE;
      t     <= '0;
      j     <= '0;
      steps <= '0;
    end else begin
      phase <= phase_n;
      t     <= t_n;
      j     <= j_n;
      if (accept)    steps <= CW'(1);
      else if (busy && !finish) steps <= steps + 1'b1;
    end
  end

  // ------------------------------------------------------------- checks
  initial begin
    assert (AB == 2 || AB == 3) else $error("AB must be 2 or 3");
    assert (N >= 4 && N <= 256) else $error("N must be in 4..256");
  end
  // H may only be replaced while no decode is running.
  assert property (@(posedge clk) disable iff (!rst_n) h_load |-> !busy || finish);

endmodule
