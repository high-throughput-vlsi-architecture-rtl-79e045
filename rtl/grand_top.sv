// grand_top: GRANDAB decoder with abandonment weight AB (3 by default) for
// any binary linear code of length N with at most SW parity checks.
//
// Given a hard-decision word r and the code's parity-check matrix H, the
// decoder looks for the lowest-weight error pattern e (weight <= AB) for
// which H.(r ^ e)^T = 0 and outputs x = r ^ e. Because the syndrome is
// linear, H.(r ^ e)^T is the XOR of H.r^T with the columns s_i of H at the
// flipped positions. Two dials (rotating register files of the columns of
// H) and the controller's own column supply up to three columns per row, so
// N error patterns of the same weight are tested in every clock cycle:
//   cycle 1           weight 0 (is r a codeword?)
//   cycle 2           all N one-bit flips
//   next N/2 cycles   all two-bit flips
//   then              all three-bit flips, sum_{i=2..N-1} floor(i/2) cycles
// i.e. at most 2 + sum_{i=2..N} floor(i/2) cycles (4098 for N = 128).
// The first cycle in which any row yields a zero syndrome ends the decode;
// a priority encoder picks the row, two muxes read that row's positions from
// the index dials, and the word generator flips those bits of r.
//
// Datapath and schedule follow the paper's architecture. This design's own
// choices: the valid/ready input handshake, the registered output with a
// fail flag (no pattern of weight <= AB found, x = r), H loaded as a whole through h_load, and the output being
// the codeword estimate (mapping to message bits is left to the user; for
// systematic codes it is a bit selection).
//
// Timing: r is registered when accepted; decoding starts the next cycle.
// The result is registered at the end of the decode's last step, so the
// output appears `steps` cycles after acceptance plus one. A new word can
// be accepted in the last step of the previous one: words without errors
// are decoded at one per clock cycle.
module grand_top
  import grand_pkg::*;
#(
  parameter int unsigned N  = N_DEFAULT,
  parameter int unsigned SW = SW_DEFAULT,
  parameter int unsigned AB = AB_DEFAULT,
  localparam int unsigned IW = $clog2(N),
  localparam int unsigned CW = 2 * $clog2(N) + 2
) (
  input  logic          clk,
  input  logic          rst_n,
  // parity-check matrix: h_in[i] is column i of H
  input  logic          h_load,
  input  logic [SW-1:0] h_in [N],
  // received hard decisions
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [N-1:0]  r_in,
  // decoded word
  output logic          out_valid,
  output logic [N-1:0]  out_x,
  output logic          out_fail,   // abandoned: no pattern of weight <= AB
  output logic [1:0]    out_weight, // weight of the pattern applied
  output logic [CW-1:0] out_steps   // time steps (cycles) the decode took
);

  logic          accept, busy, finish, found;
  phase_e        phase;
  logic [1:0]    weight;
  logic [CW-1:0] steps;
  dial_ctrl_t    d1_ctrl, d2_ctrl;
  logic [SW-1:0] hcol [N];
  logic [SW-1:0] ctrl_syn;
  logic [IW-1:0] ctrl_idx;

  logic [N-1:0]  r_q;
  logic [SW-1:0] syn;
  logic [SW-1:0] d1_row [N];
  logic [SW-1:0] d2_row [N];
  logic [IW-1:0] i1_row [N];
  logic [IW-1:0] i2_row [N];
  logic [$clog2(N+1)-1:0] d1_len, d2_len, i1_len, i2_len;
  logic [N-1:0]  match;
  logic [IW-1:0] sel, idx1, idx2;
  logic          any;
  logic [N-1:0]  x;

  grand_controller #(.N(N), .SW(SW), .AB(AB)) u_ctrl (
    .clk, .rst_n,
    .h_load, .h_in, .hcol,
    .in_valid, .in_ready, .accept,
    .found, .busy, .phase, .weight, .finish, .steps,
    .d1_ctrl, .d2_ctrl, .ctrl_syn, .ctrl_idx
  );

  // received word register
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      r_q <= '0;
    else if (accept) r_q <= r_in;
  end

  syndrome_calc #(.N(N), .SW(SW)) u_syn (.r(r_q), .hcol(hcol), .syn(syn));

  dial       #(.N(N), .W(SW)) u_dial1 (.clk, .rst_n, .ctrl(d1_ctrl), .ld_data(hcol), .row(d1_row), .len(d1_len));
  dial       #(.N(N), .W(SW)) u_dial2 (.clk, .rst_n, .ctrl(d2_ctrl), .ld_data(hcol), .row(d2_row), .len(d2_len));
  index_dial #(.N(N))         u_idx1  (.clk, .rst_n, .ctrl(d1_ctrl), .idx(i1_row), .len(i1_len));
  index_dial #(.N(N))         u_idx2  (.clk, .rst_n, .ctrl(d2_ctrl), .idx(i2_row), .len(i2_len));

  query_array #(.N(N), .SW(SW)) u_query (
    .syn, .ctrl_syn, .d1(d1_row), .d2(d2_row), .match
  );

  priority_encoder #(.N(N)) u_penc (.req(match), .sel, .found(any));
  assign found = busy && any;

  index_mux #(.N(N)) u_mux1 (.idx(i1_row), .sel, .out(idx1));
  index_mux #(.N(N)) u_mux2 (.idx(i2_row), .sel, .out(idx2));

  word_generator #(.N(N)) u_wgen (
    .r(r_q), .weight, .idx1, .idx2, .idx_ctrl(ctrl_idx), .x
  );

  // output register
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid  <= 1'b0;
      out_x      <= '0;
      out_fail   <= 1'b0;
      out_weight <= '0;
      out_steps  <= '0;
    end else begin
      out_valid <= finish;
      if (finish) begin
        out_x      <= found ? x : r_q;
        out_fail   <= !found;
        out_weight <= weight;
        out_steps  <= steps;
      end
    end
  end

  // A dial and its index dial receive the same operations and stay aligned.
  assert property (@(posedge clk) disable iff (!rst_n) d1_len == i1_len && d2_len == i2_len);
  // The two dials have the same number of active rows whenever dial 2 is
  // not cleared (weight 2 and 3 steps).
  assert property (@(posedge clk) disable iff (!rst_n)
    (phase == PH_W2 || phase == PH_W3) |-> d1_len == d2_len);

endmodule
