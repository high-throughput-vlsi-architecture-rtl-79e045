// query_array: the XOR/NOR datapath of the decoder. For each of the N rows
// it forms the test syndrome
//     H.r^T  ^  s_ctrl  ^  dial1[row]  ^  dial2[row]
// which is H.(r ^ e)^T for the error pattern e made of the controller's bit
// (weight-3 steps only), the dial-1 bit and the dial-2 bit of that row. A row
// matches when its test syndrome is all zero (NOR reduction).
//
// The structure (one XOR of H.r^T with the controller syndrome, then 2N
// XORs with the two dials, then N NOR reductions) is the paper's. No row
// mask is needed for the null rows that shift-up operations leave at the
// bottom of both dials: there the test syndrome is H.r^T ^ s_j, a one-bit
// pattern that was already tested, and found non-zero, in the one-bit step.
// Purely combinational.
module query_array
  import grand_pkg::*;
#(
  parameter int unsigned N  = N_DEFAULT,
  parameter int unsigned SW = SW_DEFAULT
) (
  input  logic [SW-1:0] syn,         // H.r^T
  input  logic [SW-1:0] ctrl_syn,    // syndrome from the controller (or 0)
  input  logic [SW-1:0] d1 [N],      // dial 1 rows
  input  logic [SW-1:0] d2 [N],      // dial 2 rows
  output logic [N-1:0]  match
);

  logic [SW-1:0] base;
  assign base = syn ^ ctrl_syn;

  for (genvar r = 0; r < N; r++) begin : g_row
    logic [SW-1:0] test;
    assign test     = base ^ d1[r] ^ d2[r];
    assign match[r] = ~(|test);
  end

endmodule
