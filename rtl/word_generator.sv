// word_generator: builds the estimated codeword from the received vector r
// and up to three bit positions: x = r ^ 1_a ^ 1_b ^ 1_c. The number of
// positions used is the weight of the patterns under test:
//   weight 0: none, 1: idx1, 2: idx1 and idx2, 3: idx1, idx2 and idx_ctrl.
// idx1/idx2 come from the index dials through the muxes, idx_ctrl from the
// controller. The paper gives the function (combine r with the three
// indices); the weight input, a control signal the paper's figure omits,
// is this design's way of telling which indices are meaningful.
// Combinational.
module word_generator
  import grand_pkg::*;
#(
  parameter int unsigned N  = N_DEFAULT,
  localparam int unsigned IW = $clog2(N)
) (
  input  logic [N-1:0]  r,
  input  logic [1:0]    weight,
  input  logic [IW-1:0] idx1,
  input  logic [IW-1:0] idx2,
  input  logic [IW-1:0] idx_ctrl,
  output logic [N-1:0]  x
);

  always_comb begin
    x = r;
    if (weight >= 2'd1) x[idx1]     = ~x[idx1];
    if (weight >= 2'd2) x[idx2]     = ~x[idx2];
    if (weight == 2'd3) x[idx_ctrl] = ~x[idx_ctrl];
  end

endmodule
