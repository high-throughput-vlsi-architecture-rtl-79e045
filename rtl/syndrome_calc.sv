// syndrome_calc: the H.r^T block. Computes the syndrome of the received
// hard-decision vector r as the XOR of the columns s_i of H at the positions
// where r has a one (GF(2) matrix-vector product).
//
// Interface: r[i] is code bit i+1 of the paper (positions are 0-based here);
// hcol[i] is column s_(i+1) of H, bit b being parity check b. Rows of H
// beyond n-k must be zero, so one SW-bit datapath serves every code rate.
// Purely combinational; the decoder registers r, not the syndrome, so the
// syndrome is available in the first time step of a decode. The paper gives
// the block's function only; the XOR tree is the plain way to build it.
module syndrome_calc
  import grand_pkg::*;
#(
  parameter int unsigned N  = N_DEFAULT,
  parameter int unsigned SW = SW_DEFAULT
) (
  input  logic [N-1:0]  r,
  input  logic [SW-1:0] hcol [N],
  output logic [SW-1:0] syn
);

  always_comb begin
    syn = '0;
    for (int unsigned i = 0; i < N; i++)
      if (r[i]) syn ^= hcol[i];
  end

endmodule
