// priority_encoder: N-to-log2(N) priority encoder. Returns the lowest row
// index whose request bit is set, and `found` when any is set. The paper
// gives the encoder's function; lowest-index priority is this design's
// choice (any matching row is a valid decoding of the same weight).
// Purely combinational.
module priority_encoder
  import grand_pkg::*;
#(
  parameter int unsigned N  = N_DEFAULT,
  localparam int unsigned IW = $clog2(N)
) (
  input  logic [N-1:0]  req,
  output logic [IW-1:0] sel,
  output logic          found
);

  always_comb begin
    sel   = '0;
    found = |req;
    for (int i = N - 1; i >= 0; i--)
      if (req[i]) sel = IW'(i);
  end

endmodule
