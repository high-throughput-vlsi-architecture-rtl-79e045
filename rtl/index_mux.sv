// index_mux: N:1 multiplexer that forwards the index-dial entry of the row
// chosen by the priority encoder to the word generator. Two instances exist,
// one per index dial, as in the paper's architecture. Combinational.
module index_mux
  import grand_pkg::*;
#(
  parameter int unsigned N  = N_DEFAULT,
  localparam int unsigned IW = $clog2(N)
) (
  input  logic [IW-1:0] idx [N],
  input  logic [IW-1:0] sel,
  output logic [IW-1:0] out
);

  always_comb begin
    out = '0;
    for (int unsigned i = 0; i < N; i++)
      if (sel == IW'(i)) out = idx[i];
  end

endmodule
