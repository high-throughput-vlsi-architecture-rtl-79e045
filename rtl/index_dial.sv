// index_dial: the index companion of a dial. It holds, for every row of its
// dial, the position i (0-based, log2(N) bits) of the one-bit-flip syndrome
// s_i stored in the same row, so that the matching row can be turned back
// into bit positions.
//
// How it works: it is a dial (see dial.sv) of log2(N)-bit rows whose reset
// content is the constant table 0, 1, ..., N-1. Driven with the same control
// word as its syndrome dial, it performs the same cyclic shifts, shift-ups
// and resets, as the paper requires of an index dial. Null rows read 0; they
// are never selected because the query array masks rows beyond `len`.
//
// Interface and timing are those of dial: registered outputs, one operation
// per clock edge, asynchronous active-low reset.
module index_dial
  import grand_pkg::*;
#(
  parameter int unsigned N = N_DEFAULT,
  localparam int unsigned IW = $clog2(N),
  localparam int unsigned LW = $clog2(N + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  dial_ctrl_t    ctrl,
  output logic [IW-1:0] idx [N],
  output logic [LW-1:0] len
);

  // Reset content: row i holds index i.
  logic [IW-1:0] init_idx [N];
  for (genvar i = 0; i < N; i++) begin : g_init
    assign init_idx[i] = IW'(i);
  end

  dial #(.N(N), .W(IW)) u_dial (
    .clk     (clk),
    .rst_n   (rst_n),
    .ctrl    (ctrl),
    .ld_data (init_idx),
    .row     (idx),
    .len     (len)
  );

endmodule
