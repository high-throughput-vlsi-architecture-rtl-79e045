// tb_query_array: checks the N test syndromes at the default size. Random
// inputs are built so that chosen rows cancel exactly (dial2[r] set to
// syn ^ ctrl ^ dial1[r]); a row must match if and only if it cancels.
// Reference computed bit by bit from the four operands.
module tb_query_array;
  import grand_pkg::*;
  localparam int N = N_DEFAULT, SW = SW_DEFAULT;

  logic [SW-1:0] syn, ctrl_syn;
  logic [SW-1:0] d1 [N], d2 [N];
  logic [N-1:0]  match;
  int checks = 0, failures = 0;

  query_array dut (.syn, .ctrl_syn, .d1, .d2, .match);

  initial begin
    for (int t = 0; t < 300; t++) begin
      syn = $urandom; ctrl_syn = (t % 2) ? $urandom : '0;
      for (int r = 0; r < N; r++) begin
        d1[r] = $urandom;
        d2[r] = ($urandom_range(7) == 0) ? (syn ^ ctrl_syn ^ d1[r]) : $urandom;
      end
      if (t % 5 == 0) d2[t % N] = syn ^ ctrl_syn ^ d1[t % N] ^ (SW'(1) << (t % SW)); // one bit off
      #1;
      for (int r = 0; r < N; r++) begin
        automatic logic e = 1'b1;
        for (int b = 0; b < SW; b++) if (syn[b] ^ ctrl_syn[b] ^ d1[r][b] ^ d2[r][b]) e = 1'b0;
        checks++;
        if (match[r] !== e) begin failures++; $display("ERROR: row %0d match %0b exp %0b", r, match[r], e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("ERROR: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
