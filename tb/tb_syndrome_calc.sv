// tb_syndrome_calc: checks H.r^T at the default size (N = 128, 32-bit
// syndrome) against a row-wise reference: syndrome bit b is the parity of
// r AND row b of H. Random matrices and vectors, plus the all-zero and
// single-one vectors (whose syndrome must be 0 and the column itself).
module tb_syndrome_calc;
  import grand_pkg::*;
  localparam int N = N_DEFAULT, SW = SW_DEFAULT;

  logic [N-1:0]  r;
  logic [SW-1:0] hcol [N];
  logic [SW-1:0] syn;
  int checks = 0, failures = 0;

  syndrome_calc dut (.r, .hcol, .syn);

  function automatic logic [SW-1:0] ref_syn();
    logic [SW-1:0] s;
    for (int b = 0; b < SW; b++) begin
      logic [N-1:0] hrow;
      for (int i = 0; i < N; i++) hrow[i] = hcol[i][b];
      s[b] = ^(hrow & r);
    end
    return s;
  endfunction

  task automatic check();
    #1;
    checks++;
    if (syn !== ref_syn()) begin
      failures++; $display("ERROR: syn %h exp %h", syn, ref_syn());
    end
  endtask

  initial begin
    for (int t = 0; t < 200; t++) begin
      for (int i = 0; i < N; i++) hcol[i] = $urandom;
      if (t % 3 == 0) for (int i = 0; i < N; i++) hcol[i][31:8] = '0; // short syndrome
      for (int i = 0; i < N; i += 32) r[i +: 32] = $urandom;
      check();
      r = '0; check();
      r = '0; r[t % N] = 1'b1; check();
      if (syn !== hcol[t % N]) begin failures++; $display("ERROR: single bit"); end
      checks++;
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
