// tb_word_generator: random words and distinct positions at N = 128 for each
// weight 0..3; the output must differ from r exactly at the positions the
// weight selects (idx1; idx1, idx2; idx1, idx2, idx_ctrl).
module tb_word_generator;
  import grand_pkg::*;
  localparam int N = N_DEFAULT, IW = $clog2(N);

  logic [N-1:0] r, x;
  logic [1:0] weight;
  logic [IW-1:0] idx1, idx2, idx_ctrl;
  int checks = 0, failures = 0;

  word_generator dut (.r, .weight, .idx1, .idx2, .idx_ctrl, .x);

  initial begin
    for (int t = 0; t < 2000; t++) begin
      automatic logic [N-1:0] e = '0;
      for (int i = 0; i < N; i += 32) r[i +: 32] = $urandom;
      weight = 2'(t % 4);
      idx1 = IW'($urandom);
      do idx2 = IW'($urandom); while (idx2 == idx1);
      do idx_ctrl = IW'($urandom); while (idx_ctrl == idx1 || idx_ctrl == idx2);
      if (weight >= 1) e[idx1] = 1'b1;
      if (weight >= 2) e[idx2] = 1'b1;
      if (weight == 3) e[idx_ctrl] = 1'b1;
      #1;
      checks++;
      if (x !== (r ^ e)) begin failures++; $display("ERROR: weight %0d", weight); end
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
