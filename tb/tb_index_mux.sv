// tb_index_mux: every select value at N = 128 with random index contents;
// the output must be the selected entry.
module tb_index_mux;
  import grand_pkg::*;
  localparam int N = N_DEFAULT, IW = $clog2(N);

  logic [IW-1:0] idx [N];
  logic [IW-1:0] sel, out;
  int checks = 0, failures = 0;

  index_mux dut (.idx, .sel, .out);

  initial begin
    for (int t = 0; t < 5; t++) begin
      for (int i = 0; i < N; i++) idx[i] = IW'($urandom);
      for (int s = 0; s < N; s++) begin
        sel = IW'(s);
        #1;
        checks++;
        if (out !== idx[s]) begin failures++; $display("ERROR: sel %0d out %0d exp %0d", s, out, idx[s]); end
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
