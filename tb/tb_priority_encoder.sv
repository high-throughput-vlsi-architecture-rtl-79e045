// tb_priority_encoder: random sparse and dense request vectors at N = 128;
// the selected index must be the lowest set bit, `found` the OR of all.
module tb_priority_encoder;
  import grand_pkg::*;
  localparam int N = N_DEFAULT;

  logic [N-1:0] req;
  logic [$clog2(N)-1:0] sel;
  logic found;
  int checks = 0, failures = 0;

  priority_encoder dut (.req, .sel, .found);

  initial begin
    for (int t = 0; t < 2000; t++) begin
      automatic int lo = -1;
      req = '0;
      case (t % 4)
        0: ;                                             // empty
        1: req[$urandom_range(N - 1)] = 1'b1;            // one bit
        2: repeat (3) req[$urandom_range(N - 1)] = 1'b1; // a few bits
        default: for (int i = 0; i < N; i += 32) req[i +: 32] = $urandom;
      endcase
      for (int i = N - 1; i >= 0; i--) if (req[i]) lo = i;
      #1;
      checks += 2;
      if (found !== (lo >= 0)) begin failures++; $display("ERROR: found"); end
      if (lo >= 0 && 32'(sel) != lo) begin failures++; $display("ERROR: sel %0d exp %0d", sel, lo); end
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
