// tb_index_dial: checks that the index dial starts each load with the
// indices 0..N-1 (shifted up and rotated as requested) and follows cyclic
// shifts and shift-ups like a dial. Reference: a queue of indices (head to
// tail on a rotation, head dropped on a shift-up). Runs at N = 128 and
// replays the start of the paper's three-bit-flip schedule.
module tb_index_dial;
  import grand_pkg::*;
  localparam int N = N_DEFAULT;
  localparam int IW = $clog2(N);

  logic clk = 1'b0, rst_n = 1'b0;
  dial_ctrl_t ctrl;
  logic [IW-1:0] idx [N];
  logic [$clog2(N+1)-1:0] len;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  index_dial dut (.clk, .rst_n, .ctrl, .idx, .len);

  int q [$];

  task automatic apply(dial_op_e op, int sh = 0, bit rot = 0);
    ctrl.op = op; ctrl.ld_shift = 8'(sh); ctrl.ld_rot = rot;
    @(posedge clk);
    case (op)
      DIAL_CLEAR: begin q.delete(); repeat (N) q.push_back(0); end
      DIAL_LOAD: begin
        q.delete();
        for (int i = sh; i < N; i++) q.push_back(i);
        if (rot) q.push_back(q.pop_front());
      end
      DIAL_ROT:      if (q.size() > 0) q.push_back(q.pop_front());
      DIAL_SHIFT_UP: if (q.size() > 0) void'(q.pop_front());
      default: ;
    endcase
    @(negedge clk);
    ctrl.op = DIAL_HOLD;
    checks++;
    if (32'(len) != q.size()) begin failures++; $display("ERROR: len %0d exp %0d", len, q.size()); end
    for (int r = 0; r < N; r++) begin
      int e = r < q.size() ? q[r] : 0;
      checks++;
      if (32'(idx[r]) != e) begin failures++; $display("ERROR: idx[%0d] = %0d exp %0d", r, idx[r], e); end
    end
  endtask

  initial begin
    ctrl = '{op: DIAL_HOLD, ld_shift: 8'd0, ld_rot: 1'b0};
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    apply(DIAL_LOAD);
    for (int r = 0; r < N; r++) begin checks++; if (32'(idx[r]) != r) failures++; end
    // three-bit-flip start: dial 2 reset, shifted up by 1, rotated by 1
    apply(DIAL_LOAD, 1, 1);
    checks++; if (idx[0] != 2 || idx[N-2] != 1 || len != N - 1) begin failures++; $display("ERROR: Fig. 4(a) layout"); end
    for (int t = 0; t < 2000; t++) begin
      automatic int k = $urandom_range(9);
      if (k == 0) apply(DIAL_CLEAR);
      else if (k == 1) apply(DIAL_LOAD, $urandom_range(N - 1), 1'($urandom));
      else if (k < 3) apply(DIAL_SHIFT_UP);
      else if (k < 8) apply(DIAL_ROT);
      else apply(DIAL_HOLD);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("ERROR: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
