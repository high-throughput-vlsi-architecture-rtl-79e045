// tb_dial: checks the dial against a list model. The active rows of the
// dial are kept as a queue: a cyclic shift moves the head to the tail, a
// shift-up drops the head, a load takes columns ld_shift..N-1 (then moves the
// head to the tail when ld_rot is set), a clear makes N null rows. Rows past
// the queue must read 0 and `len` must equal the queue length.
// It first replays the paper's figures for N = 10 (dial 2 of the two-bit
// step: s_2..s_n,s_1 then s_3..s_n,s_1,s_2; dial 1/dial 2 of the three-bit
// steps: s_2..s_n,0 and s_3..s_n,s_2,0, then s_3..s_n,0,0), then runs random
// operation sequences.
module tb_dial;
  import grand_pkg::*;
  localparam int N = 10, W = 12;

  logic clk = 1'b0, rst_n = 1'b0;
  dial_ctrl_t ctrl;
  logic [W-1:0] ld_data [N];
  logic [W-1:0] row [N];
  logic [$clog2(N+1)-1:0] len;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  dial #(.N(N), .W(W)) dut (.clk, .rst_n, .ctrl, .ld_data, .row, .len);

  int q [$];   // active rows, as column numbers; -1 = null

  task automatic apply(dial_op_e op, int sh = 0, bit rot = 0);
    ctrl.op = op; ctrl.ld_shift = 8'(sh); ctrl.ld_rot = rot;
    @(posedge clk);
    case (op)
      DIAL_CLEAR: begin q.delete(); repeat (N) q.push_back(-1); end
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
    compare();
  endtask

  task automatic compare();
    checks++;
    if (32'(len) != q.size()) begin
      failures++; $display("ERROR: len %0d exp %0d", len, q.size());
    end
    for (int r = 0; r < N; r++) begin
      logic [W-1:0] e = (r < q.size() && q[r] >= 0) ? ld_data[q[r]] : '0;
      checks++;
      if (row[r] !== e) begin failures++; $display("ERROR: row %0d = %h exp %h", r, row[r], e); end
    end
  endtask

  // figure check: row r holds column cols[r] (-1 = null)
  task automatic expect_cols(int cols [N]);
    for (int r = 0; r < N; r++) begin
      logic [W-1:0] e = cols[r] >= 0 ? ld_data[cols[r]] : '0;
      checks++;
      if (row[r] !== e) begin failures++; $display("ERROR: figure row %0d", r); end
    end
  endtask

  initial begin
    ctrl = '{op: DIAL_HOLD, ld_shift: 8'd0, ld_rot: 1'b0};
    for (int i = 0; i < N; i++) ld_data[i] = W'(i * 37 + 5);
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    q.delete(); repeat (N) q.push_back(-1);
    compare();
    // Fig. 3: dial 2 = s_2..s_n,s_1 then s_3..s_n,s_1,s_2 (0-based below)
    apply(DIAL_LOAD, 0, 1); expect_cols('{1,2,3,4,5,6,7,8,9,0});
    apply(DIAL_ROT);        expect_cols('{2,3,4,5,6,7,8,9,0,1});
    // Fig. 4(a): dial 1 shifted up by 1
    apply(DIAL_LOAD, 0, 0); apply(DIAL_SHIFT_UP); expect_cols('{1,2,3,4,5,6,7,8,9,-1});
    // Fig. 4(c): dial 1 shifted up again
    apply(DIAL_SHIFT_UP);   expect_cols('{2,3,4,5,6,7,8,9,-1,-1});
    // Fig. 4(a)/(b)/(c) dial 2
    apply(DIAL_LOAD, 1, 1); expect_cols('{2,3,4,5,6,7,8,9,1,-1});
    apply(DIAL_ROT);        expect_cols('{3,4,5,6,7,8,9,1,2,-1});
    apply(DIAL_LOAD, 2, 1); expect_cols('{3,4,5,6,7,8,9,2,-1,-1});
    // random sequences
    for (int t = 0; t < 3000; t++) begin
      automatic int k = $urandom_range(9);
      if (k == 0) apply(DIAL_CLEAR);
      else if (k == 1) apply(DIAL_LOAD, $urandom_range(N - 1), 1'($urandom));
      else if (k < 4) apply(DIAL_SHIFT_UP);
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
