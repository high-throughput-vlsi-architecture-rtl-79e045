// tb_grand_controller: checks the search schedule at the default size
// (N = 128, AB = 3) and the step count of the AB = 2, N = 79 variant.
//
// With `found` held low, a decode must last 2 + sum_{i=2..N} floor(i/2)
// steps (4098 for N = 128; 2 + floor(79/2) = 41 for N = 79, AB = 2). At every
// step the test compares the weight, the first-flip index and syndrome
// (column j of the loaded H during three-bit steps) and the two dial control
// words with a schedule built here from the paper's description (load dial 1,
// load dial 2 rotated by one, rotate dial 2 N/2-1 times; then per first flip
// j: shift dial 1 up, reset dial 2 shifted up by j+1 and rotated by one,
// rotate floor(m/2)-1 times). It also stops a decode by raising `found` at a
// random step and checks that the decode ends in that step, that in_ready is
// high then and that a word is accepted back to back.
module tb_grand_controller;
  import grand_pkg::*;
  localparam int N = N_DEFAULT, SW = SW_DEFAULT;
  localparam int IW = $clog2(N), CW = 2 * $clog2(N) + 2;
  localparam int N2 = 79, SW2 = 15;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic h_load = 1'b0;
  logic [SW-1:0] h_in [N], hcol [N];
  logic in_valid = 1'b0, in_ready, accept, found = 1'b0, busy, finish;
  phase_e phase;
  logic [1:0] weight;
  logic [CW-1:0] steps;
  dial_ctrl_t d1_ctrl, d2_ctrl;
  logic [SW-1:0] ctrl_syn;
  logic [IW-1:0] ctrl_idx;

  grand_controller dut (.*);

  // AB = 2 variant of the paper's comparison (n = 79)
  logic [SW2-1:0] h2_in [N2], h2col [N2];
  logic in2_valid = 1'b0, in2_ready, accept2, busy2, finish2;
  phase_e phase2;
  logic [1:0] weight2;
  logic [2*$clog2(N2)+1:0] steps2;
  dial_ctrl_t e1, e2;
  logic [SW2-1:0] csyn2;
  logic [$clog2(N2)-1:0] cidx2;

  grand_controller #(.N(N2), .SW(SW2), .AB(2)) dut2 (
    .clk, .rst_n, .h_load(1'b0), .h_in(h2_in), .hcol(h2col),
    .in_valid(in2_valid), .in_ready(in2_ready), .accept(accept2),
    .found(1'b0), .busy(busy2), .phase(phase2), .weight(weight2),
    .finish(finish2), .steps(steps2), .d1_ctrl(e1), .d2_ctrl(e2),
    .ctrl_syn(csyn2), .ctrl_idx(cidx2)
  );

  int checks = 0, failures = 0;

  // expected schedule: one entry per step
  typedef struct { int w; int j; dial_ctrl_t c1; dial_ctrl_t c2; } step_t;
  step_t sched [$];

  function automatic dial_ctrl_t mk(dial_op_e op, int sh = 0, bit rot = 0);
    mk.op = op; mk.ld_shift = 8'(sh); mk.ld_rot = rot;
  endfunction

  function automatic void build();
    sched.delete();
    sched.push_back('{0, 0, mk(DIAL_LOAD), mk(DIAL_CLEAR)});
    sched.push_back('{1, 0, mk(DIAL_HOLD), mk(DIAL_LOAD, 0, 1)});
    for (int t = 1; t <= N / 2; t++)
      sched.push_back('{2, 0, t < N / 2 ? mk(DIAL_HOLD) : mk(DIAL_SHIFT_UP),
                              t < N / 2 ? mk(DIAL_ROT) : mk(DIAL_LOAD, 1, 1)});
    for (int j = 0; j <= N - 3; j++) begin
      int m = N - 1 - j;
      for (int t = 1; t <= m / 2; t++)
        sched.push_back('{3, j, t < m / 2 ? mk(DIAL_HOLD) : mk(DIAL_SHIFT_UP),
                                t < m / 2 ? mk(DIAL_ROT) : mk(DIAL_LOAD, j + 2, 1)});
    end
    // the last step of a decode leaves the dials alone
    sched[sched.size() - 1].c1 = mk(DIAL_HOLD);
    sched[sched.size() - 1].c2 = mk(DIAL_HOLD);
  endfunction

  task automatic start();
    @(negedge clk);
    in_valid = 1'b1;
    #1;
    checks++;
    if (!in_ready || d1_ctrl.op != DIAL_CLEAR || d2_ctrl.op != DIAL_CLEAR) begin
      failures++; $display("ERROR: accept does not clear the dials");
    end
    @(negedge clk);
    in_valid = 1'b0;
  endtask

  initial begin
    for (int i = 0; i < N; i++) h_in[i] = $urandom;
    for (int i = 0; i < N2; i++) h2_in[i] = SW2'($urandom);
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk); h_load = 1'b1; @(negedge clk); h_load = 1'b0;
    build();
    checks++;
    if (sched.size() != 4098) begin failures++; $display("ERROR: schedule length %0d", sched.size()); end

    // full search, nothing found
    start();
    for (int s = 0; s < sched.size(); s++) begin
      automatic step_t e = sched[s];
      checks++;
      if (!busy || 32'(weight) != e.w || 32'(steps) != s + 1 ||
          d1_ctrl != e.c1 || d2_ctrl != e.c2 ||
          (e.w == 3 && (32'(ctrl_idx) != e.j || ctrl_syn != h_in[e.j])) ||
          (e.w != 3 && ctrl_syn != '0) ||
          (finish != (s == sched.size() - 1))) begin
        failures++;
        if (failures < 10) $display("ERROR: step %0d w=%0d j=%0d d1=%p d2=%p (exp w=%0d j=%0d d1=%p d2=%p) finish=%0b",
                                    s + 1, weight, ctrl_idx, d1_ctrl, d2_ctrl, e.w, e.j, e.c1, e.c2, finish);
      end
      @(negedge clk);
    end
    checks++;
    if (busy) begin failures++; $display("ERROR: still busy after 4098 steps"); end

    // early stop at a random step, then back-to-back accept
    for (int k = 0; k < 20; k++) begin
      automatic int stop = (k < 4) ? k + 1 : $urandom_range(sched.size());
      start();
      for (int s = 1; s < stop; s++) @(negedge clk);
      found = 1'b1;
      #1;
      checks++;
      if (!finish || !in_ready || 32'(steps) != stop) begin
        failures++; $display("ERROR: found at step %0d not honoured", stop);
      end
      in_valid = 1'b1;   // next word accepted in the finishing step
      @(negedge clk);
      found = 1'b0; in_valid = 1'b0;
      checks++;
      if (!busy || phase != PH_W0 || steps != 1) begin failures++; $display("ERROR: back-to-back accept"); end
      found = 1'b1; @(negedge clk); found = 1'b0;   // end that decode at once
    end

    // AB = 2, n = 79: 41 steps
    begin
      automatic int cnt = 0;
      @(negedge clk); in2_valid = 1'b1; @(negedge clk); in2_valid = 1'b0;
      while (busy2) begin cnt++; @(negedge clk); end
      checks++;
      if (cnt != 41) begin failures++; $display("ERROR: AB=2 n=79 took %0d steps", cnt); end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("ERROR: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
