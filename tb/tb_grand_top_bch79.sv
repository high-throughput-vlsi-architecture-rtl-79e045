// tb_grand_top_bch79: the decoder in the configuration of the paper's
// comparison with a dedicated BCH decoder: code length 79, AB = 2, so a
// decode lasts at most 2 + floor(79/2) = 41 cycles.
//
// Code: a two-error-correcting BCH code over GF(2^7) (primitive polynomial
// x^7 + x^3 + 1) shortened to 79 bits, with an overall parity check: column
// i of H is [alpha^i ; alpha^(3i) ; 1], 15 parity checks, 64 message bits,
// minimum distance 6. Codewords are drawn from the null space of H (found by
// Gaussian elimination below). Words with 0, 1 or 2 flips must be corrected
// in 1, 2 or 2 + d cycles; words with 3 flips must be abandoned after 41
// cycles. The reference model and the checks are those of tb_grand_top.
module tb_grand_top_bch79;
  import grand_pkg::*;

  localparam int N  = 79;
  localparam int SW = 15;
  localparam int AB = 2;
  localparam int CW = 2 * $clog2(N) + 2;
  localparam int FRAMES_PER_W = 4;

  logic          clk = 1'b0;
  logic          rst_n = 1'b0;
  logic          h_load = 1'b0;
  logic [SW-1:0] h_in [N];
  logic          in_valid = 1'b0;
  logic          in_ready;
  logic [N-1:0]  r_in = '0;
  logic          out_valid, out_fail;
  logic [N-1:0]  out_x;
  logic [1:0]    out_weight;
  logic [CW-1:0] out_steps;

  always #5 clk = ~clk;

  grand_top #(.N(N), .SW(SW), .AB(AB)) dut (
    .clk, .rst_n, .h_load, .h_in, .in_valid, .in_ready, .r_in,
    .out_valid, .out_x, .out_fail, .out_weight, .out_steps
  );

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // mechanism counters
  int n_w[4] = '{default: 0};
  int n_abandon = 0, n_b2b = 0, n_reload = 0;

  // ------------------------------------------------------------ reference
  logic [SW-1:0] H [N];

  function automatic logic [SW-1:0] syn_of(logic [N-1:0] v);
    logic [SW-1:0] s = '0;
    for (int i = 0; i < N; i++) if (v[i]) s ^= H[i];
    return s;
  endfunction

  typedef struct {
    logic [N-1:0] x;
    logic         fail;
    int           weight;
    int           steps;
  } result_t;

  function automatic result_t ref_decode(logic [N-1:0] r);
    result_t res;
    logic [SW-1:0] s = syn_of(r);
    int base;
    res.x = r; res.fail = 1'b0;
    if (s == '0) begin res.weight = 0; res.steps = 1; return res; end
    for (int i = 0; i < N; i++)
      if (H[i] == s) begin
        res.x[i] = ~res.x[i]; res.weight = 1; res.steps = 2; return res;
      end
    for (int d = 1; d <= N / 2; d++)
      for (int row = 0; row < N; row++) begin
        int b = (row + d) % N;
        if ((H[row] ^ H[b]) == s) begin
          res.x[row] = ~res.x[row]; res.x[b] = ~res.x[b];
          res.weight = 2; res.steps = 2 + d; return res;
        end
      end
    base = 2 + N / 2;
    if (AB == 3)
      for (int a = 0; a <= N - 3; a++) begin
        int m = N - 1 - a;
        for (int d = 1; d <= m / 2; d++)
          for (int row = 0; row < m; row++) begin
            int p = a + 1 + row;
            int q = a + 1 + (row + d) % m;
            if ((H[a] ^ H[p] ^ H[q]) == s) begin
              res.x[a] = ~res.x[a]; res.x[p] = ~res.x[p]; res.x[q] = ~res.x[q];
              res.weight = 3; res.steps = base + d; return res;
            end
          end
        base += m / 2;
      end
    res.fail = 1'b1; res.weight = AB; res.steps = base;
    return res;
  endfunction

  // ---------------------------------------------------------------- code
  function automatic logic [6:0] gf_mul_alpha(logic [6:0] v);
    logic [7:0] t = {v, 1'b0};
    if (t[7]) t ^= 8'h89;               // x^7 + x^3 + 1
    return t[6:0];
  endfunction

  function automatic void make_bch_h();
    logic [6:0] a1 = 7'd1, a3 = 7'd1;
    for (int i = 0; i < N; i++) begin
      H[i] = {1'b1, a3, a1};
      a1 = gf_mul_alpha(a1);
      repeat (3) a3 = gf_mul_alpha(a3);
    end
  endfunction

  // reduced row echelon form of H: pivot column of each row
  logic [N-1:0] R [SW];
  int           piv [SW];
  int           nrows;

  function automatic void reduce_h();
    int rr = 0;
    for (int b = 0; b < SW; b++)
      for (int i = 0; i < N; i++) R[b][i] = H[i][b];
    for (int c = 0; c < N && rr < SW; c++) begin
      int p = -1;
      for (int b = rr; b < SW; b++) if (R[b][c] && p < 0) p = b;
      if (p >= 0) begin
        logic [N-1:0] tmp = R[p]; R[p] = R[rr]; R[rr] = tmp;
        for (int b = 0; b < SW; b++) if (b != rr && R[b][c]) R[b] ^= R[rr];
        piv[rr] = c;
        rr++;
      end
    end
    nrows = rr;
  endfunction

  // random codeword: free positions random, pivot positions solved
  function automatic logic [N-1:0] make_codeword(int unused);
    logic [N-1:0] c;
    for (int i = 0; i < N; i += 32) c[i +: 32] = $urandom;
    for (int r = 0; r < nrows; r++) c[piv[r]] = 1'b0;
    for (int r = 0; r < nrows; r++) c[piv[r]] = ^(R[r] & c);
    return c;
  endfunction

  function automatic logic [N-1:0] add_errors(logic [N-1:0] c, int w);
    logic [N-1:0] e = '0;
    while ($countones(e) < w) e[$urandom_range(N - 1)] = 1'b1;
    return c ^ e;
  endfunction

  // -------------------------------------------------------------- driver
  logic [N-1:0] frames [$];
  result_t      expq [$];
  int           accq [$];
  int           ncodes_done = 0;

  task automatic load_h();
    @(negedge clk);
    while (dut.u_ctrl.busy) @(negedge clk);
    for (int i = 0; i < N; i++) h_in[i] = H[i];
    h_load = 1'b1;
    @(negedge clk);
    h_load = 1'b0;
    n_reload++;
  endtask

  task automatic run_frames();
    foreach (frames[f]) expq.push_back(ref_decode(frames[f]));
    foreach (frames[f]) begin
      @(negedge clk);
      in_valid = 1'b1;
      r_in     = frames[f];
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      accq.push_back(cycle);
      if (dut.u_ctrl.busy) n_b2b++;   // accepted in the last step of a decode
    end
    @(negedge clk);
    in_valid = 1'b0;
    while (expq.size() != 0) @(posedge clk);
    frames.delete();
  endtask

  // monitor
  always @(posedge clk) if (rst_n && out_valid) begin
    result_t e;
    int acc;
    if (expq.size() == 0) begin
      failures++; $display("ERROR: unexpected output");
    end else begin
      e = expq.pop_front();
      acc = accq.pop_front();
      checks += 5;
      if (out_x !== e.x)           begin failures++; $display("ERROR: x mismatch"); end
      if (out_fail !== e.fail)     begin failures++; $display("ERROR: fail %0b exp %0b", out_fail, e.fail); end
      if (32'(out_weight) != e.weight) begin failures++; $display("ERROR: weight %0d exp %0d", out_weight, e.weight); end
      if (32'(out_steps) != e.steps)   begin failures++; $display("ERROR: steps %0d exp %0d", out_steps, e.steps); end
      // out_valid is seen at this edge: cycle-acc == steps + 1
      if (cycle - acc != e.steps + 1) begin
        failures++; $display("ERROR: latency %0d exp %0d", cycle - acc, e.steps + 1);
      end
      if (e.fail) n_abandon++;
      else n_w[e.weight]++;
    end
  end

  // ---------------------------------------------------------------- main
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    make_bch_h();
    reduce_h();
    load_h();
    checks++;
    if (syn_of(make_codeword(0)) != '0 || nrows != SW) begin failures++; $display("ERROR: codeword construction"); end
    for (int w = 0; w <= 3; w++)
      for (int f = 0; f < 30; f++)
        frames.push_back(add_errors(make_codeword(0), w));
    for (int f = 0; f < 10; f++) frames.push_back(make_codeword(0));
    run_frames();
    load_h();
    for (int f = 0; f < 20; f++) frames.push_back(add_errors(make_codeword(0), $urandom_range(2)));
    run_frames();
    $display("decodes by weight: w0=%0d w1=%0d w2=%0d abandon=%0d back-to-back=%0d",
             n_w[0], n_w[1], n_w[2], n_abandon, n_b2b);
    checks++; if (n_w[0] == 0) begin failures++; $display("ERROR: no weight-0 decode"); end
    checks++; if (n_w[1] == 0) begin failures++; $display("ERROR: no weight-1 decode"); end
    checks++; if (n_w[2] == 0) begin failures++; $display("ERROR: no weight-2 decode"); end
    checks++; if (n_abandon != 30) begin failures++; $display("ERROR: %0d abandons, expected 30 (one per 3-flip word)", n_abandon); end
    checks++; if (n_b2b == 0) begin failures++; $display("ERROR: no back-to-back accept"); end
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
