// tb_grand_top: end-to-end test of the GRANDAB decoder at its default size
// (N = 128, 32-bit syndromes, AB = 3).
//
// The decoder is loaded in turn with the parity-check matrices of the four
// CRC codes of length 128 (generators 0x04C11DB7, 0xB2B117, 0x1021, 0xD5,
// i.e. k = 96, 104, 112, 120); column i of H is x^i mod g(x). For each code
// it decodes systematic codewords hit by 0..3 random bit flips, and a few
// words with many flips that are normally abandoned. Words are presented
// back to back (in_valid held high), so a new word is accepted in the last
// step of the previous one.
//
// Reference: an independent software model walks the paper's schedule as a
// list of error patterns (weight 0; the N single flips; pairs at cyclic
// distance d = 1..N/2; then, for each first flip a, pairs among the
// remaining m = N-1-a positions at distance d = 1..m/2) and returns the first
// matching pattern and the time step it is tested in. The test checks the
// decoded word, the fail flag, the weight, the reported step count and the
// measured cycles from acceptance to output (steps + 1), and that every
// mechanism occurred: decodes ending in each of the four steps, abandonment,
// back-to-back acceptance and reloading H. Finally, it reads the index dials
// in every step and checks that a search ending in abandonment has tested
// every one of the C(128,1) + C(128,2) + C(128,3) = 349632 patterns.
module tb_grand_top;
  import grand_pkg::*;

  localparam int N  = N_DEFAULT;
  localparam int SW = SW_DEFAULT;
  localparam int AB = AB_DEFAULT;
  localparam int CW = 2 * $clog2(N) + 2;
  localparam int FRAMES_PER_W = 10;

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

  grand_top dut (
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

  // ---------------------------------------------------------------- codes
  function automatic void make_crc_h(logic [SW-1:0] g, int deg);
    logic [SW:0] s = 1;
    for (int i = 0; i < N; i++) begin
      H[i] = s[SW-1:0];
      s = (s << 1);
      if (s[deg]) s ^= {1'b0, g};
      s[deg] = 1'b0;
    end
  endfunction

  // random systematic codeword: data in bits deg..N-1, parity in 0..deg-1
  function automatic logic [N-1:0] make_codeword(int deg);
    logic [N-1:0] c;
    logic [SW-1:0] s;
    for (int i = 0; i < N; i += 32) c[i +: 32] = $urandom;
    for (int i = 0; i < deg; i++) c[i] = 1'b0;
    s = syn_of(c);
    for (int i = 0; i < deg; i++) c[i] = s[i];
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

  // ------------------------------------------------------------- coverage
  // Distinct error patterns each decode tests, read from the index dials and
  // the controller's index of every active row in every step. A decode that
  // ends in abandonment must have tested all sum_{i=1..AB} C(N,i) patterns.
  localparam int NPAT = N + N * (N - 1) / 2 + N * (N - 1) * (N - 2) / 6;
  int stamp [];       // decode number that last tested a pattern
  int decode_id = 0;
  int distinct = 0;
  int n_full_cover = 0;

  function automatic int pat_key(int a, int b, int c); // a, b, c in 0..N, N = none
    int t;
    if (a > b) begin t = a; a = b; b = t; end
    if (b > c) begin t = b; b = c; c = t; end
    if (a > b) begin t = a; a = b; b = t; end
    return (a * (N + 1) + b) * (N + 1) + c;
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (dut.u_ctrl.busy && dut.weight != 2'd0)
      for (int r = 0; r < 32'(dut.d1_len); r++) begin
        automatic int a = (dut.weight == 2'd3) ? 32'(dut.ctrl_idx) : N;
        automatic int b = (dut.weight >= 2'd2) ? 32'(dut.i2_row[r]) : N;
        automatic int k = pat_key(a, b, 32'(dut.i1_row[r]));
        if (stamp[k] != decode_id) begin stamp[k] = decode_id; distinct++; end
      end
    if (dut.finish) begin
      if (!dut.found && AB == 3) begin
        checks++;
        if (distinct != NPAT) begin
          failures++; $display("ERROR: abandoned after %0d distinct patterns, expected %0d", distinct, NPAT);
        end else n_full_cover++;
      end
    end
    if (dut.accept) begin decode_id++; distinct = 0; end
  end

  // ---------------------------------------------------------------- main
  logic [SW-1:0] polys [4] = '{32'h04C11DB7, 32'h00B2B117, 32'h00001021, 32'h000000D5};
  int            degs  [4] = '{32, 24, 16, 8};

  initial begin
    stamp = new[(N + 1) * (N + 1) * (N + 1)];
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int c = 0; c < 4; c++) begin
      make_crc_h(polys[c], degs[c]);
      load_h();
      for (int w = 0; w <= 3; w++)
        for (int f = 0; f < FRAMES_PER_W; f++)
          frames.push_back(add_errors(make_codeword(degs[c]), w));
      frames.push_back(add_errors(make_codeword(degs[c]), 8));  // usually abandoned
      frames.push_back(make_codeword(degs[c]));   // zero-error words back to back
      frames.push_back(make_codeword(degs[c]));
      run_frames();
      $display("code %0d (deg %0d) done at cycle %0d", c, degs[c], cycle);
    end
    $display("decodes by weight: w0=%0d w1=%0d w2=%0d w3=%0d abandon=%0d back-to-back=%0d reloads=%0d",
             n_w[0], n_w[1], n_w[2], n_w[3], n_abandon, n_b2b, n_reload);
    checks++; if (n_w[0] == 0) begin failures++; $display("ERROR: no weight-0 decode"); end
    checks++; if (n_w[1] == 0) begin failures++; $display("ERROR: no weight-1 decode"); end
    checks++; if (n_w[2] == 0) begin failures++; $display("ERROR: no weight-2 decode"); end
    checks++; if (n_w[3] == 0) begin failures++; $display("ERROR: no weight-3 decode"); end
    checks++; if (n_abandon == 0) begin failures++; $display("ERROR: no abandonment"); end
    checks++; if (n_b2b == 0) begin failures++; $display("ERROR: no back-to-back accept"); end
    checks++; if (n_reload < 2) begin failures++; $display("ERROR: H never reloaded"); end
    checks++; if (n_full_cover == 0) begin failures++; $display("ERROR: no complete search observed"); end
    $display("complete searches covering all %0d patterns: %0d", NPAT, n_full_cover);
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
