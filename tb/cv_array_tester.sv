// cv_array_tester: stimulus generator and checker for cv_mac_array, shared by the
// end-to-end and large-array testbenches. It drives the array's inputs and watches its
// outputs; the testbench top instantiates the array itself and collects the counts.
//
// Sequence, repeated for PHASES weight sets:
//   1. Draw one filter per row. Most rows are "squeezed" (weights clustered around a
//      random centre, as trained filters are); some rows are uniform random. C of a row
//      is the rounded mean of its weights.
//   2. Load: N clocks with load high, presenting W[r][N-1-k] on w_in[r] and C[N-1-k] on
//      c_in in load clock k.
//   3. Stream NV activation vectors with their biases, skewed by column and row, one
//      vector per clock, then drain.
// Every row output is checked in exactly the clock where it becomes valid (vector i, row
// r: after the edge t0 + i + r + N, one clock more than an accurate array needs) against
//   G* = G - sum_j (A_j mod 2^m) * (W[r][j] - C[r]),   G = B + sum_j W[r][j] * A_j,
// computed here from the exact convolution. It also compares error statistics with and
// without the control variate: the mean error with V must be smaller in magnitude than
// without it, and so must the mean squared error.
//
// Mechanism counters: load phases, outputs with nonzero perforation error, outputs where
// V is nonzero, and outputs where V brought the result closer to G. A mechanism that never
// happens counts as a failure.
module cv_array_tester #(
  parameter int unsigned N  = 8,
  parameter int unsigned M  = 2,
  parameter int unsigned NV = 24,
  parameter int unsigned PHASES = 2,
  localparam int unsigned AW = cv_pkg::acc_width(N)
) (
  input  logic          clk,
  output logic          rst_n,
  output logic          load,
  output logic [7:0]    w_in [N],
  output logic [7:0]    c_in,
  output logic [7:0]    a_in [N],
  output logic [7:0]    b_in [N],
  input  logic [AW-1:0] g_out [N],
  output logic          done,
  output int            checks,
  output int            failures
);

  int W [N][N];
  int C [N];
  int A [NV][N];
  int B [NV][N];

  int n_load = 0, n_perf_err = 0, n_v_nonzero = 0, n_v_helped = 0;
  real sum_err_v = 0.0, sum_err_nov = 0.0, sq_err_v = 0.0, sq_err_nov = 0.0;
  int n_out = 0;

  task automatic fail(input string msg);
    failures++;
    if (failures < 10) $display("FAIL [N=%0d m=%0d] %s", N, M, msg);
  endtask

  task automatic draw_weights();
    for (int r = 0; r < int'(N); r++) begin
      int sum, centre, spread;
      sum = 0;
      centre = $urandom_range(30, 225);
      spread = $urandom_range(2, 30);
      for (int j = 0; j < int'(N); j++) begin
        if (r % 4 == 3) W[r][j] = $urandom_range(0, 255);
        else begin
          W[r][j] = centre + $urandom_range(0, 2 * spread) - spread;
          if (W[r][j] < 0) W[r][j] = 0;
          if (W[r][j] > 255) W[r][j] = 255;
        end
        sum += W[r][j];
      end
      C[r] = (sum + int'(N) / 2) / int'(N);
    end
  endtask

  task automatic draw_stream();
    for (int i = 0; i < int'(NV); i++)
      for (int j = 0; j < int'(N); j++) begin
        A[i][j] = (i == 0) ? 255 : $urandom_range(0, 255);
        B[i][j] = (i == 0) ? 255 : $urandom_range(0, 255);
      end
  endtask

  // Check the outputs that are valid after clock edge `c` of the stream.
  task automatic check_outputs(input int c);
    for (int r = 0; r < int'(N); r++) begin
      int i;
      i = c - r - int'(N);
      if (i >= 0 && i < int'(NV)) begin
        longint g, err, err_nov, gstar, x;
        g = B[i][r];
        err = 0; err_nov = 0; x = 0;
        for (int j = 0; j < int'(N); j++) begin
          int xj;
          xj = A[i][j] % (1 << M);
          g += longint'(W[r][j]) * A[i][j];
          err += longint'(xj) * (W[r][j] - C[r]);
          err_nov += longint'(xj) * W[r][j];
          x += xj;
        end
        gstar = g - err;
        checks++;
        if (longint'(g_out[r]) != gstar)
          fail($sformatf("vector %0d row %0d: G*=%0d expected %0d (exact %0d)",
                         i, r, g_out[r], gstar, g));
        n_out++;
        if (err_nov != 0) n_perf_err++;
        if (x != 0 && C[r] != 0) n_v_nonzero++;
        if ((err < 0 ? -err : err) < err_nov) n_v_helped++;
        sum_err_v += real'(err);
        sum_err_nov += real'(err_nov);
        sq_err_v += real'(err) * real'(err);
        sq_err_nov += real'(err_nov) * real'(err_nov);
      end
    end
  endtask

  initial begin
    checks = 0; failures = 0; done = 0;
    rst_n = 0; load = 0; c_in = '0;
    for (int k = 0; k < int'(N); k++) begin w_in[k] = '0; a_in[k] = '0; b_in[k] = '0; end
    repeat (3) @(posedge clk);
    #1;
    // After reset every row result is zero.
    for (int r = 0; r < int'(N); r++) begin
      checks++;
      if (g_out[r] != '0) fail("output not cleared by reset");
    end
    rst_n = 1;

    for (int ph = 0; ph < int'(PHASES); ph++) begin
      draw_weights();
      draw_stream();
      // Load phase.
      for (int k = 0; k < int'(N); k++) begin
        @(negedge clk);
        load = 1;
        for (int r = 0; r < int'(N); r++) w_in[r] = 8'(W[r][int'(N) - 1 - k]);
        c_in = 8'(C[int'(N) - 1 - k]);
      end
      @(negedge clk);
      load = 0;
      for (int r = 0; r < int'(N); r++) w_in[r] = 8'($urandom);  // ignored while load is low
      c_in = 8'($urandom);
      n_load++;
      // Stream phase: drive before edge c, check after edge c.
      for (int c = 0; c < int'(NV + 2 * N + 2); c++) begin
        for (int j = 0; j < int'(N); j++)
          a_in[j] = (c - j >= 0 && c - j < int'(NV)) ? 8'(A[c - j][j]) : 8'($urandom);
        for (int r = 0; r < int'(N); r++)
          b_in[r] = (c - r >= 0 && c - r < int'(NV)) ? 8'(B[c - r][r]) : 8'($urandom);
        @(posedge clk);
        #1;
        check_outputs(c);
        @(negedge clk);
      end
    end

    // Mechanisms and the statistical claims of the control variate.
    if (n_load < 2) fail("weight/C reload never exercised");
    if (n_perf_err == 0) fail("perforation error never occurred");
    if (n_v_nonzero == 0) fail("control variate V never nonzero");
    if (n_v_helped == 0) fail("control variate never reduced the error");
    checks++;
    if (!((sum_err_v < 0 ? -sum_err_v : sum_err_v) < sum_err_nov))
      fail($sformatf("mean error with V (%f) not below mean error without V (%f)",
                     sum_err_v / n_out, sum_err_nov / n_out));
    checks++;
    if (!(sq_err_v < sq_err_nov))
      fail("mean squared error with V not below the one without V");
    $display("[N=%0d m=%0d] outputs=%0d loads=%0d perforation_errors=%0d v_nonzero=%0d v_helped=%0d",
             N, M, n_out, n_load, n_perf_err, n_v_nonzero, n_v_helped);
    $display("[N=%0d m=%0d] mean error with V %.2f, without V %.2f; rms with V %.2f, without V %.2f",
             N, M, sum_err_v / n_out, sum_err_nov / n_out,
             $sqrt(sq_err_v / n_out), $sqrt(sq_err_nov / n_out));
    done = 1;
  end

endmodule
