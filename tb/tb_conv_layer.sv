// tb_conv_layer: a 3x3 convolution layer run on a 16x16 control-variate array (m = 2),
// the way a layer larger than the array is executed: in several passes whose results
// are added outside the array.
//
// Layer: 16 input channels, 16 filters of 3x3x16 weights (k = 144), a 6x6 input map and
// a 4x4 output map (no padding, stride 1), the shape of an early ResNet stage for CIFAR
// images, cut down in map size. Each of the 9 kernel taps is one pass: the 16 filters'
// weights for that tap are loaded (row = filter, column = input channel), together with
// each filter's C, the rounded mean of all its 144 weights; then the 16 output pixels are
// streamed as 16 skewed activation vectors. The bias enters only in the first pass.
// The testbench adds the passes' row results and checks each output against
//   G - sum over all 144 taps of (A mod 4) * (W - C),
// and checks that the control variate lowers both the mean and the RMS error against
// the exact convolution G. Filters are drawn with weights clustered around their mean.
module tb_conv_layer;

  localparam int unsigned N   = 16;
  localparam int unsigned M   = 2;
  localparam int unsigned AW  = cv_pkg::acc_width(N);
  localparam int unsigned CIN = 16, COUT = 16, HIN = 6, HOUT = 4, KS = 3;
  localparam int unsigned NPIX = HOUT * HOUT;

  int checks = 0;
  int failures = 0;

  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n, load;
  logic [7:0] w_in [N];
  logic [7:0] c_in;
  logic [7:0] a_in [N];
  logic [7:0] b_in [N];
  logic [AW-1:0] g_out [N];

  cv_mac_array #(.N(N), .M(M)) dut (
    .clk(clk), .rst_n(rst_n), .load(load), .w_in(w_in), .c_in(c_in),
    .a_in(a_in), .b_in(b_in), .g_out(g_out)
  );

  int K [COUT][CIN][KS][KS];
  int X [CIN][HIN][HIN];
  int Bias [COUT];
  int C [COUT];
  longint acc [COUT][NPIX];   // sum of the array's pass results
  int passes = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int act(input int pass, input int pix, input int ch);
    int ky, kx, oy, ox;
    ky = pass / KS; kx = pass % KS;
    oy = pix / HOUT; ox = pix % HOUT;
    return X[ch][oy + ky][ox + kx];
  endfunction

  initial begin
    real s_v = 0, s_nov = 0, q_v = 0, q_nov = 0;
    // Data.
    for (int f = 0; f < int'(COUT); f++) begin
      int centre, spread, sum;
      centre = $urandom_range(60, 190);
      spread = $urandom_range(4, 24);
      sum = 0;
      for (int c = 0; c < int'(CIN); c++)
        for (int y = 0; y < int'(KS); y++)
          for (int x = 0; x < int'(KS); x++) begin
            K[f][c][y][x] = centre + $urandom_range(0, 2 * spread) - spread;
            sum += K[f][c][y][x];
          end
      C[f] = (sum + int'(CIN * KS * KS) / 2) / int'(CIN * KS * KS);
      Bias[f] = $urandom_range(0, 255);
    end
    for (int c = 0; c < int'(CIN); c++)
      for (int y = 0; y < int'(HIN); y++)
        for (int x = 0; x < int'(HIN); x++) X[c][y][x] = $urandom_range(0, 255);
    for (int f = 0; f < int'(COUT); f++)
      for (int p = 0; p < int'(NPIX); p++) acc[f][p] = 0;

    rst_n = 0; load = 0; c_in = 0;
    for (int k = 0; k < int'(N); k++) begin w_in[k] = 0; a_in[k] = 0; b_in[k] = 0; end
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1;

    for (int pass = 0; pass < int'(KS * KS); pass++) begin
      // Load the weights of tap `pass`: row f = filter, column c = input channel.
      for (int k = 0; k < int'(N); k++) begin
        @(negedge clk);
        load = 1;
        for (int f = 0; f < int'(N); f++)
          w_in[f] = 8'(K[f][int'(N) - 1 - k][pass / KS][pass % KS]);
        c_in = 8'(C[int'(N) - 1 - k]);
      end
      @(negedge clk);
      load = 0;
      // Stream the output pixels, skewed; collect row f of pixel i after edge i + f + N.
      for (int c = 0; c < int'(NPIX + 2 * N + 1); c++) begin
        for (int j = 0; j < int'(N); j++)
          a_in[j] = (c - j >= 0 && c - j < int'(NPIX)) ? 8'(act(pass, c - j, j)) : 8'd0;
        for (int f = 0; f < int'(N); f++)
          b_in[f] = (pass == 0 && c - f >= 0 && c - f < int'(NPIX)) ? 8'(Bias[f]) : 8'd0;
        @(posedge clk);
        #1;
        for (int f = 0; f < int'(N); f++) begin
          int i;
          i = c - f - int'(N);
          if (i >= 0 && i < int'(NPIX)) acc[f][i] += longint'(g_out[f]);
        end
        @(negedge clk);
      end
      passes++;
    end

    // Check the layer outputs.
    for (int f = 0; f < int'(COUT); f++)
      for (int p = 0; p < int'(NPIX); p++) begin
        longint g, err, err_nov;
        g = Bias[f]; err = 0; err_nov = 0;
        for (int pass = 0; pass < int'(KS * KS); pass++)
          for (int c = 0; c < int'(CIN); c++) begin
            int a, w;
            a = act(pass, p, c);
            w = K[f][c][pass / KS][pass % KS];
            g += longint'(w) * a;
            err += longint'(a % (1 << M)) * (w - C[f]);
            err_nov += longint'(a % (1 << M)) * w;
          end
        checks++;
        if (acc[f][p] != g - err) begin
          failures++;
          if (failures < 10) $display("FAIL filter %0d pixel %0d: %0d expected %0d", f, p, acc[f][p], g - err);
        end
        s_v += real'(err); s_nov += real'(err_nov);
        q_v += real'(err) * real'(err); q_nov += real'(err_nov) * real'(err_nov);
      end
    checks++;
    if (passes != int'(KS * KS)) failures++;
    checks++;
    if (!((s_v < 0 ? -s_v : s_v) < s_nov && q_v < q_nov)) begin
      failures++;
      $display("FAIL control variate did not reduce the layer error");
    end
    $display("layer outputs=%0d passes=%0d: mean error with V %.2f, without V %.2f; rms with V %.2f, without V %.2f",
             COUT * NPIX, passes, s_v / (COUT * NPIX), s_nov / (COUT * NPIX),
             $sqrt(q_v / (COUT * NPIX)), $sqrt(q_nov / (COUT * NPIX)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
