// tb_mac_plus: self-checking test of one MAC+ unit at the default sizes (N = 64, m = 2).
//
// Random finished row sums, low bias bits, sumX values and C values are applied every
// clock, with the C load enable toggled at random. After each edge the output must equal
// {S, B[m-1:0]} + C * X from the previous clock's inputs (one-clock latency), C must be
// forwarded and must change only when load was high. Corner values (largest sumX and C)
// are included to check that V and G* are wide enough.
module tb_mac_plus;
  import cv_pkg::*;

  localparam int unsigned N  = N_DEF;
  localparam int unsigned M  = M_DEF;
  localparam int unsigned AW = acc_width(N);
  localparam int unsigned SW = AW - M;
  localparam int unsigned XW = x_width(N, M);
  localparam longint XMAX = longint'(N) * ((1 << M) - 1);

  int checks = 0;
  int failures = 0;
  int loads = 0;

  logic clk = 0;
  logic rst_n = 0;
  logic load;
  logic [7:0] c_in, c_out;
  logic [SW-1:0] s_in;
  logic [M-1:0] b_lo_in;
  logic [XW-1:0] x_in;
  logic [AW-1:0] g_out;

  always #5 clk = ~clk;

  mac_plus dut (
    .clk(clk), .rst_n(rst_n), .load(load), .c_in(c_in), .s_in(s_in),
    .b_lo_in(b_lo_in), .x_in(x_in), .c_out(c_out), .g_out(g_out)
  );

  task automatic expect_eq(input longint got, input longint exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint c_model, s_p, b_p, x_p;
    load = 0; c_in = 0; s_in = 0; b_lo_in = 0; x_in = 0;
    repeat (2) @(posedge clk);
    #1;
    expect_eq(g_out, 0, "g after reset");
    rst_n = 1;
    c_model = 0;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      load = ($urandom_range(0, 3) == 0) || t == 0;
      c_in = (t < 20) ? 8'd255 : 8'($urandom);
      x_in = (t < 20) ? XW'(XMAX) : XW'($urandom_range(0, int'(XMAX)));
      // Largest S the array can produce: (2^(8-m) - 1) + N * 255 * (2^(8-m) - 1).
      s_in = SW'($urandom_range(0, int'((1 << (8 - M)) - 1 + N * 255 * ((1 << (8 - M)) - 1))));
      b_lo_in = M'($urandom);
      s_p = s_in; b_p = b_lo_in; x_p = x_in;
      if (load) begin c_model = c_in; loads++; end
      @(posedge clk);
      #1;
      expect_eq(c_out, c_model, "c register");
      expect_eq(g_out, (s_p << M) + b_p + c_model * x_p, "G*");
    end
    if (loads < 2) begin
      failures++;
      $display("FAIL C load not exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
