// tb_mac_star: self-checking test of one MAC* unit at the default sizes (N = 64, m = 2).
//
// Random activations, weights, partial sums and sumX values are applied every clock,
// with the weight load enable toggled at random. After each clock edge the outputs are
// compared with a model built from the values presented before the edge: the sum path
// must equal S + W * (A >> m), the sumX path X + (A mod 2^m), A and W must be forwarded,
// and W must change only in clocks where load was high. The one-clock latency is checked
// by comparing against the previous clock's inputs.
module tb_mac_star;
  import cv_pkg::*;

  localparam int unsigned N  = N_DEF;
  localparam int unsigned M  = M_DEF;
  localparam int unsigned SW = acc_width(N) - M;
  localparam int unsigned XW = x_width(N, M);

  int checks = 0;
  int failures = 0;
  int loads = 0, holds = 0;

  logic clk = 0;
  logic rst_n = 0;
  logic load;
  logic [7:0] a_in, w_in, a_out, w_out;
  logic [SW-1:0] s_in, s_out;
  logic [XW-1:0] x_in, x_out;

  always #5 clk = ~clk;

  mac_star dut (
    .clk(clk), .rst_n(rst_n), .load(load),
    .a_in(a_in), .w_in(w_in), .s_in(s_in), .x_in(x_in),
    .a_out(a_out), .w_out(w_out), .s_out(s_out), .x_out(x_out)
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
    longint w_model;
    longint a_p, s_p, x_p;
    load = 0; a_in = 0; w_in = 0; s_in = 0; x_in = 0;
    repeat (2) @(posedge clk);
    #1;
    // Reset clears the registers.
    expect_eq(s_out, 0, "s after reset");
    expect_eq(x_out, 0, "x after reset");
    rst_n = 1;
    w_model = 0;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      load = ($urandom_range(0, 3) == 0);
      a_in = 8'($urandom);
      w_in = 8'($urandom);
      // Keep S in a range where the sum cannot overflow, as in the array.
      s_in = SW'($urandom_range(0, (1 << (SW - 1)) - 1));
      x_in = XW'($urandom_range(0, (1 << XW) - 1 - ((1 << M) - 1)));
      a_p = a_in; s_p = s_in; x_p = x_in;
      if (load) begin w_model = w_in; loads++; end else holds++;
      @(posedge clk);
      #1;
      expect_eq(a_out, a_p, "a forward");
      expect_eq(w_out, w_model, "w register");
      expect_eq(s_out, s_p + w_model * (a_p >> M), "sum_j");
      expect_eq(x_out, x_p + (a_p % (1 << M)), "sumX_j");
    end
    if (loads == 0 || holds == 0) begin
      failures++;
      $display("FAIL load/hold not both exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
