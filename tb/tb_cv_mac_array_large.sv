// tb_cv_mac_array_large: the control-variate MAC array at a large size, a 32x32 array of
// MAC* units plus a column of 32 MAC+ units with m = 2, taken through two complete weight
// loads and 128 streamed activation vectors each. Checking is done by cv_array_tester
// (see there); every row result of every vector is checked in the clock it becomes valid.
//
// Setting N to 64 below runs the default 64x64 configuration with the same stimulus. That
// model is large: its C++ takes tens of minutes to compile on one core (the 32x32 model
// about two), while the simulation itself takes under a second. At N = 64 the test
// makes 16450 checks.
module tb_cv_mac_array_large;
  import cv_pkg::*;

  localparam int unsigned N  = 32;
  localparam int unsigned AW = acc_width(N);

  logic clk = 0;
  always #5 clk = ~clk;

  int checks, failures;
  logic done;

  logic rst_n, load;
  logic [7:0] w_in [N];
  logic [7:0] c_in;
  logic [7:0] a_in [N];
  logic [7:0] b_in [N];
  logic [AW-1:0] g_out [N];

  cv_mac_array #(.N(N), .M(M_DEF)) dut (
    .clk(clk), .rst_n(rst_n), .load(load), .w_in(w_in), .c_in(c_in),
    .a_in(a_in), .b_in(b_in), .g_out(g_out)
  );

  cv_array_tester #(.N(N), .M(M_DEF), .NV(128), .PHASES(2)) tester (
    .clk(clk), .rst_n(rst_n), .load(load), .w_in(w_in), .c_in(c_in),
    .a_in(a_in), .b_in(b_in), .g_out(g_out),
    .done(done), .checks(checks), .failures(failures)
  );

  initial begin
    repeat (5000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    // The tester clears `done` at time 0; look at it only after the first clock.
    @(posedge clk);
    wait (done);
    @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
