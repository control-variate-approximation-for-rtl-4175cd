// tb_cv_mac_array: end-to-end test of the control-variate MAC array at reduced sizes.
//
// Three arrays run side by side: 8x8 with m = 1, 2 and 3 (the three perforation levels
// evaluated for this design). Each is driven by cv_array_tester through two weight sets,
// each loaded through the shift chains and followed by a skewed stream of activation
// vectors; every row result is checked in the exact clock it becomes valid. A watchdog
// ends the run with a failure if the testers do not finish.
module tb_cv_mac_array;

  localparam int unsigned N = 8;

  logic clk = 0;
  always #5 clk = ~clk;

  int checks [3];
  int failures [3];
  logic done [3];

  for (genvar q = 0; q < 3; q++) begin : g_cfg
    localparam int unsigned M  = q + 1;
    localparam int unsigned AW = cv_pkg::acc_width(N);

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

    cv_array_tester #(.N(N), .M(M), .NV(40), .PHASES(3)) tester (
      .clk(clk), .rst_n(rst_n), .load(load), .w_in(w_in), .c_in(c_in),
      .a_in(a_in), .b_in(b_in), .g_out(g_out),
      .done(done[q]), .checks(checks[q]), .failures(failures[q])
    );
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks[0] + checks[1] + checks[2],
             failures[0] + failures[1] + failures[2] + 1);
    $finish;
  end

  initial begin
    // The testers clear `done` at time 0; look at it only after the first clock.
    @(posedge clk);
    wait (done[0] && done[1] && done[2]);
    @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks[0] + checks[1] + checks[2],
             failures[0] + failures[1] + failures[2]);
    $finish;
  end

endmodule
