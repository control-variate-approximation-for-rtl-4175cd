// cv_mac_array: N x (N+1) systolic MAC array with control-variate approximation.
//
// Rows 0..N-1 each hold the N weights of one filter; columns 0..N-1 are MAC* units,
// column N is a MAC+ unit. Activations enter at the top of every MAC* column and move
// down one row per clock. The partial sum S (seeded with the bias bits B[7:m]) and the
// perforated-bit sum X (seeded with 0) move right one column per clock. At the end of the
// row the MAC+ unit adds the control variate V = C * sumX_N to {sum_N, B[m-1:0]} and
// drives the row's result G* on g_out[r].
//
//   G*[r] = B[r] + sum_j W[r][j] * A_j  -  sum_j A_j[m-1:0] * (W[r][j] - C[r])
//
// Loading (stationary weights): while `load` is high the MAC* weight registers of each row
// form a shift register fed from w_in[r], and the MAC+ C registers form a shift register
// down the last column fed from c_in. N load cycles fill the array: in load cycle k
// present W[r][N-1-k] on w_in[r] and C[N-1-k] on c_in. Registers hold while `load` is low.
//
// Streaming (skewed, as in any systolic array): for an input vector presented so that
// column j sees A_j on a_in[j] in the cycle before clock edge t0 + j, row r must see its
// bias B[r] on b_in[r] in the cycle before edge t0 + r. The result of row r is then valid
// on g_out[r] after edge t0 + r + N, and one new vector can enter per clock.
// The low bias bits B[r][m-1:0] travel to the MAC+ unit through an N-stage delay line of
// m bits per row, keeping them aligned with the row's partial sum.
//
// What follows the published design: the MAC*/MAC+ arithmetic, the widths, the column of
// MAC+ units, the flow directions (activations down, weights and partial sums along the
// rows, C down the last column) and the one-cycle MAC+ overhead. This design's own
// choices: the load protocol, the bias delay line, the input skew convention and an
// active-low asynchronous reset that clears every register.
module cv_mac_array #(
  parameter int unsigned N = cv_pkg::N_DEF,
  parameter int unsigned M = cv_pkg::M_DEF,
  localparam int unsigned AW = cv_pkg::acc_width(N)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  load,
  input  logic [cv_pkg::DW-1:0] w_in [N],
  input  logic [cv_pkg::DW-1:0] c_in,
  input  logic [cv_pkg::DW-1:0] a_in [N],
  input  logic [cv_pkg::DW-1:0] b_in [N],
  output logic [AW-1:0]         g_out [N]
);
  import cv_pkg::*;

  localparam int unsigned SW = AW - M;
  localparam int unsigned XW = x_width(N, M);

  // Inter-unit nets. Column index N is the output of the last MAC* of a row;
  // row index N is the bottom edge of a column.
  logic [DW-1:0] a_net [N+1][N];    // [row][col], row 0 = top inputs
  logic [DW-1:0] w_net [N][N+1];    // [row][col], col 0 = left inputs
  logic [SW-1:0] s_net [N][N+1];
  logic [XW-1:0] x_net [N][N+1];
  logic [DW-1:0] c_net [N+1];       // down the MAC+ column

  for (genvar j = 0; j < N; j++) begin : g_top
    assign a_net[0][j] = a_in[j];
  end

  assign c_net[0] = c_in;

  for (genvar r = 0; r < N; r++) begin : g_row
    // Row inputs: weights, bias high bits as sum_0, sumX_0 = 0.
    assign w_net[r][0] = w_in[r];
    assign s_net[r][0] = SW'(b_in[r][DW-1:M]);
    assign x_net[r][0] = '0;

    for (genvar j = 0; j < N; j++) begin : g_col
      mac_star #(.N(N), .M(M)) u_mac (
        .clk   (clk),
        .rst_n (rst_n),
        .load  (load),
        .a_in  (a_net[r][j]),
        .w_in  (w_net[r][j]),
        .s_in  (s_net[r][j]),
        .x_in  (x_net[r][j]),
        .a_out (a_net[r+1][j]),
        .w_out (w_net[r][j+1]),
        .s_out (s_net[r][j+1]),
        .x_out (x_net[r][j+1])
      );
    end

    // B[m-1:0] delay line: N stages, so that it reaches the MAC+ input together with
    // sum_N (the MAC+ then registers both in the same clock).
    logic [M-1:0] b_dly [N];

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int k = 0; k < int'(N); k++) b_dly[k] <= '0;
      end else begin
        b_dly[0] <= b_in[r][M-1:0];
        for (int k = 1; k < int'(N); k++) b_dly[k] <= b_dly[k-1];
      end
    end

    mac_plus #(.N(N), .M(M)) u_plus (
      .clk     (clk),
      .rst_n   (rst_n),
      .load    (load),
      .c_in    (c_net[r]),
      .s_in    (s_net[r][N]),
      .b_lo_in (b_dly[N-1]),
      .x_in    (x_net[r][N]),
      .c_out   (c_net[r+1]),
      .g_out   (g_out[r])
    );
  end

  // Weights leaving the right edge of a row, activations leaving the bottom of a column
  // and C leaving the bottom of the MAC+ column are not used further.
  logic unused_edges;
  always_comb begin
    unused_edges = ^c_net[N];
    for (int k = 0; k < int'(N); k++) unused_edges = unused_edges ^ (^a_net[N][k]) ^ (^w_net[k][N]);
  end

endmodule
