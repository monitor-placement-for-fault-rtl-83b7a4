// systolic_array: N x N weight-stationary PE grid with embedded boundary monitors.
//
// PE(r,c) (0-based here, PE(r+1,c+1) in 1-based terms) holds weight w[r][c].
// Activations enter each row at the left and move one PE right per cycle;
// partial sums start at zero above the top row and move one PE down per cycle,
// so column c's bottom output is sum_r w[r][c] * x[r] when the activations are
// skewed by one cycle per row (done outside, in the top). Weights are loaded by
// shifting them in at the top of every column for N cycles; the word loaded
// first ends up in the bottom row.
//
// Monitors (pe_monitor) are attached only to PEs on the rightmost column and
// on the bottom row, the placement that localizes any single faulty PE. With
// the default M = 2N-1 every boundary PE is monitored. With fewer monitors the
// mpop_pkg heuristic decides how many sit on each border (R on the right column
// including the corner, B on the bottom row including the corner, M = R+B-1)
// and spaces them evenly. Monitor numbering: 0..R-1 are the right-column
// monitors from top to bottom (R-1 is the corner PE(N-1,N-1)); R..M-1 are the
// bottom-row monitors from left to right, corner excluded.
//
// All monitors share start, K and the golden-value write bus (golden_addr picks
// the monitor). Each samples its own PE's psum/valid, so every monitor sees the
// same K partial sums of its PE whatever its skew.
//
// Fault injection (this design's own test hook): fi_row_sel and fi_col_sel are
// one-hot selects; the PE at their crossing XORs fi_mask into its activation.
module systolic_array
  import sa_pkg::*;
#(
  parameter int unsigned N  = N_DEFAULT,
  parameter int unsigned M  = 2 * N - 1,
  parameter int unsigned DW = DATA_W,
  parameter int unsigned AW = ACC_W,
  parameter int unsigned CW = CNT_W,
  localparam int unsigned MI_W = idx_w(M)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // weights
  input  logic                 w_load,
  input  logic signed [DW-1:0] w_in      [N],
  // activations, already skewed (row r delayed r cycles)
  input  logic                 act_valid [N],
  input  logic signed [DW-1:0] act_in    [N],
  // bottom-row partial sums (column c delayed c cycles)
  output logic signed [AW-1:0] psum_out  [N],
  output logic                 psum_valid[N],
  // fault injection
  input  logic        [N-1:0]  fi_row_sel,
  input  logic        [N-1:0]  fi_col_sel,
  input  logic        [DW-1:0] fi_mask,
  // monitors
  input  logic                 mon_start,
  input  logic        [CW-1:0] mon_k,
  input  logic                 golden_we,
  input  logic      [MI_W-1:0] golden_addr,
  input  logic        [AW-1:0] golden_data,
  output logic        [M-1:0]  mon_done,
  output logic        [M-1:0]  mon_fail
);

  localparam mpop_pkg::split_t SPLIT = mpop_pkg::heuristic(N, M);
  localparam int unsigned R = SPLIT.right;
  localparam int unsigned B = SPLIT.bottom;

  // M must be what the heuristic places: 1 .. 2N-1
  if (R + B - 1 != M) begin : g_bad_m
    $error("systolic_array: M must be between 1 and 2N-1");
  end

  logic signed [DW-1:0] w_q   [N+1][N];
  logic signed [DW-1:0] act   [N][N+1];
  logic                 actv  [N][N+1];
  logic signed [AW-1:0] psum  [N+1][N];
  logic                 psumv [N+1][N];

  for (genvar c = 0; c < N; c++) begin : g_top
    assign w_q[0][c]   = w_in[c];
    assign psum[0][c]  = '0;
    assign psumv[0][c] = 1'b0;
    assign psum_out[c]   = psum[N][c];
    assign psum_valid[c] = psumv[N][c];
  end

  for (genvar r = 0; r < N; r++) begin : g_row
    assign act[r][0]  = act_in[r];
    assign actv[r][0] = act_valid[r];
    for (genvar c = 0; c < N; c++) begin : g_col
      pe #(.DW(DW), .AW(AW)) u_pe (
        .clk            (clk),
        .rst_n          (rst_n),
        .w_load         (w_load),
        .w_in           (w_q[r][c]),
        .w_out          (w_q[r+1][c]),
        .act_valid_in   (actv[r][c]),
        .act_in         (act[r][c]),
        .act_valid_out  (actv[r][c+1]),
        .act_out        (act[r][c+1]),
        .psum_in        (psum[r][c]),
        .psum_out       (psum[r+1][c]),
        .psum_valid_out (psumv[r+1][c]),
        .fi_en          (fi_row_sel[r] & fi_col_sel[c]),
        .fi_mask        (fi_mask)
      );
    end
  end

  // Monitors: right column (corner included), then bottom row (corner excluded).
  for (genvar k = 0; k < M; k++) begin : g_mon
    localparam int ROW = (k < R) ? mpop_pkg::mon_pos(N, R, k + 1) - 1 : N - 1;
    localparam int COL = (k < R) ? N - 1 : mpop_pkg::mon_pos(N, B, k - R + 1) - 1;
    pe_monitor #(.W(AW), .CW(CW)) u_mon (
      .clk         (clk),
      .rst_n       (rst_n),
      .start       (mon_start),
      .k_cycles    (mon_k),
      .golden_we   (golden_we && (golden_addr == MI_W'(k))),
      .golden_data (golden_data),
      .psum_valid  (psumv[ROW+1][COL]),
      .psum        (psum[ROW+1][COL]),
      .busy        (),
      .done        (mon_done[k]),
      .fail        (mon_fail[k]),
      .sig         ()
    );
  end

endmodule
