// sa_fl_top: weight-stationary systolic-array accelerator with boundary PE
// monitors and single-fault localization.
//
// Datapath: an N x N array of PEs computes y[c] = sum_r w[r][c] * x[r] for one
// input vector x per cycle. Weights are shifted in at the top of every column
// (w_load high for N cycles, bottom row's weights first). Input vectors are
// presented unskewed on act_in/act_valid; an input skew buffer delays row r by
// r cycles, and an output de-skew buffer realigns the columns, so the result for
// a vector sampled at clock edge t appears on y/y_valid after edge t + 2N - 1.
//
// Integrity checking: M monitors (default 2N-1, every PE of the rightmost column
// and bottom row) each compress K partial sums of their PE into a MISR
// signature and compare it with a golden value written beforehand through
// golden_we/golden_addr/golden_data (monitor numbering as in systolic_array).
// mon_start begins a check window of mon_k partial sums per monitor; it must be
// pulsed before the first vector of the window enters. When every monitor is
// done, the localizer registers the signature and reports the isolation area:
// loc_valid, fault_detected, fault_consistent and the row/column range of PEs
// that may hold the fault (a single PE with 2N-1 monitors), plus its size.
// A new mon_start clears loc_valid; the result arrives two cycles after the
// last monitor finishes.
//
// Fault injection (this design's own test hook): with fi_en high, the PE at
// (fi_row, fi_col) XORs fi_mask into its incoming activation.
//
// Follows the paper: weight-stationary array, MISR monitors on the PEs of the
// right and bottom borders (optimal 2N-1 placement, Algorithm 1 split for
// fewer monitors), localization from monitor signatures, 256 x 256 array with
// 8-bit data and 24-bit partial sums. Own choices: the loading scheme, skew
// buffers, golden-value port, window handshake and fault-injection hook.
module sa_fl_top
  import sa_pkg::*;
#(
  parameter int unsigned N  = N_DEFAULT,
  parameter int unsigned M  = 2 * N - 1,
  parameter int unsigned DW = DATA_W,
  parameter int unsigned AW = ACC_W,
  parameter int unsigned CW = CNT_W,
  localparam int unsigned MI_W   = idx_w(M),
  localparam int unsigned PW     = idx_w(N),
  localparam int unsigned AREA_W = $clog2(N * N + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // weight loading
  input  logic                 w_load,
  input  logic signed [DW-1:0] w_in      [N],
  // input vectors
  input  logic                 act_valid,
  input  logic signed [DW-1:0] act_in    [N],
  // output vectors
  output logic                 y_valid,
  output logic signed [AW-1:0] y         [N],
  // monitor control
  input  logic                 mon_start,
  input  logic        [CW-1:0] mon_k,
  input  logic                 golden_we,
  input  logic      [MI_W-1:0] golden_addr,
  input  logic        [AW-1:0] golden_data,
  output logic                 mon_all_done,
  output logic        [M-1:0]  mon_fail,
  // localization result
  output logic                 loc_valid,
  output logic                 fault_detected,
  output logic                 fault_consistent,
  output logic        [PW-1:0] fault_row_lo,
  output logic        [PW-1:0] fault_row_hi,
  output logic        [PW-1:0] fault_col_lo,
  output logic        [PW-1:0] fault_col_hi,
  output logic    [AREA_W-1:0] fault_area,
  // fault injection
  input  logic                 fi_en,
  input  logic        [PW-1:0] fi_row,
  input  logic        [PW-1:0] fi_col,
  input  logic        [DW-1:0] fi_mask
);

  // ---------------- input skew ----------------
  logic          in_v      [N];
  logic [DW-1:0] in_d      [N];
  logic          sk_v      [N];
  logic [DW-1:0] sk_d      [N];
  logic signed [DW-1:0] sk_ds [N];

  for (genvar i = 0; i < N; i++) begin : g_in
    assign in_v[i]  = act_valid;
    assign in_d[i]  = act_in[i];
    assign sk_ds[i] = sk_d[i];
  end

  skew_buffer #(.LANES(N), .W(DW), .REVERSE(1'b0)) u_in_skew (
    .clk, .rst_n,
    .valid_in (in_v), .data_in (in_d),
    .valid_out(sk_v), .data_out(sk_d)
  );

  // ---------------- array ----------------
  logic signed [AW-1:0] col_psum [N];
  logic                 col_v    [N];
  logic [N-1:0]         row_sel, col_sel;
  logic [M-1:0]         mon_done;

  for (genvar i = 0; i < N; i++) begin : g_sel
    assign row_sel[i] = fi_en && (fi_row == PW'(i));
    assign col_sel[i] = fi_en && (fi_col == PW'(i));
  end

  systolic_array #(.N(N), .M(M), .DW(DW), .AW(AW), .CW(CW)) u_array (
    .clk, .rst_n,
    .w_load, .w_in,
    .act_valid  (sk_v),
    .act_in     (sk_ds),
    .psum_out   (col_psum),
    .psum_valid (col_v),
    .fi_row_sel (row_sel),
    .fi_col_sel (col_sel),
    .fi_mask,
    .mon_start, .mon_k,
    .golden_we, .golden_addr, .golden_data,
    .mon_done, .mon_fail
  );

  // ---------------- output de-skew ----------------
  logic [AW-1:0] ds_in  [N];
  logic [AW-1:0] ds_out [N];
  logic          ds_v   [N];

  for (genvar i = 0; i < N; i++) begin : g_out
    assign ds_in[i] = col_psum[i];
    assign y[i]     = ds_out[i];
  end

  skew_buffer #(.LANES(N), .W(AW), .REVERSE(1'b1)) u_out_skew (
    .clk, .rst_n,
    .valid_in (col_v), .data_in (ds_in),
    .valid_out(ds_v),  .data_out(ds_out)
  );

  assign y_valid = ds_v[0];

  // ---------------- localization ----------------
  logic done_q;
  assign mon_all_done = &mon_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) done_q <= 1'b0;
    else        done_q <= mon_all_done;
  end

  fault_localizer #(.N(N), .M(M)) u_loc (
    .clk, .rst_n,
    .clear      (mon_start),
    .eval       (mon_all_done && !done_q),
    .mon_fail,
    .valid      (loc_valid),
    .detected   (fault_detected),
    .consistent (fault_consistent),
    .row_lo     (fault_row_lo),
    .row_hi     (fault_row_hi),
    .col_lo     (fault_col_lo),
    .col_hi     (fault_col_hi),
    .area       (fault_area)
  );

endmodule
