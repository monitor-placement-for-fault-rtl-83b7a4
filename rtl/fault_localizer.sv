// fault_localizer: turns the monitors' pass/fail signature into an isolation area.
//
// Under a single fault in PE(r,c), a right-column monitor at row i fires exactly
// when r <= i and a bottom-row monitor at column j fires exactly when c <= j, so
// each border reads as a thermometer code. The first firing right-column
// monitor k bounds the faulty row to (pos(k-1), pos(k)], the first firing
// bottom-row monitor bounds the column the same way. With the default 2N-1
// monitors both ranges are one wide and the faulty PE is named exactly; with
// fewer monitors the result is the rectangle of PEs that cannot be told apart
// (the isolation area), whose size is also reported.
//
// Interface: mon_fail uses the monitor numbering of systolic_array (0..R-1 right
// column top to bottom with the corner last, R..M-1 bottom row left to right
// without the corner). A one-cycle eval pulse registers a new result one cycle
// later, with valid held high until clear (a new check window) drops it; clear
// wins over eval. Rows and columns are 0-based.
// detected is low when no monitor fired. consistent is low when a border's
// flags are not a thermometer code or only one border fired, which a single
// fault cannot produce (several faults, or two errors cancelling in a MISR).
//
// Follows the paper: the coverage model (a fault is seen by every monitor at or
// below and right of it), the signature-to-PE mapping of the boundary placement
// and the grouping of PEs by signature. This design's own choices: the
// first-firing-monitor decoding, the rectangle output and the consistency flag.
module fault_localizer
  import sa_pkg::*;
#(
  parameter int unsigned N = N_DEFAULT,
  parameter int unsigned M = 2 * N - 1,
  localparam int unsigned PW = idx_w(N),
  localparam int unsigned AREA_W = $clog2(N * N + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic              eval,
  input  logic [M-1:0]      mon_fail,
  output logic              valid,
  output logic              detected,
  output logic              consistent,
  output logic [PW-1:0]     row_lo,
  output logic [PW-1:0]     row_hi,
  output logic [PW-1:0]     col_lo,
  output logic [PW-1:0]     col_hi,
  output logic [AREA_W-1:0] area
);

  localparam mpop_pkg::split_t SPLIT = mpop_pkg::heuristic(N, M);
  localparam int unsigned R = SPLIT.right;
  localparam int unsigned B = SPLIT.bottom;

  // 0-based row/column of each border monitor, and the first row/column of
  // the group that ends at it.
  logic [PW-1:0] rpos [R];
  logic [PW-1:0] rlo  [R];
  logic [PW-1:0] bpos [B];
  logic [PW-1:0] blo  [B];
  logic [R-1:0]  rflag;
  logic [B-1:0]  bflag;

  for (genvar k = 0; k < R; k++) begin : g_r
    assign rpos[k]  = PW'(mpop_pkg::mon_pos(N, R, k + 1) - 1);
    assign rlo[k]   = (k == 0) ? '0 : PW'(mpop_pkg::mon_pos(N, R, k));
    assign rflag[k] = mon_fail[k];
  end
  for (genvar k = 0; k < B; k++) begin : g_b
    assign bpos[k]  = PW'(mpop_pkg::mon_pos(N, B, k + 1) - 1);
    assign blo[k]   = (k == 0) ? '0 : PW'(mpop_pkg::mon_pos(N, B, k));
    assign bflag[k] = (k == B - 1) ? mon_fail[R-1] : mon_fail[R+k];
  end

  // first firing monitor on each border
  logic [idx_w(R)-1:0] kr;
  logic [idx_w(B)-1:0] kb;
  logic                any_r, any_b, therm_r, therm_b;

  always_comb begin
    kr = '0; any_r = 1'b0;
    for (int k = R - 1; k >= 0; k--) begin
      if (rflag[k]) begin kr = idx_w(R)'(k); any_r = 1'b1; end
    end
    kb = '0; any_b = 1'b0;
    for (int k = B - 1; k >= 0; k--) begin
      if (bflag[k]) begin kb = idx_w(B)'(k); any_b = 1'b1; end
    end
    // thermometer: every monitor from the first firing one onward fires
    therm_r = 1'b1;
    for (int k = 0; k < R; k++) begin
      if (k >= int'(kr) && !rflag[k]) therm_r = 1'b0;
    end
    therm_b = 1'b1;
    for (int k = 0; k < B; k++) begin
      if (k >= int'(kb) && !bflag[k]) therm_b = 1'b0;
    end
  end

  logic [PW-1:0] r_lo_n, r_hi_n, c_lo_n, c_hi_n;
  assign r_lo_n = rlo[kr];
  assign r_hi_n = rpos[kr];
  assign c_lo_n = blo[kb];
  assign c_hi_n = bpos[kb];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid      <= 1'b0;
      detected   <= 1'b0;
      consistent <= 1'b1;
      row_lo     <= '0;
      row_hi     <= '0;
      col_lo     <= '0;
      col_hi     <= '0;
      area       <= '0;
    end else if (clear) begin
      valid      <= 1'b0;
    end else if (eval) begin
      valid      <= 1'b1;
      detected   <= any_r | any_b;
      consistent <= (any_r == any_b) && (!any_r || (therm_r && therm_b));
      row_lo     <= r_lo_n;
      row_hi     <= r_hi_n;
      col_lo     <= c_lo_n;
      col_hi     <= c_hi_n;
      area       <= (any_r | any_b)
                    ? AREA_W'((32'(r_hi_n) - 32'(r_lo_n) + 1) * (32'(c_hi_n) - 32'(c_lo_n) + 1))
                    : '0;
    end
  end

endmodule
