// mpop_pkg: monitor placement for single-fault localization (elaboration time).
//
// A fault in PE(r,c) of a weight-stationary array corrupts every PE at or below
// row r and at or right of column c. A monitor placed at PE(i,N) on the right
// border therefore fires exactly when the faulty row is <= i, and a monitor at
// PE(N,j) on the bottom border fires exactly when the faulty column is <= j.
// With every right-border and bottom-border PE monitored (2N-1 monitors, the
// corner PE(N,N) shared) each PE gets a unique signature; this is the optimal
// placement. With fewer monitors m the heuristic splits them between the two
// borders and spaces them evenly, so that the worst-case isolation area (the
// number of PEs sharing one signature) is minimal among border placements:
//
//   m' = m - 1  (the corner monitor is always present)
//   for i = 1 .. floor(m'/2):  right = i + 1, bottom = m' - i + 1
//   area = ceil(N / right) * ceil(N / bottom),  keep the smallest
//
// The split loop and the area formula follow the paper's Algorithm 1. Choices of
// this design: m = 1 places only the corner and m = 2 places the corner plus one
// bottom monitor (the algorithm itself requires m > 2); splits needing more than
// N monitors on one border are skipped; the first minimum found wins a tie; the
// k-th of c monitors on a border of length N sits at 1-based position
// ceil(k*N/c), which makes every gap at most ceil(N/c) and puts the last monitor
// on the corner.
package mpop_pkg;

  typedef struct packed {
    int right;  // monitors on the rightmost column, corner included
    int bottom; // monitors on the bottom row, corner included
    int area;   // worst-case isolation area (PEs)
  } split_t;

  function automatic int ceil_div(input int a, input int b);
    return (a + b - 1) / b;
  endfunction

  // Algorithm 1: split m monitors between the right and bottom borders of an
  // n x n array.
  function automatic split_t heuristic(input int n, input int m);
    split_t best;
    int mp, r, b, a;
    if (m <= 1) begin
      best.right = 1; best.bottom = 1;
    end else if (m == 2) begin
      best.right = 1; best.bottom = 2;
    end else begin
      mp = m - 1;
      best.right = 0; best.bottom = 0;
      best.area  = n * n + 1;
      for (int i = 1; i <= mp / 2; i++) begin
        r = i + 1;
        b = mp - i + 1;
        if (r <= n && b <= n) begin
          a = ceil_div(n, r) * ceil_div(n, b);
          if (a < best.area) begin
            best.right = r; best.bottom = b; best.area = a;
          end
        end
      end
    end
    best.area = ceil_div(n, best.right) * ceil_div(n, best.bottom);
    return best;
  endfunction

  // 1-based position (row or column) of the k-th (1-based) of c monitors
  // evenly spaced along a border of length n.
  function automatic int mon_pos(input int n, input int c, input int k);
    return ceil_div(k * n, c);
  endfunction

endpackage
