// loc_checker: drives one fault_localizer instance through every single-fault
// signature of an N x N array and a few impossible ones, and counts checks.
//
// The monitor positions are recomputed here from the even-spacing rule
// (k-th of c monitors at ceil(k*N/c)) with the split R/B given by the parent.
// For a fault at (fr,fc) the expected row range is the gap between the
// right-column monitor before the first one at or below fr and that monitor;
// the column range likewise. Result timing: one cycle after eval.
module loc_checker #(
  parameter int N = 4,
  parameter int M = 7,
  parameter int R = 4,
  parameter int B = 4
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output int   n_exact,
  output int   n_area,
  output int   n_incons,
  output int   worst_area,
  output bit   finished
);
  import tb_ref_pkg::*;
  localparam int PW = (N <= 2) ? 1 : $clog2(N);
  localparam int AW = $clog2(N * N + 1);

  logic          clear, eval, valid, detected, consistent;
  logic [M-1:0]  mon_fail;
  logic [PW-1:0] row_lo, row_hi, col_lo, col_hi;
  logic [AW-1:0] area;

  fault_localizer #(.N(N), .M(M)) dut (.*);

  function automatic int rpos(input int k); return cdiv((k + 1) * N, R) - 1; endfunction
  function automatic int bpos(input int k); return cdiv((k + 1) * N, B) - 1; endfunction

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL N=%0d M=%0d %s got=%0d exp=%0d", N, M, what, got, exp);
    end
  endtask

  task automatic apply(input logic [M-1:0] f);
    @(negedge clk);
    mon_fail = f; eval = 1;
    @(negedge clk);
    eval = 0; mon_fail = '0;   // result must stay registered
    check("valid", valid, 1);
    clear = 1;
    @(negedge clk);
    clear = 0;
    check("cleared", valid, 0);
  endtask

  int max_area;

  initial begin
    checks = 0; failures = 0; n_exact = 0; n_area = 0; n_incons = 0; finished = 0;
    worst_area = 0;
    clear = 0; eval = 0; mon_fail = '0;
    max_area = 0;
    @(posedge rst_n);
    for (int fr = 0; fr < N; fr++) begin
      for (int fc = 0; fc < N; fc++) begin
        logic [M-1:0] f;
        int kr, kb, elo_r, ehi_r, elo_c, ehi_c;
        f = '0;
        for (int k = 0; k < R; k++) f[k] = (fr <= rpos(k));
        for (int k = 0; k < B - 1; k++) f[R + k] = (fc <= bpos(k));
        kr = 0; while (rpos(kr) < fr) kr++;
        kb = 0; while (bpos(kb) < fc) kb++;
        elo_r = (kr == 0) ? 0 : rpos(kr - 1) + 1; ehi_r = rpos(kr);
        elo_c = (kb == 0) ? 0 : bpos(kb - 1) + 1; ehi_c = bpos(kb);
        apply(f);
        check("detected", detected, 1);
        check("consistent", consistent, 1);
        check("row_lo", row_lo, elo_r);
        check("row_hi", row_hi, ehi_r);
        check("col_lo", col_lo, elo_c);
        check("col_hi", col_hi, ehi_c);
        check("area", area, (ehi_r - elo_r + 1) * (ehi_c - elo_c + 1));
        check("contains", (fr >= row_lo) && (fr <= row_hi) && (fc >= col_lo) && (fc <= col_hi), 1);
        if (area == 1) n_exact++; else n_area++;
        if (int'(area) > max_area) max_area = int'(area);
      end
    end
    // worst case equals the heuristic's promise
    check("max area", max_area, cdiv(N, R) * cdiv(N, B));
    // no monitor fired
    apply('0);
    check("clean detected", detected, 0);
    check("clean consistent", consistent, 1);
    // impossible signatures for a single fault
    if (R > 1) begin
      logic [M-1:0] f;
      f = '0; f[0] = 1'b1;         // top right monitor without the corner
      apply(f);
      check("non-thermometer detected", detected, 1);
      check("non-thermometer consistent", consistent, 0);
      n_incons++;
    end
    if (B > 1) begin
      logic [M-1:0] f;
      f = '0; f[R] = 1'b1;         // a bottom monitor without the corner
      apply(f);
      check("bottom-only consistent", consistent, 0);
      n_incons++;
    end
    worst_area = max_area;
    finished = 1;
  end
endmodule
