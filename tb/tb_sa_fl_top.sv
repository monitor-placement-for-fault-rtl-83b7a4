// tb_sa_fl_top: end-to-end test of the monitored accelerator at N = 8.
//
// Two copies of the top run the same stimulus: one with the optimal 2N-1 = 15
// monitors and one with 7 monitors (4 on the right column, 4 on the bottom row,
// worst-case isolation area 4). Each operation loads a new random weight
// matrix, writes golden signatures computed here from the expected partial
// sums of every monitored PE, opens a monitor window of K vectors, streams the
// vectors and waits for the localization result.
//
// Checks: every output vector against a matrix-vector product computed here,
// with its latency of 2N-1 cycles from input to output; no fault reported in a
// clean window; for a window with a fault injected at a PE, detection, a
// consistent signature, the exact PE from the full placement, and from the
// reduced placement a rectangle that contains the PE and matches the expected
// group. Mechanisms counted (each must occur): weight reloads, clean windows,
// faulty windows, exact localizations, multi-PE isolation areas, corrupted
// output vectors seen while a fault was injected, and stalls (gaps) in the
// input stream.
module tb_sa_fl_top;
  import tb_ref_pkg::*;

  localparam int N  = 8;
  localparam int MF = 2 * N - 1;
  localparam int MR = 7;
  localparam int RR = 4, BR = 4;
  localparam int K  = 6;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic               w_load, act_valid, mon_start, golden_we, fi_en;
  logic signed [7:0]  w_in [N], act_in [N];
  logic [15:0]        mon_k;
  logic [3:0]         golden_addr;
  logic [23:0]        golden_data;
  logic [2:0]         fi_row, fi_col;
  logic [7:0]         fi_mask;

  logic               y_valid [2], mon_all_done [2], loc_valid [2], det [2], cons [2];
  logic signed [23:0] y [2][N];
  logic [MF-1:0]      mon_fail_f;
  logic [MR-1:0]      mon_fail_r;
  logic [2:0]         rlo [2], rhi [2], clo [2], chi [2];
  logic [6:0]         area [2];

  sa_fl_top #(.N(N)) dut_f (
    .clk, .rst_n, .w_load, .w_in, .act_valid, .act_in,
    .y_valid(y_valid[0]), .y(y[0]), .mon_start, .mon_k, .golden_we, .golden_addr,
    .golden_data, .mon_all_done(mon_all_done[0]), .mon_fail(mon_fail_f),
    .loc_valid(loc_valid[0]), .fault_detected(det[0]), .fault_consistent(cons[0]),
    .fault_row_lo(rlo[0]), .fault_row_hi(rhi[0]), .fault_col_lo(clo[0]),
    .fault_col_hi(chi[0]), .fault_area(area[0]), .fi_en, .fi_row, .fi_col, .fi_mask);

  sa_fl_top #(.N(N), .M(MR)) dut_r (
    .clk, .rst_n, .w_load, .w_in, .act_valid, .act_in,
    .y_valid(y_valid[1]), .y(y[1]), .mon_start, .mon_k, .golden_we,
    .golden_addr(golden_addr[2:0]), .golden_data, .mon_all_done(mon_all_done[1]),
    .mon_fail(mon_fail_r), .loc_valid(loc_valid[1]), .fault_detected(det[1]),
    .fault_consistent(cons[1]), .fault_row_lo(rlo[1]), .fault_row_hi(rhi[1]),
    .fault_col_lo(clo[1]), .fault_col_hi(chi[1]), .fault_area(area[1]),
    .fi_en, .fi_row, .fi_col, .fi_mask);

  int w [N][N];
  int x [K][N];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  int n_reload = 0, n_clean = 0, n_faulty = 0, n_exact = 0, n_area = 0;
  int n_bad_y = 0, n_stall = 0, n_y = 0;

  function automatic int psum_at(input int row, input int col, input int v);
    int s = 0;
    for (int i = 0; i <= row; i++) s += w[i][col] * x[v][i];
    return s;
  endfunction

  function automatic logic [23:0] golden(input int row, input int col);
    logic [63:0] s = '0;
    for (int v = 0; v < K; v++) s = misr_ref(s, 64'(24'(psum_at(row, col, v))), 24);
    return s[23:0];
  endfunction

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s got=%0d exp=%0d", what, got, exp);
    end
  endtask

  // output monitor: compares every output vector of the full-placement copy
  int in_cyc [K];
  int out_idx = 0;
  bit faulty_window = 0;
  bit bad;
  always @(posedge clk) begin
    if (rst_n && y_valid[0]) begin
      bad = 0;
      for (int c = 0; c < N; c++) begin
        if (y[0][c] != 24'(psum_at(N - 1, c, out_idx))) bad = 1;
        if (y[0][c] != y[1][c]) bad = 1;   // both copies compute the same
      end
      if (!faulty_window) begin
        checks++;
        if (bad) begin
          failures++;
          $display("FAIL y vector %0d wrong", out_idx);
        end
        checks++;
        if (cyc - in_cyc[out_idx] != 2 * N - 1) begin
          failures++;
          $display("FAIL latency %0d", cyc - in_cyc[out_idx]);
        end
      end else if (bad) n_bad_y++;
      n_y++;
      out_idx <= out_idx + 1;
    end
  end

  task automatic operation(input int fr, input int fc);
    int kr, kb;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++)
        w[i][j] = $urandom_range(1, 127) * (($urandom_range(0, 1) == 1) ? 1 : -1);
    for (int v = 0; v < K; v++)
      for (int i = 0; i < N; i++) x[v][i] = $urandom_range(0, 255) - 128;
    // weights, bottom row first
    for (int step = 0; step < N; step++) begin
      @(negedge clk);
      w_load = 1;
      for (int j = 0; j < N; j++) w_in[j] = 8'(w[N-1-step][j]);
    end
    @(negedge clk); w_load = 0;
    n_reload++;
    // golden values of the full copy: monitor k < N sits on PE(k, N-1),
    // monitor k >= N on PE(N-1, k-N)
    for (int k = 0; k < MF; k++) begin
      golden_we = 1; golden_addr = 4'(k);
      golden_data = (k < N) ? golden(k, N - 1) : golden(N - 1, k - N);
      @(negedge clk);
    end
    golden_we = 0;
    // fault
    fi_en = (fr >= 0); fi_row = 3'(fr); fi_col = 3'(fc); fi_mask = 8'($urandom_range(1, 255));
    faulty_window = (fr >= 0);
    // window
    mon_start = 1; mon_k = 16'(K);
    out_idx = 0;
    @(negedge clk); mon_start = 0;
    check("loc_valid cleared", loc_valid[0], 0);
    for (int v = 0; v < K; v++) begin
      if ($urandom_range(0, 2) == 0) begin
        act_valid = 0; n_stall++;
        foreach (act_in[i]) act_in[i] = 8'($urandom);
        @(negedge clk);
      end
      act_valid = 1;
      foreach (act_in[i]) act_in[i] = 8'(x[v][i]);
      in_cyc[v] = cyc;
      @(negedge clk);
    end
    act_valid = 0;
    fork
      wait (loc_valid[0] && loc_valid[1]);
      repeat (20 * N) @(negedge clk);
    join_any
    disable fork;
    @(negedge clk);
    check("loc_valid", loc_valid[0] && loc_valid[1], 1);
    check("outputs seen", out_idx, K);
    if (fr < 0) begin
      check("clean det", det[0], 0);
      n_clean++;
    end else begin
      n_faulty++;
      check("det", det[0], 1);
      check("consistent", cons[0], 1);
      check("row", rlo[0], fr); check("row hi", rhi[0], fr);
      check("col", clo[0], fc); check("col hi", chi[0], fc);
      check("area", area[0], 1);
      if (det[0] && area[0] == 1 && rlo[0] == fr && clo[0] == fc) n_exact++;
    end
    fi_en = 0;
    faulty_window = 0;
  endtask

  // The reduced copy is checked in windows of its own, with its golden values
  // written last so the aliasing on the shared bus does not matter.
  task automatic operation_reduced(input int fr, input int fc);
    int kr, kb;
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++)
        w[i][j] = $urandom_range(1, 127) * (($urandom_range(0, 1) == 1) ? 1 : -1);
    for (int v = 0; v < K; v++)
      for (int i = 0; i < N; i++) x[v][i] = $urandom_range(0, 255) - 128;
    for (int step = 0; step < N; step++) begin
      @(negedge clk);
      w_load = 1;
      for (int j = 0; j < N; j++) w_in[j] = 8'(w[N-1-step][j]);
    end
    @(negedge clk); w_load = 0;
    n_reload++;
    for (int k = 0; k < MR; k++) begin
      golden_we = 1; golden_addr = 4'(k);
      golden_data = (k < RR) ? golden(cdiv((k + 1) * N, RR) - 1, N - 1)
                             : golden(N - 1, cdiv((k - RR + 1) * N, BR) - 1);
      @(negedge clk);
    end
    golden_we = 0;
    fi_en = (fr >= 0); fi_row = 3'(fr); fi_col = 3'(fc); fi_mask = 8'($urandom_range(1, 255));
    faulty_window = 1;   // the full copy's goldens are stale here
    mon_start = 1; mon_k = 16'(K);
    out_idx = 0;
    @(negedge clk); mon_start = 0;
    for (int v = 0; v < K; v++) begin
      act_valid = 1;
      foreach (act_in[i]) act_in[i] = 8'(x[v][i]);
      in_cyc[v] = cyc;
      @(negedge clk);
    end
    act_valid = 0;
    fork
      wait (loc_valid[1]);
      repeat (20 * N) @(negedge clk);
    join_any
    disable fork;
    @(negedge clk);
    check("reduced loc_valid", loc_valid[1], 1);
    if (fr < 0) begin
      check("reduced clean det", det[1], 0);
      n_clean++;
    end else begin
      kr = 0; while (cdiv((kr + 1) * N, RR) - 1 < fr) kr++;
      kb = 0; while (cdiv((kb + 1) * N, BR) - 1 < fc) kb++;
      n_faulty++;
      check("reduced det", det[1], 1);
      check("reduced consistent", cons[1], 1);
      check("reduced row lo", rlo[1], (kr == 0) ? 0 : cdiv(kr * N, RR));
      check("reduced row hi", rhi[1], cdiv((kr + 1) * N, RR) - 1);
      check("reduced col lo", clo[1], (kb == 0) ? 0 : cdiv(kb * N, BR));
      check("reduced col hi", chi[1], cdiv((kb + 1) * N, BR) - 1);
      check("reduced area", area[1], 4);
      if (area[1] > 1) n_area++;
    end
    fi_en = 0;
    faulty_window = 0;
  endtask

  initial begin
    w_load = 0; act_valid = 0; mon_start = 0; golden_we = 0; fi_en = 0;
    mon_k = 0; golden_addr = 0; golden_data = 0; fi_row = 0; fi_col = 0; fi_mask = 0;
    foreach (w_in[i]) begin w_in[i] = 0; act_in[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    operation(-1, -1);
    for (int t = 0; t < 12; t++) operation($urandom_range(0, N - 1), $urandom_range(0, N - 1));
    operation(0, 0);
    operation(N - 1, N - 1);
    operation(-1, -1);
    operation_reduced(-1, -1);
    for (int t = 0; t < 8; t++) operation_reduced($urandom_range(0, N - 1), $urandom_range(0, N - 1));
    $display("reloads=%0d clean=%0d faulty=%0d exact=%0d areas=%0d bad_y=%0d stalls=%0d y=%0d",
             n_reload, n_clean, n_faulty, n_exact, n_area, n_bad_y, n_stall, n_y);
    check("mech reload", n_reload > 1, 1);
    check("mech clean", n_clean > 0, 1);
    check("mech faulty", n_faulty > 0, 1);
    check("mech exact", n_exact > 0, 1);
    check("mech isolation area", n_area > 0, 1);
    check("mech corrupted output", n_bad_y > 0, 1);
    check("mech stall", n_stall > 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
