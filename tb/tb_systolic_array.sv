// tb_systolic_array: self-checking test of the monitored PE grid (N = 6).
//
// Two arrays are tested side by side: one with every boundary PE monitored
// (M = 2N-1 = 11) and one with M = 5 monitors, which the placement heuristic
// splits into 3 on the right column and 3 on the bottom row (corner shared).
// For each trial the testbench loads random non-zero weights, streams K input
// vectors with the per-row skew, and checks every bottom-row partial sum against
// a matrix-vector product computed here, including its cycle of arrival (row
// skew + N cycles). Golden signatures for each monitor come from the reference
// MISR model over the partial sums of the monitored PE. A clean trial must
// leave every monitor passing; a trial with a fault injected at PE(fr,fc) must
// make exactly the monitors at or below and right of it fail (the coverage
// table of the placement analysis).
module tb_systolic_array;
  import tb_ref_pkg::*;

  localparam int N  = 6;
  localparam int MF = 2 * N - 1;
  localparam int MR = 5;
  localparam int RR = 3, BR = 3;     // split of MR = 5 worked out by hand
  localparam int K  = 5;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic               w_load, mon_start, golden_we;
  logic signed [7:0]  w_in [N];
  logic               act_valid [N];
  logic signed [7:0]  act_in [N];
  logic signed [23:0] psum_out [N], psum_out_r [N];
  logic               psum_valid [N], psum_valid_r [N];
  logic [N-1:0]       fi_row_sel, fi_col_sel;
  logic [7:0]         fi_mask;
  logic [15:0]        mon_k;
  logic [3:0]         golden_addr;
  logic [23:0]        golden_data;
  logic [MF-1:0]      mon_done, mon_fail;
  logic [MR-1:0]      mon_done_r, mon_fail_r;

  systolic_array #(.N(N), .M(MF)) dut (
    .clk, .rst_n, .w_load, .w_in, .act_valid, .act_in, .psum_out, .psum_valid,
    .fi_row_sel, .fi_col_sel, .fi_mask, .mon_start, .mon_k, .golden_we,
    .golden_addr, .golden_data, .mon_done, .mon_fail);

  systolic_array #(.N(N), .M(MR)) dut_r (
    .clk, .rst_n, .w_load, .w_in, .act_valid, .act_in, .psum_out(psum_out_r),
    .psum_valid(psum_valid_r), .fi_row_sel, .fi_col_sel, .fi_mask, .mon_start,
    .mon_k, .golden_we, .golden_addr(golden_addr[2:0]), .golden_data,
    .mon_done(mon_done_r), .mon_fail(mon_fail_r));

  int w [N][N];
  int x [K][N];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // monitor k of an array with r right / b bottom monitors -> 0-based PE
  function automatic void mon_loc(input int k, input int r, input int b,
                                  output int row, output int col);
    if (k < r) begin row = cdiv((k + 1) * N, r) - 1; col = N - 1; end
    else begin row = N - 1; col = cdiv((k - r + 1) * N, b) - 1; end
  endfunction

  // partial sum leaving PE(row,col) for vector v
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

  // capture bottom outputs with their cycle
  int got_y [K][N];
  int got_cyc [K][N];
  int got_n [N];
  always @(posedge clk) begin
    for (int c = 0; c < N; c++) begin
      if (psum_valid[c] && got_n[c] < K) begin
        got_y[got_n[c]][c]   <= psum_out[c];
        got_cyc[got_n[c]][c] <= cyc;
        got_n[c]             <= got_n[c] + 1;
      end
    end
  end

  int n_clean = 0, n_faulty = 0;

  task automatic trial(input int fr, input int fc);
    int start_cyc, row, col;
    bit exp;
    // weights: non-zero, loaded bottom row first
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        w[i][j] = $urandom_range(1, 127) * (($urandom_range(0, 1) == 1) ? 1 : -1);
      end
    for (int v = 0; v < K; v++)
      for (int i = 0; i < N; i++) x[v][i] = $urandom_range(0, 255) - 128;
    for (int step = 0; step < N; step++) begin
      @(negedge clk);
      w_load = 1;
      for (int j = 0; j < N; j++) w_in[j] = 8'(w[N-1-step][j]);
    end
    @(negedge clk); w_load = 0;
    // golden values
    for (int k = 0; k < MF; k++) begin
      mon_loc(k, N, N, row, col);
      golden_we = 1; golden_addr = 4'(k); golden_data = golden(row, col);
      @(negedge clk);
    end
    golden_we = 0;
    fi_row_sel = (fr >= 0) ? (N'(1) << fr) : '0;
    fi_col_sel = (fc >= 0) ? (N'(1) << fc) : '0;
    fi_mask    = 8'h01;
    mon_start = 1; mon_k = 16'(K);
    foreach (got_n[c]) got_n[c] = 0;
    @(negedge clk); mon_start = 0;
    start_cyc = cyc;
    // stream with skew: row i gets vector v at step v + i
    for (int t = 0; t < K + N; t++) begin
      for (int i = 0; i < N; i++) begin
        act_valid[i] = (t - i >= 0) && (t - i < K);
        act_in[i]    = act_valid[i] ? 8'(x[t - i][i]) : 8'($urandom);
      end
      @(negedge clk);
    end
    foreach (act_valid[i]) act_valid[i] = 0;
    repeat (2 * N + 4) @(negedge clk);
    // results
    if (fr < 0) begin
      for (int v = 0; v < K; v++)
        for (int c = 0; c < N; c++) begin
          check("y", got_y[v][c], 32'(signed'(24'(psum_at(N - 1, c, v)))));
          check("y cycle", got_cyc[v][c] - start_cyc, v + c + N);
        end
    end
    check("all done", &mon_done, 1);
    for (int k = 0; k < MF; k++) begin
      mon_loc(k, N, N, row, col);
      exp = (fr >= 0) && (fr <= row) && (fc <= col);
      check($sformatf("full mon %0d fail", k), mon_fail[k], exp);
    end
    if (fr < 0) n_clean++; else n_faulty++;
  endtask

  // The reduced array shares the golden write bus with the full one (its
  // addresses 0..MR-1 alias the full array's), so it is checked in trials of
  // its own.
  task automatic trial_reduced(input int fr, input int fc);
    int row, col;
    bit exp;
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
    for (int k = 0; k < MR; k++) begin
      mon_loc(k, RR, BR, row, col);
      golden_we = 1; golden_addr = 4'(k); golden_data = golden(row, col);
      @(negedge clk);
    end
    golden_we = 0;
    fi_row_sel = (fr >= 0) ? (N'(1) << fr) : '0;
    fi_col_sel = (fc >= 0) ? (N'(1) << fc) : '0;
    fi_mask    = 8'h10;
    mon_start = 1; mon_k = 16'(K);
    @(negedge clk); mon_start = 0;
    for (int t = 0; t < K + N; t++) begin
      for (int i = 0; i < N; i++) begin
        act_valid[i] = (t - i >= 0) && (t - i < K);
        act_in[i]    = act_valid[i] ? 8'(x[t - i][i]) : 8'($urandom);
      end
      @(negedge clk);
    end
    foreach (act_valid[i]) act_valid[i] = 0;
    repeat (2 * N + 4) @(negedge clk);
    check("reduced all done", &mon_done_r, 1);
    for (int k = 0; k < MR; k++) begin
      mon_loc(k, RR, BR, row, col);
      exp = (fr >= 0) && (fr <= row) && (fc <= col);
      check($sformatf("reduced mon %0d fail", k), mon_fail_r[k], exp);
    end
  endtask

  initial begin
    w_load = 0; mon_start = 0; golden_we = 0; mon_k = 0; golden_addr = 0; golden_data = 0;
    fi_row_sel = 0; fi_col_sel = 0; fi_mask = 0;
    foreach (w_in[i]) w_in[i] = 0;
    foreach (act_valid[i]) begin act_valid[i] = 0; act_in[i] = 0; end
    foreach (got_n[c]) got_n[c] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    trial(-1, -1);
    for (int fr = 0; fr < N; fr++)
      for (int fc = 0; fc < N; fc++) trial(fr, fc);
    trial(-1, -1);
    trial_reduced(-1, -1);
    for (int fr = 0; fr < N; fr++)
      for (int fc = 0; fc < N; fc++) trial_reduced(fr, fc);
    check("clean trials", n_clean, 2);
    check("faulty trials", n_faulty, N * N);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
