// tb_sa_fl_top_large: complete operations of the accelerator on a 32 x 32
// array with all 63 boundary PEs monitored. The default 256 x 256 tile has the
// same structure, but a Verilator build of it (65,536 PEs) takes hours.
//
// Each operation loads a random non-zero weight matrix (256 cycles), writes the
// 511 golden signatures computed here, opens a monitor window of K vectors,
// streams them and waits for the localization result. The first operation is
// clean: every output vector is checked against a matrix-vector product
// computed here, with its 2N-1 cycle latency, and no fault may be reported.
// The second injects a fault into PE(21,9) and checks that the monitors name
// exactly that PE.
module tb_sa_fl_top_large;
  import tb_ref_pkg::*;

  localparam int N  = 32;
  localparam int M  = 2 * N - 1;
  localparam int K  = 3;
  localparam int PW = $clog2(N);
  localparam int MW = $clog2(M);

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic               w_load, act_valid, mon_start, golden_we, fi_en;
  logic signed [7:0]  w_in [N], act_in [N];
  logic [15:0]        mon_k;
  logic [MW-1:0]      golden_addr;
  logic [23:0]        golden_data;
  logic [PW-1:0]      fi_row, fi_col;
  logic [7:0]         fi_mask;
  logic               y_valid, mon_all_done, loc_valid, det, cons;
  logic signed [23:0] y [N];
  logic [M-1:0]       mon_fail;
  logic [PW-1:0]      rlo, rhi, clo, chi;
  logic [$clog2(N*N+1)-1:0] area;

  sa_fl_top #(.N(N)) dut (
    .clk, .rst_n, .w_load, .w_in, .act_valid, .act_in, .y_valid, .y,
    .mon_start, .mon_k, .golden_we, .golden_addr, .golden_data, .mon_all_done,
    .mon_fail, .loc_valid, .fault_detected(det), .fault_consistent(cons),
    .fault_row_lo(rlo), .fault_row_hi(rhi), .fault_col_lo(clo), .fault_col_hi(chi),
    .fault_area(area), .fi_en, .fi_row, .fi_col, .fi_mask);

  int w [N][N];
  int x [K][N];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

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

  int in_cyc [K];
  int out_idx = 0;
  bit check_y = 0;
  int bad;
  always @(posedge clk) begin
    if (rst_n && y_valid) begin
      if (check_y) begin
        bad = 0;
        for (int c = 0; c < N; c++)
          if (y[c] != 24'(psum_at(N - 1, c, out_idx))) bad++;
        checks++;
        if (bad != 0) begin
          failures++;
          $display("FAIL y vector %0d: %0d columns wrong", out_idx, bad);
        end
        checks++;
        if (cyc - in_cyc[out_idx] != 2 * N - 1) begin
          failures++;
          $display("FAIL latency %0d", cyc - in_cyc[out_idx]);
        end
      end
      out_idx <= out_idx + 1;
    end
  end

  task automatic operation(input int fr, input int fc);
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
    for (int k = 0; k < M; k++) begin
      golden_we = 1; golden_addr = MW'(k);
      golden_data = (k < N) ? golden(k, N - 1) : golden(N - 1, k - N);
      @(negedge clk);
    end
    golden_we = 0;
    fi_en = (fr >= 0); fi_row = PW'(fr); fi_col = PW'(fc); fi_mask = 8'h04;
    check_y = (fr < 0);
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
      wait (loc_valid);
      repeat (4 * N) @(negedge clk);
    join_any
    disable fork;
    @(negedge clk);
    check("loc_valid", loc_valid, 1);
    check("outputs seen", out_idx, K);
    if (fr < 0) begin
      check("clean: detected", det, 0);
    end else begin
      check("detected", det, 1);
      check("consistent", cons, 1);
      check("row lo", rlo, fr); check("row hi", rhi, fr);
      check("col lo", clo, fc); check("col hi", chi, fc);
      check("area", area, 1);
      $display("fault at PE(%0d,%0d) localized to rows %0d..%0d, columns %0d..%0d",
               fr, fc, rlo, rhi, clo, chi);
    end
    fi_en = 0;
  endtask

  initial begin
    w_load = 0; act_valid = 0; mon_start = 0; golden_we = 0; fi_en = 0;
    mon_k = 0; golden_addr = 0; golden_data = 0; fi_row = 0; fi_col = 0; fi_mask = 0;
    foreach (w_in[i]) begin w_in[i] = 0; act_in[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    operation(-1, -1);
    operation(21, 9);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
