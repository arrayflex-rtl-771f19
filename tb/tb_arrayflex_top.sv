// tb_arrayflex_top -- end-to-end test of the ArrayFlex accelerator at a
// reduced size (8 x 8 PEs, 64-row buffers).
// It runs a sequence of tile products through the host interface: writes A
// and B, starts a job in mode k, waits for done, reads back all T x C results
// and compares them with A x B computed here. It covers all three pipeline
// modes (normal, k = 2, k = 4), switching modes between jobs, overwrite
// (acc_clear) and accumulation of a second reduction tile into the same
// outputs, and checks that every job keeps the accelerator busy for exactly
// L(k) + 2 cycles, L(k) = R + R/k + C/k + T - 2. Each mechanism is counted;
// one that never happened counts as a failure.
module tb_arrayflex_top;
  import af_pkg::*;
  localparam int R = 8, C = 8, DEPTH = 64, DW = 32, AW = 64, AD = $clog2(DEPTH), RW = $clog2(R);
  logic clk = 0, rst_n = 0;
  logic in_wr_en, wt_wr_en, start, acc_clear, busy, done;
  logic [AD-1:0] in_wr_addr, out_rd_addr;
  logic [RW-1:0] wt_wr_row;
  logic signed [DW-1:0] in_wr_data [R], wt_wr_data [C];
  mode_e mode, mode_q;
  logic [AD:0] t_len;
  logic [AW-1:0] out_rd_data [C];

  logic signed [DW-1:0] A [DEPTH][R], B [R][C];
  logic [AW-1:0] X [DEPTH][C];
  int checks = 0, failures = 0;
  int n_mode [3];
  int n_accumulate = 0, n_clear = 0, n_switch = 0;

  always #5 clk = ~clk;

  arrayflex_top #(.R(R), .C(C), .DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // one tile product; clear = 1 starts a new result, 0 adds to it
  task automatic run_job(int m, int T, bit clear, bit small_vals);
    int k, L, cyc;
    k = 1 << m;
    for (int t = 0; t < T; t++) for (int r = 0; r < R; r++)
      A[t][r] = small_vals ? DW'($urandom_range(0, 200)) - 100 : $urandom;
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++)
      B[r][c] = small_vals ? DW'($urandom_range(0, 200)) - 100 : $urandom;
    for (int t = 0; t < T; t++) for (int c = 0; c < C; c++) begin
      if (clear) X[t][c] = '0;
      for (int r = 0; r < R; r++) X[t][c] += AW'(longint'(A[t][r]) * longint'(B[r][c]));
    end
    // host writes
    for (int t = 0; t < T; t++) begin
      @(negedge clk);
      in_wr_en = 1; in_wr_addr = t[AD-1:0];
      for (int r = 0; r < R; r++) in_wr_data[r] = A[t][r];
    end
    for (int r = 0; r < R; r++) begin
      @(negedge clk);
      in_wr_en = 0; wt_wr_en = 1; wt_wr_row = r[RW-1:0];
      for (int c = 0; c < C; c++) wt_wr_data[c] = B[r][c];
    end
    @(negedge clk);
    wt_wr_en = 0;
    if (m != int'(mode_q)) n_switch++;
    start = 1; mode = mode_e'(m); t_len = T[AD:0]; acc_clear = clear;
    @(negedge clk);
    start = 0;
    cyc = 0;
    while (busy && cyc < 100000) begin
      @(negedge clk);
      cyc++;
    end
    L = R + R / k + C / k + T - 2;
    chk(cyc == L + 2, $sformatf("busy %0d cycles, expected L(k)+2 = %0d (k=%0d T=%0d)", cyc, L + 2, k, T));
    chk(mode_q == mode_e'(m), "mode reported to the clock source");
    n_mode[m]++;
    if (clear) n_clear++; else n_accumulate++;
  endtask

  task automatic check_result(int T, string tag);
    for (int t = 0; t < T; t++) begin
      out_rd_addr = t[AD-1:0];
      @(negedge clk);
      for (int c = 0; c < C; c++) begin
        checks++;
        if (out_rd_data[c] !== X[t][c]) begin
          failures++;
          $display("FAIL %s t=%0d c=%0d got %h exp %h", tag, t, c, out_rd_data[c], X[t][c]);
        end
      end
    end
  endtask

  initial begin
    in_wr_en = 0; wt_wr_en = 0; start = 0; acc_clear = 0; mode = MODE_K1;
    t_len = 0; in_wr_addr = 0; out_rd_addr = 0; wt_wr_row = 0;
    foreach (in_wr_data[r]) in_wr_data[r] = 0;
    foreach (wt_wr_data[c]) wt_wr_data[c] = 0;
    n_mode = '{0, 0, 0};
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // single tiles in each mode, small and full-range values
    for (int m = 0; m < 3; m++) begin
      run_job(m, 5 + 4 * m, 1, 1);
      check_result(5 + 4 * m, $sformatf("k=%0d small", 1 << m));
      run_job(m, 17, 1, 0);
      check_result(17, $sformatf("k=%0d full", 1 << m));
    end
    // a reduction over N = 3R: three tiles accumulated, mode changing per tile
    run_job(2, 23, 1, 0);
    run_job(0, 23, 0, 0);
    run_job(1, 23, 0, 0);
    check_result(23, "accumulated tiles");
    // T = 1 and a deep tile
    run_job(1, 1, 1, 0);
    check_result(1, "T=1");
    run_job(2, DEPTH, 1, 1);
    check_result(DEPTH, "T=DEPTH");

    $display("mechanisms: k1=%0d k2=%0d k4=%0d clear=%0d accumulate=%0d mode_switch=%0d",
             n_mode[0], n_mode[1], n_mode[2], n_clear, n_accumulate, n_switch);
    chk(n_mode[0] > 0, "normal pipeline mode used");
    chk(n_mode[1] > 0, "shallow mode k=2 used");
    chk(n_mode[2] > 0, "shallow mode k=4 used");
    chk(n_accumulate > 0, "tile accumulation used");
    chk(n_clear > 0, "result overwrite used");
    chk(n_switch > 0, "mode switch between jobs");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
