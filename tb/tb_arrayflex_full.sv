// tb_arrayflex_full -- one complete tile product on the accelerator at its
// default size (128 x 128 PEs, 32-bit operands, 64-bit reduction).
// Writes a random 6 x 128 A tile and a random 128 x 128 B tile, runs the
// job in shallow mode k = 2, checks that it keeps the accelerator busy for
// L(2) + 2 cycles and that all 6 x 128 results equal A x B computed here.
module tb_arrayflex_full;
  import af_pkg::*;
  localparam int R = 128, C = 128, DEPTH = 16384, DW = 32, AW = 64;
  localparam int AD = $clog2(DEPTH), RW = $clog2(R), T = 6, K = 2;
  logic clk = 0, rst_n = 0;
  logic in_wr_en, wt_wr_en, start, acc_clear, busy, done;
  logic [AD-1:0] in_wr_addr, out_rd_addr;
  logic [RW-1:0] wt_wr_row;
  logic signed [DW-1:0] in_wr_data [R], wt_wr_data [C];
  mode_e mode, mode_q;
  logic [AD:0] t_len;
  logic [AW-1:0] out_rd_data [C];

  logic signed [DW-1:0] A [T][R], B [R][C];
  logic [AW-1:0] X [T][C];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  arrayflex_top dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc, L;
    in_wr_en = 0; wt_wr_en = 0; start = 0; acc_clear = 0; mode = MODE_K1;
    t_len = 0; in_wr_addr = 0; out_rd_addr = 0; wt_wr_row = 0;
    foreach (in_wr_data[r]) in_wr_data[r] = 0;
    foreach (wt_wr_data[c]) wt_wr_data[c] = 0;
    for (int t = 0; t < T; t++) for (int r = 0; r < R; r++) A[t][r] = $urandom;
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) B[r][c] = $urandom;
    for (int t = 0; t < T; t++) for (int c = 0; c < C; c++) begin
      X[t][c] = '0;
      for (int r = 0; r < R; r++) X[t][c] += AW'(longint'(A[t][r]) * longint'(B[r][c]));
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
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
    start = 1; mode = MODE_K2; t_len = T[AD:0]; acc_clear = 1;
    @(negedge clk);
    start = 0;
    cyc = 0;
    while (busy && cyc < 4000) begin
      @(negedge clk);
      cyc++;
    end
    L = R + R / K + C / K + T - 2;
    checks++;
    if (cyc != L + 2) begin
      failures++;
      $display("FAIL busy %0d cycles, expected %0d", cyc, L + 2);
    end
    for (int t = 0; t < T; t++) begin
      out_rd_addr = t[AD-1:0];
      @(negedge clk);
      for (int c = 0; c < C; c++) begin
        checks++;
        if (out_rd_data[c] !== X[t][c]) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d c=%0d got %h exp %h", t, c, out_rd_data[c], X[t][c]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
