// tb_af_array -- end-to-end test of the configurable PE grid (8 x 8).
// For k = 1, 2, 4 it preloads a random weight tile with configuration bits
// worked out here (register in use at the last row / column of every
// k-group), streams a random A tile with the skew of mode k (row r lags by
// r/k cycles) and checks every result at the exact cycle it must appear:
// column c shows row t of A x B in cycle R + t + R/k + c/k, counted from the
// first preload cycle, so the last result appears in cycle
// L(k) = R + R/k + C/k + T - 2.
module tb_af_array;
  import af_pkg::*;
  localparam int R = 8, C = 8, DW = 32, AW = 64, TMAX = 12;
  logic clk = 0, rst_n = 0;
  logic load_en;
  logic signed [DW-1:0] w_in [C], a_in [R];
  pe_cfg_t cfg_in [C];
  logic [AW-1:0] psum_out [C];
  logic signed [DW-1:0] A [TMAX][R], B [R][C];
  logic [AW-1:0] X [TMAX][C];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  af_array #(.R(R), .C(C), .DW(DW), .AW(AW)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int k, T, L, last_seen, use_small;
    load_en = 0;
    foreach (w_in[c]) begin w_in[c] = 0; cfg_in[c] = '0; end
    foreach (a_in[r]) a_in[r] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 2; rep++) begin
      for (int m = 0; m < 3; m++) begin
        k = 1 << m;
        T = (rep == 0) ? 5 : TMAX;
        use_small = (rep == 0);
        for (int t = 0; t < T; t++) for (int r = 0; r < R; r++)
          A[t][r] = use_small ? DW'($urandom_range(0, 20)) - 10 : $urandom;
        for (int r = 0; r < R; r++) for (int c = 0; c < C; c++)
          B[r][c] = use_small ? DW'($urandom_range(0, 20)) - 10 : $urandom;
        for (int t = 0; t < T; t++) for (int c = 0; c < C; c++) begin
          X[t][c] = '0;
          for (int r = 0; r < R; r++) X[t][c] += AW'(longint'(A[t][r]) * longint'(B[r][c]));
        end
        L = R + R / k + C / k + T - 2;
        last_seen = -1;
        for (int n = 0; n <= L + 3; n++) begin
          // drive cycle n
          load_en = (n < R);
          for (int c = 0; c < C; c++) begin
            if (n < R) begin
              w_in[c] = B[R - 1 - n][c];
              cfg_in[c].h_reg = (c % k) == k - 1;
              cfg_in[c].v_reg = ((R - 1 - n) % k) == k - 1;
            end else begin
              w_in[c] = $urandom;   // must be ignored
              cfg_in[c] = '0;
            end
          end
          for (int r = 0; r < R; r++) begin
            int t;
            t = n - R - r / k;
            a_in[r] = (t >= 0 && t < T) ? A[t][r] : '0;
          end
          #1;
          // check cycle n
          for (int c = 0; c < C; c++) begin
            int t;
            t = n - R - R / k - c / k;
            if (t >= 0 && t < T) begin
              checks++;
              if (psum_out[c] !== X[t][c]) begin
                failures++;
                $display("FAIL k=%0d T=%0d n=%0d c=%0d t=%0d got %h exp %h", k, T, n, c, t, psum_out[c], X[t][c]);
              end
              if (n > last_seen) last_seen = n;
            end
          end
          @(negedge clk);
        end
        checks++;
        if (last_seen != L) begin
          failures++;
          $display("FAIL latency k=%0d: last result in cycle %0d, L(k)=%0d", k, last_seen, L);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
