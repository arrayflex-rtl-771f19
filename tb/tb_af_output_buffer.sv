// tb_af_output_buffer -- drives skewed column results for k = 1, 2, 4 and
// checks that column c stores row o_cnt - c/k, that acc_clear overwrites
// and that a second pass accumulates, through the registered read port.
module tb_af_output_buffer;
  import af_pkg::*;
  localparam int C = 8, DEPTH = 32, AW = 64, AD = $clog2(DEPTH);
  logic clk = 0;
  mode_e mode;
  logic [AD:0] t_len;
  logic acc_clear, wr_active;
  logic signed [31:0] o_cnt;
  logic [AW-1:0] psum [C], rd_data [C];
  logic [AD-1:0] rd_addr;
  logic [AW-1:0] expm [DEPTH][C];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  af_output_buffer #(.C(C), .DEPTH(DEPTH), .AW(AW)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // value column c delivers at stream count n in pass p
  function automatic logic [AW-1:0] val(int p, int n, int c);
    return AW'(64'h1000_0000_0000 * (p + 1) + n * 256 + c);
  endfunction

  initial begin
    int T, k;
    mode = MODE_K1; t_len = 0; acc_clear = 0; wr_active = 0; o_cnt = 0; rd_addr = 0;
    foreach (psum[c]) psum[c] = 0;
    for (int m = 0; m < 3; m++) begin
      T = 6 + m;
      k = 1 << m;
      for (int p = 0; p < 2; p++) begin
        @(negedge clk);
        mode = mode_e'(m); t_len = T[AD:0]; acc_clear = (p == 0);
        for (int n = -1; n < T + C / k + 1; n++) begin
          wr_active = 1; o_cnt = n;
          for (int c = 0; c < C; c++) begin
            int row;
            row = n - c / k;
            psum[c] = val(p, n, c);
            if (row >= 0 && row < T)
              expm[row][c] = (p == 0) ? psum[c] : expm[row][c] + psum[c];
          end
          @(negedge clk);
        end
        wr_active = 0;
      end
      for (int t = 0; t < T; t++) begin
        rd_addr = t[AD-1:0];
        @(negedge clk);
        for (int c = 0; c < C; c++) begin
          checks++;
          if (rd_data[c] !== expm[t][c]) begin
            failures++;
            $display("FAIL k=%0d t=%0d c=%0d got %h exp %h", k, t, c, rd_data[c], expm[t][c]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
