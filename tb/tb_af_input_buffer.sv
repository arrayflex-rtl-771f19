// tb_af_input_buffer -- checks the west-edge banks and the skew of mode k:
// one cycle after stream count s, row r must carry A[s - r/k][r], and zero
// outside the T rows of the tile or when reading is disabled.
module tb_af_input_buffer;
  import af_pkg::*;
  localparam int R = 8, DEPTH = 32, DW = 32, AD = $clog2(DEPTH);
  logic clk = 0, rst_n = 0;
  logic wr_en, rd_en;
  logic [AD-1:0] wr_addr;
  logic signed [DW-1:0] wr_data [R], a_out [R];
  mode_e mode;
  logic [AD:0] t_len;
  logic signed [31:0] s_cnt;
  logic signed [DW-1:0] amat [DEPTH][R];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  af_input_buffer #(.R(R), .DEPTH(DEPTH), .DW(DW)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int T, k;
    logic signed [DW-1:0] expv;
    wr_en = 0; rd_en = 0; wr_addr = 0; mode = MODE_K1; t_len = 0; s_cnt = 0;
    foreach (wr_data[r]) wr_data[r] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int m = 0; m < 3; m++) begin
      T = 5 + 3 * m;
      k = 1 << m;
      for (int t = 0; t < T; t++) begin
        @(negedge clk);
        wr_en = 1; wr_addr = t[AD-1:0];
        foreach (wr_data[r]) begin wr_data[r] = $urandom | 1; amat[t][r] = wr_data[r]; end
      end
      @(negedge clk);
      wr_en = 0; mode = mode_e'(m); t_len = T[AD:0];
      for (int s = -2; s < T + R / k + 2; s++) begin
        rd_en = (s != T);   // one idle cycle in the middle
        s_cnt = s;
        @(negedge clk);
        for (int r = 0; r < R; r++) begin
          int idx;
          idx = s - r / k;
          expv = (rd_en && idx >= 0 && idx < T) ? amat[idx][r] : '0;
          checks++;
          if (a_out[r] !== expv) begin
            failures++;
            $display("FAIL k=%0d s=%0d r=%0d got %h exp %h", k, s, r, a_out[r], expv);
          end
        end
      end
      rd_en = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
