// tb_af_controller -- checks the job sequencing for k = 1, 2, 4: R preload
// cycles with destination rows R-1 .. 0, the weight-buffer read one cycle
// ahead, stream and accumulate counters starting at the right cycles, and
// the last accumulate cycle at L(k) = R + R/k + C/k + T - 2 counted from the
// first preload cycle (the array's own latency, plus the output write), followed by a one-cycle done pulse.
module tb_af_controller;
  import af_pkg::*;
  localparam int R = 16, C = 8, DEPTH = 64, AD = $clog2(DEPTH), RW = $clog2(R);
  logic clk = 0, rst_n = 0;
  logic start, acc_clear_in, busy, done, acc_clear;
  mode_e mode_in, mode;
  logic [AD:0] t_len_in, t_len;
  logic wb_rd_en, load_en, ib_rd_en, ob_active;
  logic [RW-1:0] wb_rd_row;
  logic [RW:0] load_row;
  logic signed [31:0] ib_s_cnt, ob_cnt;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  af_controller #(.R(R), .C(C), .DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    int T, k, L, cyc, n_load, last_ob, first_ib, first_ob;
    start = 0; acc_clear_in = 0; mode_in = MODE_K1; t_len_in = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int m = 0; m < 3; m++) begin
      for (int tt = 0; tt < 2; tt++) begin
        k = 1 << m;
        T = 3 + 17 * tt;
        L = R + R / k + C / k + T - 2;
        @(negedge clk);
        start = 1; mode_in = mode_e'(m); t_len_in = T[AD:0]; acc_clear_in = tt[0];
        @(negedge clk);
        start = 0;
        chk(busy && mode == mode_e'(m) && t_len == T[AD:0] && acc_clear == tt[0], "latched job");
        // PRE cycle: first weight row requested
        chk(wb_rd_en && wb_rd_row == RW'(R - 1) && !load_en, "pre-read of row R-1");
        @(negedge clk);
        cyc = 0; n_load = 0; last_ob = -1; first_ib = -1; first_ob = -1;
        while (!done && cyc < 10000) begin
          if (load_en) begin
            chk(load_row == (RW+1)'(R - 1 - cyc), "preload destination row");
            if (cyc < R - 1) chk(wb_rd_en && wb_rd_row == RW'(R - 2 - cyc), "weight read one row ahead");
            n_load++;
          end
          if (ib_rd_en && first_ib < 0) first_ib = cyc;
          if (ib_rd_en) chk(ib_s_cnt == cyc - (R - 1), "stream counter");
          if (ob_active) begin
            if (first_ob < 0) first_ob = cyc;
            chk(ob_cnt == cyc - R - R / k, "accumulate counter");
            last_ob = cyc;
          end
          @(negedge clk);
          cyc++;
        end
        chk(n_load == R, "R preload cycles");
        chk(first_ib == R - 1, "stream starts at R-1");
        chk(first_ob == R + R / k, "accumulate starts at R+R/k");
        chk(last_ob == L, $sformatf("last accumulate cycle L (k=%0d T=%0d got %0d exp %0d)", k, T, last_ob, L));
        chk(cyc == L + 1, "run length L(k)+1");
        chk(done, "done pulse");
        @(negedge clk);
        chk(!done && !busy, "done is one cycle, idle afterwards");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
