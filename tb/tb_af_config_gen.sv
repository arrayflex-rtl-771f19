// tb_af_config_gen -- checks the per-PE configuration bits for k = 1, 2, 4:
// a register is in use exactly at the last row / column of each k-group.
module tb_af_config_gen;
  import af_pkg::*;
  localparam int R = 16, C = 16;
  mode_e mode;
  logic [$clog2(R):0] dest_row;
  pe_cfg_t cfg [C];
  int checks = 0, failures = 0;

  af_config_gen #(.R(R), .C(C)) dut (.mode(mode), .dest_row(dest_row), .cfg(cfg));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int k;
    int n_v, n_h;
    for (int m = 0; m < 3; m++) begin
      mode = mode_e'(m);
      k = 1 << m;
      n_v = 0;
      for (int r = 0; r < R; r++) begin
        dest_row = r[$clog2(R):0];
        #1;
        n_h = 0;
        for (int c = 0; c < C; c++) begin
          checks++;
          if (cfg[c].h_reg !== ((c % k) == k - 1) || cfg[c].v_reg !== ((r % k) == k - 1)) begin
            failures++;
            $display("FAIL k=%0d r=%0d c=%0d h=%b v=%b", k, r, c, cfg[c].h_reg, cfg[c].v_reg);
          end
          n_h += int'(cfg[c].h_reg);
        end
        n_v += int'(cfg[0].v_reg);
        checks++;
        if (n_h != C / k) begin failures++; $display("FAIL h count k=%0d", k); end
      end
      checks++;
      if (n_v != R / k) begin failures++; $display("FAIL v count k=%0d", k); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
