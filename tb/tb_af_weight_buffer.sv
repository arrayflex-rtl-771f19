// tb_af_weight_buffer -- writes a random weight tile row by row, reads it
// back in preload order and checks data and the one-cycle read latency.
module tb_af_weight_buffer;
  localparam int R = 8, C = 8, DW = 32;
  logic clk = 0;
  logic wr_en, rd_en;
  logic [$clog2(R)-1:0] wr_row, rd_row;
  logic signed [DW-1:0] wr_data [C], rd_data [C];
  logic signed [DW-1:0] ref_mem [R][C];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  af_weight_buffer #(.R(R), .C(C), .DW(DW)) dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; rd_en = 0; wr_row = 0; rd_row = 0;
    foreach (wr_data[c]) wr_data[c] = 0;
    for (int pass = 0; pass < 3; pass++) begin
      for (int r = 0; r < R; r++) begin
        @(negedge clk);
        wr_en = 1; wr_row = r[$clog2(R)-1:0];
        foreach (wr_data[c]) begin wr_data[c] = $urandom; ref_mem[r][c] = wr_data[c]; end
      end
      @(negedge clk);
      wr_en = 0;
      for (int r = R - 1; r >= 0; r--) begin
        rd_en = 1; rd_row = r[$clog2(R)-1:0];
        @(negedge clk);
        rd_en = 0;
        foreach (rd_data[c]) begin
          checks++;
          if (rd_data[c] !== ref_mem[r][c]) begin
            failures++; $display("FAIL row %0d col %0d", r, c);
          end
        end
        // holds when not reading
        @(negedge clk);
        checks++;
        if (rd_data[0] !== ref_mem[r][0]) begin failures++; $display("FAIL hold"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
