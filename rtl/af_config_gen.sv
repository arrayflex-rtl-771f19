// af_config_gen -- configuration bits of one array row for pipeline mode k.
//
// ArrayFlex loads two configuration bits into every PE together with its
// weight. This block produces them for the row that the current load word
// will end up in (dest_row) and for every column c:
//   v_reg = 1 when dest_row is the last row of its k-group (rows r with
//           (r+1) mod k == 0 keep their vertical register; the others are
//           transparent and pass the carry-save sum down);
//   h_reg = 1 when column c is the last column of its k-group (the input
//           feature is broadcast combinationally across the group and is
//           registered at its east end).
// With k = 1 every register is in use (normal pipeline). The grouping rule
// follows the paper's k = 2 example; generating it in hardware from the mode
// is this design's choice. Purely combinational. R and C must be multiples of
// the largest k (4), as they are in the paper's power-of-two arrays.
module af_config_gen
  import af_pkg::*;
#(
  parameter int unsigned R = 128,
  parameter int unsigned C = 128
) (
  input  mode_e                    mode,
  input  logic [$clog2(R):0]     dest_row,
  output pe_cfg_t                  cfg [C]
);

  if ((R % K_MAX) != 0 || (C % K_MAX) != 0) begin : g_size_check
    $error("af_config_gen: R and C must be multiples of %0d", K_MAX);
  end

  logic v_bit;
  assign v_bit = group_end(int'(dest_row), mode);

  for (genvar c = 0; c < C; c++) begin : g_col
    assign cfg[c].h_reg = group_end(c, mode);
    assign cfg[c].v_reg = v_bit;
  end

endmodule
