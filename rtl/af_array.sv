// af_array -- R x C grid of configurable ArrayFlex PEs.
//
// Input features enter on the west edge (a_in[r] feeds row r) and travel east
// through each PE's horizontal register or its bypass; weights and the two
// configuration bits of every PE enter on the north edge and shift down one
// row per cycle while load_en is high (R cycles load the whole array; the row
// presented first ends up in the bottom row). Partial sums are reduced down
// each column; psum_out[c] is the vertical register of the bottom PE of
// column c.
//
// The top row sees a constant-zero "register above" that is always in use,
// so its carry-save adder starts every column sum from zero.
//
// Timing in mode k, with the configuration produced by af_config_gen (the last
// PE of every k-group of rows and columns registers, the others are bypassed):
// if row r receives row t of A at cycle t + r/k, then psum_out[c] holds the
// dot product of that row of A with column c of B from cycle
// t + R/k + c/k on. With k = 1 this is the classic weight-stationary array.
// The grid structure follows the paper; the shift-in load order is this
// design's choice.
module af_array
  import af_pkg::*;
#(
  parameter int unsigned R  = 128,
  parameter int unsigned C  = 128,
  parameter int unsigned DW = DATA_W,
  parameter int unsigned AW = ACC_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 load_en,
  input  logic signed [DW-1:0] w_in   [C],
  input  pe_cfg_t              cfg_in [C],
  input  logic signed [DW-1:0] a_in   [R],
  output logic        [AW-1:0] psum_out [C]
);

  // Every PE drives its own nets, declared inside its generate block; the
  // PE below / to the east reads them by hierarchical name. Keeping each net
  // separate (rather than in one array spanning the grid) lets tools see that
  // the bypass chains are acyclic.
  for (genvar r = 0; r < R; r++) begin : g_row
    for (genvar c = 0; c < C; c++) begin : g_col
      logic signed [DW-1:0] a_o, w_o;
      pe_cfg_t              cfg_o;
      logic        [AW-1:0] ps_o, s_o, c_o;

      logic signed [DW-1:0] a_i, w_i;
      pe_cfg_t              cfg_i;
      logic        [AW-1:0] ps_i, s_i, c_i;
      logic                 vr_i;

      if (c == 0) begin : g_west
        assign a_i = a_in[r];
      end else begin : g_inner_h
        assign a_i = g_row[r].g_col[c-1].a_o;
      end

      if (r == 0) begin : g_north
        assign w_i   = w_in[c];
        assign cfg_i = cfg_in[c];
        assign ps_i  = '0;
        assign s_i   = '0;
        assign c_i   = '0;
        assign vr_i  = 1'b1;
      end else begin : g_inner_v
        assign w_i   = g_row[r-1].g_col[c].w_o;
        assign cfg_i = g_row[r-1].g_col[c].cfg_o;
        assign ps_i  = g_row[r-1].g_col[c].ps_o;
        assign s_i   = g_row[r-1].g_col[c].s_o;
        assign c_i   = g_row[r-1].g_col[c].c_o;
        assign vr_i  = g_row[r-1].g_col[c].cfg_o.v_reg;
      end

      if (r == R - 1) begin : g_south
        assign psum_out[c] = ps_o;
      end

      af_pe #(.DW(DW), .AW(AW)) u_pe (
        .clk      (clk),
        .rst_n    (rst_n),
        .load_en  (load_en),
        .w_in     (w_i),
        .cfg_in   (cfg_i),
        .w_out    (w_o),
        .cfg_out  (cfg_o),
        .a_in     (a_i),
        .a_out    (a_o),
        .up_v_reg (vr_i),
        .psum_in  (ps_i),
        .s_in     (s_i),
        .c_in     (c_i),
        .psum_out (ps_o),
        .s_out    (s_o),
        .c_out    (c_o)
      );
    end
  end

endmodule
