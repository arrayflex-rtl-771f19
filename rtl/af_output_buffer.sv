// af_output_buffer -- south-edge accumulators and output memory of ArrayFlex.
//
// One accumulator bank per array column. The array delivers, in column c,
// the result for row t of A at cycle t + c/k after column group 0 delivered
// it (the output skew of mode k). While wr_active is high the controller
// supplies o_cnt, the row index currently leaving column group 0; column c
// therefore writes row o_cnt - c/k when that index lies in 0 .. t_len-1.
// The write adds the incoming partial sum to the stored one, or overwrites
// it when acc_clear is set (first tile of a reduction), so tiles of the
// reduction dimension accumulate as in the paper's tiled multiplication.
//
// A host read port returns one row of the result, all C columns, one cycle
// after rd_addr is presented. Accumulation follows the paper; the de-skew by
// per-column address offset, DEPTH and the read port are this design's own.
module af_output_buffer
  import af_pkg::*;
#(
  parameter int unsigned C     = 128,
  parameter int unsigned DEPTH = 16384,
  parameter int unsigned AW    = ACC_W,
  localparam int unsigned AD   = $clog2(DEPTH)
) (
  input  logic               clk,
  input  mode_e              mode,
  input  logic [AD:0]        t_len,
  input  logic               acc_clear,
  input  logic               wr_active,
  input  logic signed [31:0] o_cnt,
  input  logic [AW-1:0]      psum [C],
  // host read port
  input  logic [AD-1:0]      rd_addr,
  output logic [AW-1:0]      rd_data [C]
);

  logic [AW-1:0] mem [C][DEPTH];

  for (genvar c = 0; c < C; c++) begin : g_col
    logic signed [31:0] row;
    logic               we;
    logic [AW-1:0]      base;
    assign row  = o_cnt - 32'(group_of(c, mode));
    assign we   = wr_active && (row >= 0) && (row < $signed({1'b0, 31'(t_len)}));
    assign base = acc_clear ? '0 : mem[c][AD'(row)];

    always_ff @(posedge clk) begin
      if (we) mem[c][AD'(row)] <= base + psum[c];
      rd_data[c] <= mem[c][rd_addr];
    end
  end

endmodule
