// af_input_buffer -- west-edge input-feature memory banks with mode-aware skew.
//
// One bank per array row; bank r holds column r of the A tile, so entry t of
// all banks together is row t of A. The host writes a whole row of A per cycle.
//
// While rd_en is high, the controller supplies a stream counter s. Bank r
// reads entry s - r/k (k the pipeline mode), and presents it on a_out[r] in
// the next cycle; entries outside 0 .. t_len-1 read as zero. This realises
// the input skew of the systolic array: with k = 1 each row lags the one
// above by a cycle; in shallow mode the rows of each k-group receive their
// words together, one batch of k words per cycle of skew. When rd_en is low
// the outputs are zero.
// The skew rule follows the paper; implementing it by per-bank address
// offsets (instead of delay lines) and the capacity DEPTH are this design's
// choices.
module af_input_buffer
  import af_pkg::*;
#(
  parameter int unsigned R     = 128,
  parameter int unsigned DEPTH = 16384,
  parameter int unsigned DW    = DATA_W,
  localparam int unsigned AD   = $clog2(DEPTH)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // host write port: one row of A
  input  logic                 wr_en,
  input  logic [AD-1:0]        wr_addr,
  input  logic signed [DW-1:0] wr_data [R],
  // streaming read
  input  mode_e                mode,
  input  logic [AD:0]          t_len,
  input  logic                 rd_en,
  input  logic signed [31:0]   s_cnt,
  output logic signed [DW-1:0] a_out [R]
);

  logic signed [DW-1:0] mem [R][DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en)
      for (int r = 0; r < R; r++) mem[r][wr_addr] <= wr_data[r];
  end

  for (genvar r = 0; r < R; r++) begin : g_bank
    logic signed [31:0] idx;
    logic               in_range;
    assign idx      = s_cnt - 32'(group_of(r, mode));
    assign in_range = rd_en && (idx >= 0) && (idx < $signed({1'b0, 31'(t_len)}));

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)        a_out[r] <= '0;
      else if (in_range) a_out[r] <= mem[r][AD'(idx)];
      else               a_out[r] <= '0;
    end
  end

endmodule
