// af_weight_buffer -- north-edge weight memory of ArrayFlex.
//
// Holds one R x C tile of the weight matrix B, one row of C words per entry.
// The host writes a whole row per cycle (wr_en, wr_row, wr_data). During
// preload the controller reads one row per cycle; rd_data is registered, so a
// row requested in one cycle is presented to the array in the next.
// The paper places weight memory banks on the north edge and loads one row
// of B per cycle; the single-tile capacity and the row-wide host port are
// this design's choices. Written as a plain array (no SRAM macro).
module af_weight_buffer
  import af_pkg::*;
#(
  parameter int unsigned R  = 128,
  parameter int unsigned C  = 128,
  parameter int unsigned DW = DATA_W,
  localparam int unsigned RW = $clog2(R)
) (
  input  logic                 clk,
  input  logic                 wr_en,
  input  logic [RW-1:0]        wr_row,
  input  logic signed [DW-1:0] wr_data [C],
  input  logic                 rd_en,
  input  logic [RW-1:0]        rd_row,
  output logic signed [DW-1:0] rd_data [C]
);

  logic signed [DW-1:0] mem [R][C];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_row] <= wr_data;
    if (rd_en) rd_data <= mem[rd_row];
  end

endmodule
