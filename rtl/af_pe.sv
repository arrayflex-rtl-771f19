// af_pe -- configurable weight-stationary processing element of ArrayFlex.
//
// Datapath (one PE of a column, following the configurable-PE diagram):
//   * a stationary weight register W and a DATA_W x DATA_W signed multiplier;
//   * two bypass multiplexers that pick the vertical operands from above:
//     when the register above this PE is in use (up_v_reg = 1) they select
//     that register's value and a constant 0; when it is transparent
//     (up_v_reg = 0) they select the sum and carry words produced by the
//     carry-save adder of the PE above, so the reduction continues in
//     carry-save form through this PE in the same clock cycle;
//   * a 3:2 carry-save adder adding the product to those two operands;
//   * a carry-propagate adder turning sum + carry into one ACC_W-bit word,
//     written into the vertical (south) register only when v_reg = 1;
//   * a horizontal (east) register for the input feature followed by a
//     multiplexer: h_reg = 1 forwards the registered value (normal systolic
//     shift), h_reg = 0 forwards the incoming value combinationally
//     (broadcast to the next PE in the same cycle).
// A register whose configuration bit is 0 is never written: its enable is the
// configuration bit, which is how the bypassed registers are clock-gated.
//
// Loading: while load_en is high the weight and the two configuration bits
// shift in from the PE above (w_in, cfg_in) and on to the PE below
// (w_out, cfg_out), one row per cycle.
//
// Timing: a_out, s_out, c_out are combinational from a_in / the vertical
// inputs; psum_out and the east register update on the rising clock edge.
// Structure, multiplexer input order and configuration polarity follow the
// paper's PE diagrams; signed arithmetic, the reset values and the shift-in
// load chain are this design's own choices.
module af_pe
  import af_pkg::*;
#(
  parameter int unsigned DW = DATA_W,
  parameter int unsigned AW = ACC_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // weight / configuration load chain (north to south)
  input  logic                 load_en,
  input  logic signed [DW-1:0] w_in,
  input  pe_cfg_t              cfg_in,
  output logic signed [DW-1:0] w_out,
  output pe_cfg_t              cfg_out,
  // horizontal input-feature path (west to east)
  input  logic signed [DW-1:0] a_in,
  output logic signed [DW-1:0] a_out,
  // vertical reduction path (north to south)
  input  logic                 up_v_reg,   // configuration of the register above
  input  logic        [AW-1:0] psum_in,    // value of the register above
  input  logic        [AW-1:0] s_in,       // carry-save sum from the PE above
  input  logic        [AW-1:0] c_in,       // carry-save carry from the PE above
  output logic        [AW-1:0] psum_out,   // this PE's vertical register
  output logic        [AW-1:0] s_out,
  output logic        [AW-1:0] c_out
);

  logic signed [DW-1:0] w_q;
  pe_cfg_t              cfg_q;
  logic signed [DW-1:0] a_q;
  logic        [AW-1:0] psum_q;

  logic signed [2*DW-1:0] prod;
  logic        [AW-1:0]   prod_ext;
  logic        [AW-1:0]   op_x, op_y;
  logic        [AW-1:0]   cpa;

  // weight and configuration registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_q   <= '0;
      cfg_q <= '{h_reg: 1'b1, v_reg: 1'b1};
    end else if (load_en) begin
      w_q   <= w_in;
      cfg_q <= cfg_in;
    end
  end

  assign w_out   = w_q;
  assign cfg_out = cfg_q;

  // multiplier, sign-extended to the reduction width
  always_comb begin
    prod     = a_in * w_q;
    prod_ext = AW'(prod);
  end

  // vertical bypass multiplexers
  always_comb begin
    if (up_v_reg) begin
      op_x = psum_in;
      op_y = '0;
    end else begin
      op_x = s_in;
      op_y = c_in;
    end
  end

  af_csa #(.W(AW)) u_csa (
    .a     (prod_ext),
    .b     (op_x),
    .c     (op_y),
    .sum   (s_out),
    .carry (c_out)
  );

  // carry-propagate adder and the (gateable) vertical register
  assign cpa = s_out + c_out;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)           psum_q <= '0;
    else if (cfg_q.v_reg) psum_q <= cpa;
  end

  assign psum_out = psum_q;

  // horizontal register with bypass multiplexer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)           a_q <= '0;
    else if (cfg_q.h_reg) a_q <= a_in;
  end

  assign a_out = cfg_q.h_reg ? a_q : a_in;

endmodule
