// arrayflex_top -- ArrayFlex: a weight-stationary systolic array with
// configurable transparent pipelining.
//
// Blocks: a west-edge input buffer (one bank per row), a north-edge weight
// buffer, an R x C array of configurable PEs, a configuration generator, the
// south-edge accumulating output buffer and a controller.
//
// Use: the host writes the A tile (T rows of R words, one row per cycle,
// in_wr_*) and the B tile (R rows of C words, wt_wr_*), then pulses start
// with the pipeline mode (k = 1, 2 or 4), T and acc_clear. The controller
// preloads B and the two configuration bits per PE in R cycles, streams A
// and accumulates the T x C result into the output buffer, overwriting it
// when acc_clear is set and adding to it otherwise, so the host can sum the
// tiles of a larger multiplication. done pulses once the result is
// complete; out_rd_addr reads one row of C results a cycle later.
// The array itself needs L(k) = R + R/k + C/k + T - 2 cycles from the first
// preload cycle until its last result is in the bottom registers; the
// weight-buffer read and the output-buffer write add a cycle each, so busy
// lasts L(k) + 2 cycles.
//
// The clock frequency that suits each mode (slower for deeper collapsing)
// is set outside this block; mode_q tells the clock source which mode is
// running. The buffers are plain arrays; buffer capacity (DEPTH rows of A)
// is this design's choice. The buffers must not be written while busy.
module arrayflex_top
  import af_pkg::*;
#(
  parameter int unsigned R     = 128,
  parameter int unsigned C     = 128,
  parameter int unsigned DEPTH = 16384,
  localparam int unsigned DW   = DATA_W,
  localparam int unsigned AW   = ACC_W,
  localparam int unsigned AD   = $clog2(DEPTH),
  localparam int unsigned RW   = $clog2(R)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // A tile (input features), one row of R words per write
  input  logic                 in_wr_en,
  input  logic [AD-1:0]        in_wr_addr,
  input  logic signed [DW-1:0] in_wr_data [R],
  // B tile (weights), one row of C words per write
  input  logic                 wt_wr_en,
  input  logic [RW-1:0]        wt_wr_row,
  input  logic signed [DW-1:0] wt_wr_data [C],
  // job control
  input  logic                 start,
  input  mode_e                mode,
  input  logic [AD:0]          t_len,
  input  logic                 acc_clear,
  output logic                 busy,
  output logic                 done,
  output mode_e                mode_q,
  // result read, one row of C words
  input  logic [AD-1:0]        out_rd_addr,
  output logic [AW-1:0]        out_rd_data [C]
);

  logic               wb_rd_en;
  logic [RW-1:0]      wb_rd_row;
  logic               load_en;
  logic [RW:0]        load_row;
  logic               ib_rd_en;
  logic signed [31:0] ib_s_cnt;
  logic               ob_active;
  logic signed [31:0] ob_cnt;
  logic [AD:0]        t_len_q;
  logic               acc_clear_q;

  logic signed [DW-1:0] w_row   [C];
  pe_cfg_t              cfg_row [C];
  logic signed [DW-1:0] a_col   [R];
  logic        [AW-1:0] psum    [C];

  af_controller #(.R(R), .C(C), .DEPTH(DEPTH)) u_ctrl (
    .clk, .rst_n, .start,
    .mode_in      (mode),
    .t_len_in     (t_len),
    .acc_clear_in (acc_clear),
    .busy, .done,
    .mode         (mode_q),
    .t_len        (t_len_q),
    .acc_clear    (acc_clear_q),
    .wb_rd_en, .wb_rd_row, .load_en, .load_row,
    .ib_rd_en, .ib_s_cnt, .ob_active, .ob_cnt
  );

  af_weight_buffer #(.R(R), .C(C), .DW(DW)) u_wbuf (
    .clk,
    .wr_en   (wt_wr_en),
    .wr_row  (wt_wr_row),
    .wr_data (wt_wr_data),
    .rd_en   (wb_rd_en),
    .rd_row  (wb_rd_row),
    .rd_data (w_row)
  );

  af_config_gen #(.R(R), .C(C)) u_cfg (
    .mode     (mode_q),
    .dest_row (load_row),
    .cfg      (cfg_row)
  );

  af_input_buffer #(.R(R), .DEPTH(DEPTH), .DW(DW)) u_ibuf (
    .clk, .rst_n,
    .wr_en   (in_wr_en),
    .wr_addr (in_wr_addr),
    .wr_data (in_wr_data),
    .mode    (mode_q),
    .t_len   (t_len_q),
    .rd_en   (ib_rd_en),
    .s_cnt   (ib_s_cnt),
    .a_out   (a_col)
  );

  af_array #(.R(R), .C(C), .DW(DW), .AW(AW)) u_array (
    .clk, .rst_n,
    .load_en  (load_en),
    .w_in     (w_row),
    .cfg_in   (cfg_row),
    .a_in     (a_col),
    .psum_out (psum)
  );

  af_output_buffer #(.C(C), .DEPTH(DEPTH), .AW(AW)) u_obuf (
    .clk,
    .mode      (mode_q),
    .t_len     (t_len_q),
    .acc_clear (acc_clear_q),
    .wr_active (ob_active),
    .o_cnt     (ob_cnt),
    .psum      (psum),
    .rd_addr   (out_rd_addr),
    .rd_data   (out_rd_data)
  );

  // the buffers feed a running job and must not change under it
  a_no_write_when_busy: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> !(in_wr_en || wt_wr_en))
    else $error("arrayflex_top: buffer written while busy");

endmodule
