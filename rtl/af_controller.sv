// af_controller -- sequencer for one tile product on the ArrayFlex array.
//
// A start pulse latches the pipeline mode k, the number of rows T of the A
// tile and the accumulate/clear flag, then runs:
//   PRE : one cycle that issues the first weight-buffer read (row R-1);
//   RUN : cycles 0 .. L with L = R + R/k + C/k + T - 2, where
//         * cycles 0 .. R-1 preload weights and configuration bits, one row
//           per cycle, bottom row first (load_en, load_row);
//         * from cycle R-1 the input buffer streams with counter
//           s = cycle - (R-1), so row r of the array gets row t of A at cycle
//           R + t + r/k;
//         * from cycle R + R/k the output buffer accumulates, with o_cnt the
//           row of A leaving the first column group; the array writes its
//           last result into the bottom register at the end of cycle L-1
//           and the output buffer takes it in cycle L.
// done pulses for one cycle after the last result has been written; busy is
// high from start until then. The cycle budget L(k) is the paper's latency
// of a tile product in mode k; the PRE cycle (weight-buffer read latency)
// and cycle L (output-buffer write) are this design's own, so a job keeps
// the controller busy for L + 2 cycles. A start while busy is ignored and
// flagged by an assertion.
module af_controller
  import af_pkg::*;
#(
  parameter int unsigned R     = 128,
  parameter int unsigned C     = 128,
  parameter int unsigned DEPTH = 16384,
  localparam int unsigned AD   = $clog2(DEPTH),
  localparam int unsigned RW   = $clog2(R)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  mode_e              mode_in,
  input  logic [AD:0]        t_len_in,
  input  logic               acc_clear_in,
  output logic               busy,
  output logic               done,
  output mode_e              mode,
  output logic [AD:0]        t_len,
  output logic               acc_clear,
  // weight buffer read
  output logic               wb_rd_en,
  output logic [RW-1:0]      wb_rd_row,
  // array preload
  output logic               load_en,
  output logic [RW:0]        load_row,
  // input buffer stream
  output logic               ib_rd_en,
  output logic signed [31:0] ib_s_cnt,
  // output buffer accumulate
  output logic               ob_active,
  output logic signed [31:0] ob_cnt
);

  typedef enum logic [1:0] {S_IDLE, S_PRE, S_RUN} state_e;

  state_e             state;
  logic signed [31:0] cyc;
  logic signed [31:0] lat;     // L(k) of the latched job
  logic signed [31:0] r_k;     // R/k

  assign r_k = 32'(R >> mode);
  assign lat = 32'(R) + r_k + 32'(C >> mode) + 32'(t_len) - 32'sd2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      cyc       <= '0;
      done      <= 1'b0;
      mode      <= MODE_K1;
      t_len     <= '0;
      acc_clear <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          mode      <= mode_in;
          t_len     <= t_len_in;
          acc_clear <= acc_clear_in;
          state     <= S_PRE;
        end
        S_PRE: begin
          cyc   <= '0;
          state <= S_RUN;
        end
        S_RUN: begin
          if (cyc == lat) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
          cyc <= cyc + 1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  always_comb begin
    wb_rd_en  = 1'b0;
    wb_rd_row = '0;
    load_en   = 1'b0;
    load_row  = '0;
    ib_rd_en  = 1'b0;
    ib_s_cnt  = '0;
    ob_active = 1'b0;
    ob_cnt    = '0;
    if (state == S_PRE) begin
      wb_rd_en  = 1'b1;
      wb_rd_row = RW'(R - 1);
    end else if (state == S_RUN) begin
      wb_rd_en  = (cyc + 1) < 32'(R);
      wb_rd_row = RW'(32'(R) - 2 - cyc);
      load_en   = cyc < 32'(R);
      load_row  = (RW+1)'(32'(R) - 1 - cyc);
      ib_rd_en  = cyc >= 32'(R) - 1;
      ib_s_cnt  = cyc - (32'(R) - 1);
      ob_active = cyc >= 32'(R) + r_k;
      ob_cnt    = cyc - 32'(R) - r_k;
    end
  end

  // a new job may only be started when the previous one has finished
  a_no_start_when_busy: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> !busy)
    else $error("af_controller: start while busy");

  // only k = 1, 2 and 4 exist
  a_legal_mode: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> mode_in inside {MODE_K1, MODE_K2, MODE_K4})
    else $error("af_controller: illegal pipeline mode");

endmodule
