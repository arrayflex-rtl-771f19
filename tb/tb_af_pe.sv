// tb_af_pe -- self-checking test of one configurable ArrayFlex PE.
// Loads weight and configuration through the load chain, then checks the
// multiply-accumulate into the vertical register (register above in use),
// the carry-save pass-through (register above transparent), the gated
// vertical register, and the registered versus bypassed horizontal path.
module tb_af_pe;
  import af_pkg::*;
  localparam int DW = 32, AW = 64;

  logic clk = 0, rst_n = 0;
  logic load_en;
  logic signed [DW-1:0] w_in, w_out, a_in, a_out;
  pe_cfg_t cfg_in, cfg_out;
  logic up_v_reg;
  logic [AW-1:0] psum_in, s_in, c_in, psum_out, s_out, c_out;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  af_pe #(.DW(DW), .AW(AW)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic load(logic signed [DW-1:0] w, logic h, logic v);
    @(negedge clk);
    load_en = 1; w_in = w; cfg_in = '{h_reg: h, v_reg: v};
    @(negedge clk);
    load_en = 0;
    chk(w_out == w && cfg_out.h_reg == h && cfg_out.v_reg == v, "load chain");
  endtask

  initial begin
    logic signed [DW-1:0] w, a, a_prev;
    logic [AW-1:0] p, x, y, prod, held;
    load_en = 0; w_in = 0; cfg_in = '0; a_in = 0; up_v_reg = 1;
    psum_in = 0; s_in = 0; c_in = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;

    for (int mode = 0; mode < 4; mode++) begin
      logic h, v;
      h = mode[0]; v = mode[1];
      for (int it = 0; it < 50; it++) begin
        w = $urandom;
        if (it % 3 == 0) w = -w;
        load(w, h, v);
        // register above in use: psum = psum_in + a*w
        a = $urandom; p = {$urandom, $urandom};
        a_prev = a_out;
        held = psum_out;
        up_v_reg = 1; a_in = a; psum_in = p; s_in = {$urandom, $urandom}; c_in = {$urandom, $urandom};
        #1;
        prod = AW'(longint'(a) * longint'(w));
        chk(s_out + c_out == p + prod, "csa with register above");
        if (h) chk(a_out == a_prev, "horizontal register holds");
        else   chk(a_out == a, "horizontal bypass");
        @(negedge clk);
        if (v) chk(psum_out == p + prod, "vertical register written");
        else   chk(psum_out == held, "transparent register not written");
        if (h) chk(a_out == a, "horizontal register captured");
        // register above transparent: carry-save pass-through
        up_v_reg = 0; x = {$urandom, $urandom}; y = {$urandom, $urandom};
        s_in = x; c_in = y; psum_in = {$urandom, $urandom};
        #1;
        chk(s_out + c_out == x + y + prod, "csa chain with register above transparent");
        @(negedge clk);
        if (v) chk(psum_out == x + y + prod, "cpa result");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
