// tb_af_csa -- self-checking test of the 3:2 carry-save adder.
// Random and corner operands; checks sum + carry == a + b + c (mod 2^64)
// and that sum is the bitwise parity of the three operands.
module tb_af_csa;
  localparam int W = 64;
  logic [W-1:0] a, b, c, s, cy;
  int checks = 0, failures = 0;

  af_csa #(.W(W)) dut (.a(a), .b(b), .c(c), .sum(s), .carry(cy));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_one(logic [W-1:0] x, logic [W-1:0] y, logic [W-1:0] z);
    logic [W-1:0] ref_sum;
    a = x; b = y; c = z;
    #1;
    ref_sum = x + y + z;
    checks++;
    if (s + cy !== ref_sum) begin
      failures++;
      $display("FAIL sum+carry a=%h b=%h c=%h got %h exp %h", x, y, z, s + cy, ref_sum);
    end
    checks++;
    if (s !== (x ^ y ^ z)) begin
      failures++;
      $display("FAIL parity a=%h b=%h c=%h", x, y, z);
    end
  endtask

  initial begin
    check_one('1, '1, '1);
    check_one('0, '0, '0);
    check_one(64'h8000_0000_0000_0000, 64'h8000_0000_0000_0000, 64'h1);
    for (int i = 0; i < 500; i++)
      check_one({$urandom, $urandom}, {$urandom, $urandom}, {$urandom, $urandom});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
