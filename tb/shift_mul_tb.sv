// shift_mul_tb -- checks the shift multiplier against real arithmetic:
// random normal values times +/-2^s for shifts in -64..63, with products in
// the normal range compared bit-exactly, plus zero, underflow, overflow and
// infinity cases.
module shift_mul_tb;
  import tb_fp_pkg::*;
  logic [31:0] v, p;
  logic [7:0]  w;
  int checks = 0, failures = 0;

  shift_mul dut (.v, .w, .p);

  task automatic check(logic [31:0] exp_p, string what);
    checks++;
    if (p !== exp_p) begin
      failures++;
      $display("FAIL %s: v=%h w=%h got %h exp %h", what, v, w, p, exp_p);
    end
  endtask

  initial begin
    #1000000 failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2000; i++) begin
      int s, e;
      real rv;
      e = 40 + int'($urandom_range(0, 170));
      v = {1'($urandom), 8'(e), 23'($urandom)};
      s = int'($urandom_range(0, 127)) - 64;
      w = {1'($urandom), 7'(s)};
      rv = f2r(v) * (2.0 ** s) * (w[7] ? -1.0 : 1.0);
      #1;
      check(r2f(rv), "random");
    end
    v = 32'h0000_0000; w = 8'h05; #1; check(32'h0000_0000, "zero");
    v = 32'h8000_0000; w = 8'h85; #1; check(32'h0000_0000, "neg zero times neg");
    v = 32'h0080_0000; w = 8'h7F; #1; check(32'h0000_0000, "underflow");
    v = 32'h7F00_0000; w = 8'h02; #1; check(32'h7F80_0000, "overflow");
    v = 32'hFF80_0000; w = 8'h81; #1; check(32'h7F80_0000, "inf sign");
    v = 32'h3F80_0000; w = 8'h83; #1; check(32'hC100_0000, "1 * -8");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
