// nl_relu_tb -- random floats of both signs: with en, negative values
// become +0 and others pass; without en, everything passes.
module nl_relu_tb;
  import tb_fp_pkg::*;
  localparam int NPE = 8;
  logic en;
  logic [NPE-1:0][31:0] din, dout;
  int checks = 0, failures = 0;

  nl_relu #(.NPE(NPE)) dut (.en, .din, .dout);

  initial begin
    #100000 failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 1000; i++) begin
      en = 1'(i % 3 != 0);
      for (int k = 0; k < NPE; k++) din[k] = i2f(int'($urandom_range(0, 2000)) - 1000);
      #1;
      for (int k = 0; k < NPE; k++) begin
        real x;
        x = f2r(din[k]);
        checks++;
        if (dout[k] !== ((en && x < 0.0) ? 32'd0 : din[k])) begin
          failures++; $display("FAIL en=%0d in %h out %h", en, din[k], dout[k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
