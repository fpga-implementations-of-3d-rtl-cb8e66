// window_registers_tb -- random values are captured on load and must be
// held unchanged while the input keeps changing without load.
module window_registers_tb;
  localparam int K = 3;
  logic clk = 0, rst_n = 0, load = 0;
  logic [K*K-1:0][31:0] din = '0, win, model;
  int checks = 0, failures = 0;

  window_registers #(.K(K)) dut (.clk, .rst_n, .load, .din, .win);
  always #50 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    model = '0;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      checks++;
      if (win !== model) begin failures++; $display("FAIL cycle %0d", i); end
      for (int p = 0; p < K * K; p++) din[p] = $urandom;
      load = ($urandom_range(0, 3) == 0);
      if (load) model = din;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
