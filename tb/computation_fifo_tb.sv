// computation_fifo_tb -- random push/pop traffic against a queue model:
// data order, full and empty flags, count, and pushes refused when full.
module computation_fifo_tb;
  localparam int W = 24, DEPTH = 16;
  logic clk = 0, rst_n = 0, push = 0, pop = 0, full, empty;
  logic [W-1:0] din = '0, dout;
  logic [$clog2(DEPTH+1)-1:0] count;
  int checks = 0, failures = 0, nfull = 0;
  logic [W-1:0] model [$];

  computation_fifo #(.W(W), .DEPTH(DEPTH)) dut (.clk, .rst_n, .push, .din, .full, .pop,
                                               .dout, .empty, .count);
  always #50 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int i = 0; i < 20000; i++) begin
      @(negedge clk);
      checks++;
      if (count != model.size() || full != (model.size() == DEPTH) || empty != (model.size() == 0)) begin
        failures++; $display("FAIL flags count=%0d model=%0d", count, model.size());
      end
      if (model.size() > 0) begin
        checks++;
        if (dout !== model[0]) begin failures++; $display("FAIL data %h exp %h", dout, model[0]); end
      end
      if (full) nfull++;
      push = ($urandom_range(0, 99) < ((i / 2000) % 2 ? 70 : 35));
      pop  = ($urandom_range(0, 99) < ((i / 2000) % 2 ? 35 : 70)) && !empty;
      push = push && !full;
      din  = W'($urandom);
      @(posedge clk);
      if (pop) void'(model.pop_front());
      if (push) model.push_back(din);
    end
    checks++;
    if (nfull == 0) begin failures++; $display("FAIL never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
