// global_output_buffer_tb -- full-size buffer (100352 words in rows of 8):
// random row writes over the whole address range, read back after all
// writes with one-cycle latency, and a read in the same cycle as a write to
// the same row returning the old contents.
module global_output_buffer_tb;
  localparam int NPE = 8, WORDS = 100352, ROWS = WORDS / NPE, AW = 14;
  logic clk = 0, wr_en = 0, rd_en = 0;
  logic [AW-1:0] wr_addr = '0, rd_addr = '0;
  logic [NPE-1:0][31:0] wr_data = '0, rd_data;
  logic [NPE-1:0][31:0] model [int];
  int checks = 0, failures = 0;

  global_output_buffer #(.WORDS(WORDS), .NPE(NPE)) dut (.clk, .wr_en, .wr_addr, .wr_data,
    .rd_en, .rd_addr, .rd_data);
  always #50 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int addrs[$];
    for (int i = 0; i < 3000; i++) begin
      int a;
      a = (i == 0) ? ROWS - 1 : (i == 1) ? 0 : int'($urandom_range(0, ROWS - 1));
      @(negedge clk);
      wr_en = 1; wr_addr = AW'(a);
      for (int k = 0; k < NPE; k++) wr_data[k] = $urandom;
      model[a] = wr_data;
      addrs.push_back(a);
    end
    @(negedge clk);
    wr_en = 0;
    foreach (addrs[i]) begin
      rd_en = 1; rd_addr = AW'(addrs[i]);
      @(negedge clk);
      rd_en = 0;
      checks++;
      if (rd_data !== model[addrs[i]]) begin failures++; $display("FAIL row %0d", addrs[i]); end
    end
    // read-during-write: old data
    rd_en = 1; rd_addr = AW'(addrs[0]); wr_en = 1; wr_addr = AW'(addrs[0]); wr_data = '1;
    @(negedge clk);
    rd_en = 0; wr_en = 0;
    checks++;
    if (rd_data !== model[addrs[0]]) begin failures++; $display("FAIL read during write"); end
    rd_en = 1;
    @(negedge clk);
    checks++;
    if (rd_data !== '1) begin failures++; $display("FAIL new data"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
