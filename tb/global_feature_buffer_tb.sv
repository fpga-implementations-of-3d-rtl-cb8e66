// global_feature_buffer_tb -- writes random values to every address, reads
// them back in random order and checks the data and its one-cycle latency.
module global_feature_buffer_tb;
  localparam int WDI_MAX = 16, HDI_MAX = 16, N = WDI_MAX * HDI_MAX, AW = 8;
  logic clk = 0, wr_en = 0, rd_en = 0;
  logic [AW-1:0] wr_addr = '0, rd_addr = '0;
  logic [31:0] wr_data = '0, rd_data;
  logic [31:0] model [N];
  int checks = 0, failures = 0;

  global_feature_buffer #(.WDI_MAX(WDI_MAX), .HDI_MAX(HDI_MAX)) dut (.clk, .wr_en, .wr_addr,
    .wr_data, .rd_en, .rd_addr, .rd_data);
  always #50 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int pass = 0; pass < 3; pass++) begin
      for (int a = 0; a < N; a++) begin
        @(negedge clk);
        wr_en = 1; wr_addr = AW'(a); wr_data = $urandom; model[a] = wr_data;
      end
      @(negedge clk);
      wr_en = 0;
      for (int i = 0; i < 2 * N; i++) begin
        int a;
        a = int'($urandom_range(0, N - 1));
        rd_en = 1; rd_addr = AW'(a);
        @(negedge clk);
        rd_en = 0; rd_addr = AW'($urandom);
        checks++;
        if (rd_data !== model[a]) begin failures++; $display("FAIL addr %0d", a); end
        @(negedge clk);
        checks++;
        if (rd_data !== model[a]) begin failures++; $display("FAIL hold addr %0d", a); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
