// local_filter_buffer_tb -- random row writes and pointer writes (reduced
// size: K=3, m=32, 4 lanes), read back with one-cycle latency; pointers
// after reset are zero.
module local_filter_buffer_tb;
  localparam int K = 3, M = 32, NPE = 4, ENT_W = 13, PTR_W = 6, ROWS = K * K * M / NPE, AW = 7;
  logic clk = 0, rst_n = 0, wr_en = 0, ptr_we = 0, rd_en = 0;
  logic [AW-1:0] wr_addr = '0, rd_addr = '0;
  logic [NPE-1:0][ENT_W-1:0] wr_data = '0, rd_data;
  logic [K*K-1:0][PTR_W-1:0] ptr, ptr_model;
  logic [NPE-1:0][ENT_W-1:0] model [ROWS];
  int checks = 0, failures = 0;

  local_filter_buffer #(.K(K), .M(M), .NPE(NPE)) dut (.clk, .rst_n, .wr_en, .wr_addr, .wr_data,
    .ptr_load(ptr_we), .ptr_in(ptr_model), .rd_en, .rd_addr, .rd_data, .ptr);
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
    @(negedge clk);
    checks++;
    if (ptr !== '0) begin failures++; $display("FAIL pointers not reset"); end
    ptr_model = '0;
    for (int a = 0; a < ROWS; a++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = AW'(a);
      for (int k = 0; k < NPE; k++) wr_data[k] = ENT_W'($urandom);
      model[a] = wr_data;
      ptr_we = 0;
      if (a == ROWS - 1) begin
        ptr_we = 1;
        for (int p = 0; p < K * K; p++) ptr_model[p] = PTR_W'($urandom_range(0, M));
      end
    end
    @(negedge clk);
    wr_en = 0; ptr_we = 0;
    checks++;
    if (ptr !== ptr_model) begin failures++; $display("FAIL pointers"); end
    ptr_model = '1;   // pointers must hold without ptr_load
    @(negedge clk);
    checks++;
    if (ptr === ptr_model) begin failures++; $display("FAIL pointers not held"); end
    for (int i = 0; i < 500; i++) begin
      int a;
      a = int'($urandom_range(0, ROWS - 1));
      rd_en = 1; rd_addr = AW'(a);
      @(negedge clk);
      rd_en = 0;
      checks++;
      if (rd_data !== model[a]) begin failures++; $display("FAIL row %0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
