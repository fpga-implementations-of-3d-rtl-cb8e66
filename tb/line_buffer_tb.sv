// line_buffer_tb -- loads K rows of random values, then shifts column by
// column and checks the K x K head against the model after every shift,
// including a write in the same cycle as a shift.
module line_buffer_tb;
  localparam int K = 3, W = 16;
  logic clk = 0, rst_n = 0, wr_en = 0, shift = 0;
  logic [1:0] wr_row = '0;
  logic [3:0] wr_col = '0;
  logic [31:0] wr_data = '0;
  logic [K*K-1:0][31:0] head;
  logic [31:0] model [K][W];
  int checks = 0, failures = 0;

  line_buffer #(.K(K), .WDI_MAX(W)) dut (.clk, .rst_n, .wr_en, .wr_row, .wr_col, .wr_data, .shift, .head);
  always #50 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_head();
    for (int r = 0; r < K; r++)
      for (int c = 0; c < K; c++) begin
        checks++;
        if (head[r*K + c] !== model[r][c]) begin
          failures++; $display("FAIL head r%0d c%0d got %h exp %h", r, c, head[r*K+c], model[r][c]);
        end
      end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int pass = 0; pass < 20; pass++) begin
      for (int r = 0; r < K; r++)
        for (int c = 0; c < W; c++) begin
          @(negedge clk);
          wr_en = 1; wr_row = 2'(r); wr_col = 4'(c); wr_data = $urandom; model[r][c] = wr_data;
        end
      @(negedge clk);
      wr_en = 0;
      check_head();
      for (int s = 0; s < W - K; s++) begin
        shift = 1;
        for (int r = 0; r < K; r++) begin
          for (int c = 0; c < W - 1; c++) model[r][c] = model[r][c+1];
          model[r][W-1] = 0;
        end
        if (s == 3) begin
          wr_en = 1; wr_row = 2'd1; wr_col = 4'd0; wr_data = 32'hCAFE_0000 + 32'(pass);
          model[1][0] = wr_data;
        end
        @(negedge clk);
        shift = 0; wr_en = 0;
        check_head();
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
