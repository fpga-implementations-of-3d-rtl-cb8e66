// weight_fetch_tb -- a behavioural local filter buffer (one-cycle read) with
// random rows and random pointers, some zero, is walked by the weight fetch
// under random backpressure. Every output row must match the expected
// sequence (position order, row order, window value, lane mask, first flag,
// entries); positions with no weights must be skipped; done must follow the
// last row. Without backpressure the run must take at most rows + skipped
// positions + 4 cycles.
module weight_fetch_tb;
  localparam int K = 3, M = 32, NPE = 4, IDX_W = 5, PTR_W = 6, ENT_W = 13;
  localparam int RPP = M / NPE, ROWS = K * K * RPP, AW = 7;
  logic clk = 0, rst_n = 0, start = 0, done, lfb_rd_en, out_valid, out_ready = 1, out_first, zero_skip;
  logic [K*K-1:0][31:0] win;
  logic [K*K-1:0][PTR_W-1:0] ptr;
  logic [AW-1:0] lfb_rd_addr;
  logic [NPE-1:0][ENT_W-1:0] lfb_rd_data, mem [ROWS];
  logic [31:0] out_v;
  logic [NPE-1:0] out_mask;
  logic [NPE-1:0][7:0] out_w;
  logic [NPE-1:0][IDX_W-1:0] out_rel;
  int checks = 0, failures = 0, skips = 0, ndone = 0, cyc = 0;
  // expected rows: {first, v, mask, data}
  logic [1+32+NPE+NPE*ENT_W-1:0] expq [$];

  weight_fetch #(.K(K), .M(M), .NPE(NPE)) dut (.clk, .rst_n, .start, .done, .win, .ptr,
    .lfb_rd_en, .lfb_rd_addr, .lfb_rd_data, .out_valid, .out_ready, .out_first, .out_v,
    .out_mask, .out_w, .out_rel, .zero_skip);
  always #50 clk = ~clk;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (lfb_rd_en) lfb_rd_data <= mem[lfb_rd_addr];
    if (rst_n && zero_skip) skips++;
    if (rst_n && done) ndone++;
    if (rst_n && out_valid && out_ready) begin
      logic [NPE-1:0][ENT_W-1:0] d;
      for (int k = 0; k < NPE; k++) d[k] = {out_w[k], out_rel[k]};
      checks++;
      if (expq.size() == 0) begin failures++; $display("FAIL extra row at %0d", cyc); end
      else if ({out_first, out_v, out_mask, d} !== expq.pop_front()) begin
        failures++; $display("FAIL row mismatch at cycle %0d", cyc);
      end
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < ROWS; r++) for (int k = 0; k < NPE; k++) mem[r][k] = ENT_W'($urandom);
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int t = 0; t < 60; t++) begin
      int nrows, nzero, c0, exp_skips;
      @(negedge clk);
      nrows = 0; nzero = 0;
      for (int p = 0; p < K * K; p++) begin
        win[p] = $urandom;
        ptr[p] = ($urandom_range(0, 3) == 0) ? '0 : PTR_W'($urandom_range(1, M));
        if (t == 0) ptr[p] = PTR_W'(M);
        if (ptr[p] == 0) nzero++;
        for (int r = 0; r * NPE < int'(ptr[p]); r++) begin
          logic [NPE-1:0] mk;
          for (int k = 0; k < NPE; k++) mk[k] = (r * NPE + k < int'(ptr[p]));
          expq.push_back({r == 0, win[p], mk, mem[p*RPP + r]});
          nrows++;
        end
      end
      exp_skips = skips + nzero;
      start = 1;
      @(negedge clk);
      start = 0;
      c0 = cyc;
      while (!done) begin
        @(negedge clk);
        out_ready = (t % 2 == 0) ? 1'b1 : 1'($urandom_range(0, 2) != 0);
      end
      checks++;
      if (t % 2 == 0 && cyc - c0 > nrows + nzero + 4) begin
        failures++; $display("FAIL slow: %0d cycles for %0d rows", cyc - c0, nrows);
      end
      @(negedge clk);
      out_ready = 1;
      checks++;
      if (expq.size() != 0 || skips != exp_skips) begin
        failures++; $display("FAIL %0d rows missing, skips %0d exp %0d", expq.size(), skips, exp_skips);
      end
    end
    checks++;
    if (ndone != 60) begin failures++; $display("FAIL done count %0d", ndone); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
