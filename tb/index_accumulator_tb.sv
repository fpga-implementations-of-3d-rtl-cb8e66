// index_accumulator_tb -- random sparse filter columns are encoded into
// relative indices (zeros skipped since the previous nonzero weight), cut
// into rows of NPE lanes and fed through the accumulator; every absolute
// index must equal the original filter number.
module index_accumulator_tb;
  localparam int NPE = 8, IDX_W = 9, M = 512;
  logic clk = 0, rst_n = 0, advance = 0, first = 0;
  logic [NPE-1:0] mask = '0;
  logic [NPE-1:0][IDX_W-1:0] rel = '0, abs_idx;
  logic [IDX_W-1:0] last_idx;
  int checks = 0, failures = 0;

  index_accumulator #(.NPE(NPE), .IDX_W(IDX_W)) dut (.clk, .rst_n, .advance, .first,
                                                    .mask, .rel, .abs_idx, .last_idx);
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
    for (int col = 0; col < 300; col++) begin
      int idx[$]; int prev, dens, n;
      idx.delete();
      dens = (col % 5 == 0) ? 100 : int'($urandom_range(1, 60));
      for (int j = 0; j < M; j++) if (int'($urandom_range(0, 99)) < dens) idx.push_back(j);
      n = idx.size();
      prev = -1;
      for (int r = 0; r * NPE < n; r++) begin
        @(negedge clk);
        first = (r == 0); advance = 1;
        for (int k = 0; k < NPE; k++) begin
          mask[k] = (r * NPE + k < n);
          if (mask[k]) begin
            rel[k] = IDX_W'(idx[r*NPE+k] - prev - 1);
            prev = idx[r*NPE+k];
          end else rel[k] = IDX_W'($urandom);
        end
        #1;
        for (int k = 0; k < NPE; k++) if (mask[k]) begin
          checks++;
          if (abs_idx[k] !== IDX_W'(idx[r*NPE+k])) begin
            failures++;
            $display("FAIL col %0d row %0d lane %0d got %0d exp %0d", col, r, k, abs_idx[k], idx[r*NPE+k]);
          end
        end
      end
      @(negedge clk);
      advance = 0;
      // a row that is not advanced must not disturb the base
      first = 0; mask = '1; rel = '0;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
