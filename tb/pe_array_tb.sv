// pe_array_tb -- random product rows (distinct indices within a row, heavy
// reuse across rows) are added into the output registers; the final register
// values are compared with an integer model (all values are small integers,
// so every float sum is exact). Also checks the LAT-cycle latency of one
// addition, the bulk write/read/clear port, and that hazard stalls occur.
module pe_array_tb;
  import tb_fp_pkg::*;
  localparam int M = 32, NPE = 4, LAT = 5, IDX_W = 5, RAW = 3;
  logic clk = 0, rst_n = 0;
  logic row_valid = 0, row_ready, busy, hazard_stall;
  logic [NPE-1:0] row_mask = '0;
  logic [NPE-1:0][IDX_W-1:0] row_idx = '0;
  logic [NPE-1:0][31:0] row_prod = '0, bulk_wdata = '0, bulk_rdata;
  logic bulk_clear = 0, bulk_we = 0;
  logic [RAW-1:0] bulk_waddr = '0, bulk_raddr = '0;
  int checks = 0, failures = 0, stalls = 0;
  int model [M];

  pe_array #(.M(M), .NPE(NPE), .LAT(LAT)) dut (.clk, .rst_n, .row_valid, .row_ready,
    .row_mask, .row_idx, .row_prod, .bulk_clear, .bulk_we, .bulk_waddr, .bulk_wdata,
    .bulk_raddr, .bulk_rdata, .busy, .hazard_stall);
  always #50 clk = ~clk;
  always @(posedge clk) if (hazard_stall) stalls++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare_all(string what);
    for (int r = 0; r < M / NPE; r++) begin
      bulk_raddr = RAW'(r);
      #1;
      for (int k = 0; k < NPE; k++) begin
        checks++;
        if (bulk_rdata[k] !== i2f(model[r*NPE+k])) begin
          failures++;
          $display("FAIL %s reg %0d got %h exp %h (%0d)", what, r*NPE+k, bulk_rdata[k], i2f(model[r*NPE+k]), model[r*NPE+k]);
        end
      end
    end
  endtask

  initial begin
    for (int j = 0; j < M; j++) model[j] = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(negedge clk);
    // latency of a single addition
    row_valid = 1; row_mask = 4'b0001; row_idx[0] = 5'd7; row_prod[0] = i2f(5);
    @(negedge clk);
    row_valid = 0; model[7] = 5;
    repeat (LAT - 1) @(negedge clk);
    checks++;
    if (!busy) begin failures++; $display("FAIL result earlier than LAT"); end
    @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("FAIL result later than LAT"); end
    compare_all("latency");
    // random rows
    for (int i = 0; i < 3000; i++) begin
      int pool[$];
      @(negedge clk);
      for (int j = 0; j < M; j++) pool.push_back(j);
      pool.shuffle();
      row_valid = ($urandom_range(0, 9) < 8);
      for (int k = 0; k < NPE; k++) begin
        row_mask[k] = (k == 0) || ($urandom_range(0, 3) != 0);
        row_idx[k]  = IDX_W'(pool[k] % (i % 3 == 0 ? 8 : M));   // small index set: hazards
        row_prod[k] = i2f(int'($urandom_range(0, 40)) - 20);
      end
      for (int k = 1; k < NPE; k++) if (row_idx[k] == row_idx[0]) row_mask[k] = 0;
      for (int k = 1; k < NPE; k++)
        for (int q = 1; q < k; q++) if (row_mask[q] && row_idx[q] == row_idx[k]) row_mask[k] = 0;
      #1;
      while (row_valid && !row_ready) begin
        @(negedge clk);
        #1;
      end
      if (row_valid)
        for (int k = 0; k < NPE; k++)
          if (row_mask[k]) model[row_idx[k]] += int'($bitstoreal({row_prod[k][31], 11'(int'(row_prod[k][30:23]) - 127 + 1023), row_prod[k][22:0], 29'd0})) * (row_prod[k][30:23] == 0 ? 0 : 1);
    end
    @(negedge clk);
    row_valid = 0;
    while (busy) @(negedge clk);
    compare_all("random");
    // bulk write, then clear
    bulk_we = 1; bulk_waddr = 3'd2;
    for (int k = 0; k < NPE; k++) begin bulk_wdata[k] = i2f(100 + k); model[2*NPE+k] = 100 + k; end
    @(negedge clk);
    bulk_we = 0;
    compare_all("bulk write");
    bulk_clear = 1;
    @(negedge clk);
    bulk_clear = 0;
    for (int j = 0; j < M; j++) model[j] = 0;
    compare_all("clear");
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL no hazard stall seen"); end
    $display("hazard stalls: %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
