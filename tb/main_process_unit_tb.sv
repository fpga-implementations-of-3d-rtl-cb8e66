// main_process_unit_tb -- streams random CSF-encoded window positions
// (feature value, sorted nonzero filter indices encoded as relative indices,
// power-of-two weights) into the unit with random input gaps, then compares
// the m output registers with an integer model. Small integer values keep
// every float sum exact. Requires that both a full computation FIFO and a
// hazard stall occurred, and checks the minimum latency of one product.
module main_process_unit_tb;
  import tb_fp_pkg::*;
  localparam int M = 32, NPE = 4, LAT = 6, IDX_W = 5, RAW = 3;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, in_first = 0, idle, fifo_stall, hazard_stall;
  logic [31:0] in_v = '0;
  logic [NPE-1:0] in_mask = '0;
  logic [NPE-1:0][7:0] in_w = '0;
  logic [NPE-1:0][IDX_W-1:0] in_rel = '0;
  logic bulk_clear = 0, bulk_we = 0;
  logic [RAW-1:0] bulk_waddr = '0, bulk_raddr = '0;
  logic [NPE-1:0][31:0] bulk_wdata = '0, bulk_rdata;
  int checks = 0, failures = 0, n_fifo = 0, n_haz = 0;
  int model [M];

  main_process_unit #(.M(M), .NPE(NPE), .LAT(LAT), .FIFO_DEPTH(4)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_first, .in_v, .in_mask, .in_w, .in_rel,
    .bulk_clear, .bulk_we, .bulk_waddr, .bulk_wdata, .bulk_raddr, .bulk_rdata,
    .idle, .fifo_stall, .hazard_stall);
  always #50 clk = ~clk;
  always @(posedge clk) begin
    if (fifo_stall) n_fifo++;
    if (hazard_stall) n_haz++;
  end

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
          $display("FAIL %s out %0d got %h exp %h", what, r*NPE+k, bulk_rdata[k], i2f(model[r*NPE+k]));
        end
      end
    end
  endtask

  // send one row and wait until it is accepted
  task automatic send_row();
    in_valid = 1;
    #1;
    while (!in_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    in_valid = 0;
  endtask

  initial begin
    int cyc0;
    for (int j = 0; j < M; j++) model[j] = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(negedge clk);
    // one product: 3 * 2^2 into output 5; result written LAT+1 cycles after acceptance
    in_first = 1; in_v = i2f(3); in_mask = 4'b0001; in_w[0] = 8'h02; in_rel[0] = 5'd5;
    send_row();
    model[5] = 12;
    repeat (LAT) @(negedge clk);
    checks++;
    if (idle) begin failures++; $display("FAIL idle too early"); end
    @(negedge clk);
    checks++;
    if (!idle) begin failures++; $display("FAIL not idle after LAT+1"); end
    compare_all("single");
    for (int pos = 0; pos < 400; pos++) begin
      int idx[$]; int prev, v, dens;
      idx.delete();
      dens = int'($urandom_range(5, 100));
      for (int j = 0; j < M; j++) if (int'($urandom_range(1, 100)) <= dens) idx.push_back(j);
      if (idx.size() == 0) idx.push_back(int'($urandom_range(0, M - 1)));
      v = int'($urandom_range(0, 16)) - 8;
      prev = -1;
      for (int r = 0; r * NPE < idx.size(); r++) begin
        in_first = (r == 0);
        in_v = i2f(v);
        for (int k = 0; k < NPE; k++) begin
          in_mask[k] = (r * NPE + k < idx.size());
          in_w[k] = {1'($urandom), 7'($urandom_range(0, 3))};
          in_rel[k] = IDX_W'($urandom);
          if (in_mask[k]) begin
            int j;
            j = idx[r*NPE+k];
            in_rel[k] = IDX_W'(j - prev - 1);
            prev = j;
            model[j] += v * (1 << in_w[k][6:0]) * (in_w[k][7] ? -1 : 1);
          end
        end
        send_row();
        if ($urandom_range(0, 3) == 0) repeat ($urandom_range(1, 3)) @(negedge clk);
      end
    end
    cyc0 = 0;
    while (!idle && cyc0 < 1000) begin @(negedge clk); cyc0++; end
    compare_all("random");
    checks++;
    if (n_fifo == 0 || n_haz == 0) begin
      failures++; $display("FAIL fifo stalls %0d hazard stalls %0d", n_fifo, n_haz);
    end
    $display("fifo stalls %0d, hazard stalls %0d", n_fifo, n_haz);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
