// center_controller_tb -- runs the controller against simple models of the
// rest of the processor (weight fetch finishing a few cycles after start, a
// main process unit that is briefly busy, a host answering channel requests
// after a delay) for CONV layers with stride 1 and 2 and for an FC layer.
// Checks: channel request order, filter rows copied (only rows in use, right
// addresses), feature-buffer read addresses and line-buffer write positions,
// window loads, line-buffer shifts, one clear per position for the first
// channel and one partial-sum reload per position for later channels, every
// output row written once per channel, and the FC sequence.
module center_controller_tb;
  localparam int K = 3, M = 32, NPE = 4, WDO_MAX = 4, HDO_MAX = 4;
  localparam int WDI_MAX = WDO_MAX - 1 + K, HDI_MAX = HDO_MAX - 1 + K, RPP = M / NPE;
  localparam int PTR_W = 6, FAW = 7, GAW = 6, OAW = 7, RAW = 3, LRW = 2, LCW = 3;
  logic clk = 0, rst_n = 0, start = 0, mode_fc = 0, ch_ready = 0, fc_end = 0, wf_done = 0, mpu_idle = 1;
  logic [15:0] cfg_c = 0, ch_idx;
  logic [7:0] cfg_wdo = 0, cfg_hdo = 0;
  logic [3:0] cfg_stride = 1;
  logic busy, done, ch_req, fc_sel, gfb_rd_en, lfb_wr_en, lfb_ptr_load, gfe_rd_en, lb_wr_en, lb_shift;
  logic win_load, wf_start, bulk_clear, bulk_we, gob_rd_en, gob_wr_en, psum_reload;
  logic [K*K-1:0][PTR_W-1:0] gfb_ptr;
  logic [FAW-1:0] gfb_rd_addr, lfb_wr_addr;
  logic [GAW-1:0] gfe_rd_addr;
  logic [LRW-1:0] lb_wr_row;
  logic [LCW-1:0] lb_wr_col;
  logic [RAW-1:0] bulk_waddr, bulk_raddr;
  logic [OAW-1:0] gob_rd_addr, gob_wr_addr;
  int checks = 0, failures = 0;
  int n_chreq, n_ptrload, n_win, n_wf, n_shift, n_clear, n_reload, n_done, n_bulkwe, n_gobrd;
  int gobwr [int];
  int lfbq [$], gfeq [$], lbq [$], chq [$];

  center_controller #(.K(K), .M(M), .NPE(NPE), .WDO_MAX(WDO_MAX), .HDO_MAX(HDO_MAX)) dut (
    .clk, .rst_n, .start, .mode_fc, .cfg_c, .cfg_wdo, .cfg_hdo, .cfg_stride, .busy, .done,
    .ch_req, .ch_idx, .ch_ready, .fc_end, .fc_sel, .gfb_ptr, .gfb_rd_en, .gfb_rd_addr,
    .lfb_wr_en, .lfb_wr_addr, .lfb_ptr_load, .gfe_rd_en, .gfe_rd_addr, .lb_wr_en, .lb_wr_row,
    .lb_wr_col, .lb_shift, .win_load, .wf_start, .wf_done, .mpu_idle, .bulk_clear, .bulk_we,
    .bulk_waddr, .bulk_raddr, .gob_rd_en, .gob_rd_addr, .gob_wr_en, .gob_wr_addr, .psum_reload);
  always #50 clk = ~clk;

  task automatic expect_eq(int got, int exp, string what);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d exp %0d", what, got, exp); end
  endtask

  // environment models and event monitors
  always @(posedge clk) if (rst_n) begin
    if (ch_req && ch_ready) begin n_chreq++; chq.push_back(int'(ch_idx)); end
    if (lfb_ptr_load) n_ptrload++;
    if (win_load) n_win++;
    if (wf_start) n_wf++;
    if (lb_shift) n_shift++;
    if (bulk_clear) n_clear++;
    if (psum_reload) n_reload++;
    if (done) n_done++;
    if (bulk_we) n_bulkwe++;
    if (gob_rd_en) n_gobrd++;
    if (gob_wr_en) gobwr[int'(gob_wr_addr)] = gobwr.exists(int'(gob_wr_addr)) ? gobwr[int'(gob_wr_addr)] + 1 : 1;
    if (lfb_wr_en) begin
      checks++;
      if (lfbq.size() == 0 || lfbq.pop_front() != int'(lfb_wr_addr)) begin
        failures++; $display("FAIL filter copy address %0d", lfb_wr_addr);
      end
    end
    if (gfe_rd_en) begin
      checks++;
      if (gfeq.size() == 0 || gfeq.pop_front() != int'(gfe_rd_addr)) begin
        failures++; $display("FAIL feature read address %0d", gfe_rd_addr);
      end
    end
    if (lb_wr_en) begin
      checks++;
      if (lbq.size() == 0 || lbq.pop_front() != int'({lb_wr_row, lb_wr_col})) begin
        failures++; $display("FAIL line buffer write r%0d c%0d", lb_wr_row, lb_wr_col);
      end
    end
  end

  initial begin   // weight fetch finishes 1..6 cycles after start, then the unit drains
    forever begin
      @(posedge clk);
      if (wf_start) begin
        repeat ($urandom_range(1, 6)) @(posedge clk);
        #1 wf_done = 1; mpu_idle = 0;
        @(posedge clk);
        #1 wf_done = 0;
        repeat ($urandom_range(0, 4)) @(posedge clk);
        #1 mpu_idle = 1;
      end
    end
  end

  initial begin   // host answers channel requests after a delay
    forever begin
      @(posedge clk);
      if (ch_req && !ch_ready) begin
        repeat ($urandom_range(0, 5)) @(posedge clk);
        #1 ch_ready = 1;
        @(posedge clk);
        #1 ch_ready = 0;
      end
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_conv(int c, int wdo, int hdo, int s);
    int wdi, rows;
    n_chreq = 0; n_ptrload = 0; n_win = 0; n_wf = 0; n_shift = 0; n_clear = 0; n_reload = 0;
    n_done = 0; n_bulkwe = 0; n_gobrd = 0; gobwr.delete(); chq.delete();
    wdi = (wdo - 1) * s + K;
    for (int p = 0; p < K * K; p++) gfb_ptr[p] = ($urandom_range(0, 2) == 0) ? '0 : PTR_W'($urandom_range(1, M));
    for (int ch = 0; ch < c; ch++) begin
      for (int p = 0; p < K * K; p++)
        for (int r = 0; r * NPE < int'(gfb_ptr[p]); r++) lfbq.push_back(p * RPP + r);
      for (int y = 0; y < hdo; y++)
        for (int r = 0; r < K; r++)
          for (int col = 0; col < wdi; col++) begin
            gfeq.push_back((y * s + r) * WDI_MAX + col);
            lbq.push_back(int'({2'(r), 3'(col)}));
          end
    end
    @(negedge clk);
    mode_fc = 0; cfg_c = 16'(c); cfg_wdo = 8'(wdo); cfg_hdo = 8'(hdo); cfg_stride = 4'(s);
    start = 1;
    @(negedge clk);
    start = 0;
    while (busy) @(negedge clk);
    expect_eq(n_done, 1, "done pulses");
    expect_eq(n_chreq, c, "channel requests");
    for (int i = 0; i < c; i++) expect_eq(chq[i], i, "channel order");
    expect_eq(n_ptrload, c, "pointer loads");
    expect_eq(lfbq.size() + gfeq.size() + lbq.size(), 0, "copies left over");
    expect_eq(n_win, c * wdo * hdo, "window loads");
    expect_eq(n_wf, c * wdo * hdo, "3D-SIMD computations");
    expect_eq(n_shift, c * hdo * (wdo - 1) * s, "line buffer shifts");
    expect_eq(n_clear, wdo * hdo, "register clears");
    expect_eq(n_reload, (c - 1) * wdo * hdo, "partial-sum reloads");
    expect_eq(n_gobrd, (c - 1) * wdo * hdo * RPP, "partial-sum rows read");
    expect_eq(n_bulkwe, (c - 1) * wdo * hdo * RPP, "partial-sum rows loaded");
    expect_eq(gobwr.num(), wdo * hdo * RPP, "output rows written");
    foreach (gobwr[a]) expect_eq(gobwr[a], c, "writes per output row");
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    run_conv(3, 4, 4, 1);
    run_conv(2, 2, 2, 2);
    run_conv(1, 1, 1, 1);
    // FC layer
    n_done = 0; gobwr.delete(); n_clear = 0;
    @(negedge clk);
    mode_fc = 1; start = 1;
    @(negedge clk);
    start = 0; mode_fc = 0;
    repeat (3) @(negedge clk);
    expect_eq(int'(fc_sel), 1, "fc stream selected");
    fc_end = 1;
    @(negedge clk);
    fc_end = 0;
    while (busy) @(negedge clk);
    expect_eq(n_clear, 1, "fc clear");
    expect_eq(n_done, 1, "fc done");
    expect_eq(gobwr.num(), RPP, "fc rows written");
    for (int r = 0; r < RPP; r++) expect_eq(gobwr.exists(r) ? 1 : 0, 1, "fc row address");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
