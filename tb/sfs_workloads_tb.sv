// sfs_workloads_tb -- workload-shaped runs of the processor with every
// parameter at its default. A VGG16 CONV5-3 division (14 x 14 outputs, 512
// filters of 3 x 3, stride 1) over its first 4 input channels with ReLU, then
// LeNet's two FC layers (800 -> 500 and 500 -> 10) streamed in FC mode, with
// densities typical of pruned networks. The printed cycle counts give the
// cost per input channel and per FC layer; the results are checked against an
// integer reference as in sfs_processor_tb.
module sfs_workloads_tb;
  import tb_fp_pkg::*;
  localparam int K = 3, M = 512, NPE = 8, WDO_MAX = 14, HDO_MAX = 14;
  localparam bit FULL = 1;
  localparam int WDI_MAX = WDO_MAX - 1 + K, HDI_MAX = HDO_MAX - 1 + K, RPP = M / NPE;
  localparam int IDX_W = $clog2(M), PTR_W = $clog2(M + 1), ENT_W = 8 + IDX_W;
  localparam int FAW = $clog2(K * K * RPP), GAW = $clog2(WDI_MAX * HDI_MAX);
  localparam int OAW = $clog2(WDO_MAX * HDO_MAX * RPP), PAW = $clog2(K * K);
  localparam int CMAX = 4;

  logic clk = 0, rst_n = 0;
  logic start = 0, mode_fc = 0, cfg_relu = 0, busy, done, ch_req, ch_ready = 0;
  logic [15:0] cfg_c = 0, ch_idx;
  logic [7:0] cfg_wdo = 0, cfg_hdo = 0;
  logic [3:0] cfg_stride = 1;
  logic feat_we = 0, filt_we = 0, ptr_we = 0;
  logic [GAW-1:0] feat_addr = '0;
  logic [31:0] feat_wdata = '0;
  logic [FAW-1:0] filt_addr = '0;
  logic [NPE-1:0][ENT_W-1:0] filt_wdata = '0;
  logic [PAW-1:0] ptr_addr = '0;
  logic [PTR_W-1:0] ptr_wdata = '0;
  logic fc_valid = 0, fc_ready, fc_first = 0, fc_end = 0;
  logic [31:0] fc_v = '0;
  logic [NPE-1:0] fc_mask = '0;
  logic [NPE-1:0][7:0] fc_w = '0;
  logic [NPE-1:0][IDX_W-1:0] fc_rel = '0;
  logic out_rd_en = 0;
  logic [OAW-1:0] out_rd_addr = '0;
  logic [NPE-1:0][31:0] out_rd_data;
  logic ev_fifo_stall, ev_hazard_stall, ev_zero_skip, ev_psum_reload;

  int checks = 0, failures = 0, cyc = 0;
  int n_fifo = 0, n_haz = 0, n_skip = 0, n_reload = 0, n_shift = 0, n_stride2 = 0, n_relu = 0, n_fc = 0;
  // layer data: features and weight codes (0 = zero weight)
  int feat [CMAX][HDI_MAX][WDI_MAX];
  logic [7:0] wc [CMAX][K*K][M];
  int cur_s;

  sfs_processor dut (
    .clk, .rst_n, .start, .mode_fc, .cfg_c, .cfg_wdo, .cfg_hdo, .cfg_stride, .cfg_relu,
    .busy, .done, .ch_req, .ch_idx, .ch_ready, .feat_we, .feat_addr, .feat_wdata,
    .filt_we, .filt_addr, .filt_wdata, .ptr_we, .ptr_addr, .ptr_wdata, .fc_valid, .fc_ready,
    .fc_first, .fc_v, .fc_mask, .fc_w, .fc_rel, .fc_end, .out_rd_en, .out_rd_addr,
    .out_rd_data, .ev_fifo_stall, .ev_hazard_stall, .ev_zero_skip, .ev_psum_reload);
  always #50 clk = ~clk;

  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (ev_fifo_stall) n_fifo++;
    if (ev_hazard_stall) n_haz++;
    if (ev_zero_skip) n_skip++;
    if (ev_psum_reload) n_reload++;
    if (dut.lb_shift) begin
      n_shift++;
      if (cur_s == 2) n_stride2++;
    end
  end

  initial begin
    repeat (FULL ? 3000000 : 400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int wval(logic [7:0] c);
    if (c == 0) return 0;
    return (c[7] ? -1 : 1) * (1 << c[6:0]);
  endfunction

  function automatic logic [7:0] rnd_w(int dens);
    if (int'($urandom_range(1, 100)) > dens) return 8'h00;
    return {1'($urandom), 7'($urandom_range(0, 2))};
  endfunction

  // host: answer a channel request
  task automatic load_channel(int ch, int wdi, int hdi);
    for (int r = 0; r < hdi; r++)
      for (int c = 0; c < wdi; c++) begin
        @(negedge clk);
        feat_we = 1; feat_addr = GAW'(r * WDI_MAX + c); feat_wdata = i2f(feat[ch][r][c]);
      end
    @(negedge clk);
    feat_we = 0;
    for (int p = 0; p < K * K; p++) begin
      int n, prev;
      n = 0; prev = -1;
      filt_wdata = '0;
      for (int j = 0; j < M; j++) if (wc[ch][p][j] != 0) begin
        filt_wdata[n % NPE] = {wc[ch][p][j], IDX_W'(j - prev - 1)};
        prev = j;
        n++;
        if (n % NPE == 0) begin
          filt_we = 1; filt_addr = FAW'(p * RPP + n / NPE - 1);
          @(negedge clk);
          filt_we = 0; filt_wdata = '0;
        end
      end
      if (n % NPE != 0) begin
        filt_we = 1; filt_addr = FAW'(p * RPP + n / NPE);
        @(negedge clk);
        filt_we = 0;
      end
      ptr_we = 1; ptr_addr = PAW'(p); ptr_wdata = PTR_W'(n);
      @(negedge clk);
      ptr_we = 0;
    end
    ch_ready = 1;
    @(negedge clk);
    ch_ready = 0;
  endtask

  task automatic check_outputs(int npos, int refv [], bit relu, string what);
    for (int pos = 0; pos < npos; pos++)
      for (int r = 0; r < RPP; r++) begin
        out_rd_en = 1; out_rd_addr = OAW'(pos * RPP + r);
        @(negedge clk);
        out_rd_en = 0;
        for (int k = 0; k < NPE; k++) begin
          int e;
          e = refv[pos * M + r * NPE + k];
          if (relu && e < 0) begin
            e = 0;
            n_relu++;
          end
          checks++;
          if (out_rd_data[k] !== i2f(e)) begin
            failures++;
            if (failures < 20)
              $display("FAIL %s pos %0d out %0d got %h exp %h (%0d)", what, pos, r*NPE+k, out_rd_data[k], i2f(e), e);
          end
        end
      end
  endtask

  task automatic run_conv(int c, int wdo, int hdo, int s, bit relu);
    int wdi, hdi, t0, nmac;
    int refv [];
    wdi = (wdo - 1) * s + K;
    hdi = (hdo - 1) * s + K;
    cur_s = s;
    refv = new[wdo * hdo * M];
    nmac = 0;
    for (int ch = 0; ch < c; ch++) begin
      for (int r = 0; r < hdi; r++)
        for (int x = 0; x < wdi; x++) feat[ch][r][x] = int'($urandom_range(0, 6)) - 3;
      for (int p = 0; p < K * K; p++) begin
        int dens;
        dens = (p == 4 && ch == 0) ? 0 : 35;
        for (int j = 0; j < M; j++) wc[ch][p][j] = rnd_w(dens);
      end
    end
    for (int y = 0; y < hdo; y++)
      for (int x = 0; x < wdo; x++)
        for (int j = 0; j < M; j++) begin
          int acc;
          acc = 0;
          for (int ch = 0; ch < c; ch++)
            for (int r = 0; r < K; r++)
              for (int cc = 0; cc < K; cc++) begin
                acc += wval(wc[ch][r*K+cc][j]) * feat[ch][y*s+r][x*s+cc];
                if (wc[ch][r*K+cc][j] != 0) nmac++;
              end
          refv[(y * wdo + x) * M + j] = acc;
        end
    @(negedge clk);
    mode_fc = 0; cfg_c = 16'(c); cfg_wdo = 8'(wdo); cfg_hdo = 8'(hdo); cfg_stride = 4'(s); cfg_relu = relu;
    start = 1;
    @(negedge clk);
    start = 0;
    t0 = cyc;
    while (busy) begin
      if (ch_req) load_channel(int'(ch_idx), wdi, hdi);
      else @(negedge clk);
    end
    $display("CONV C=%0d %0dx%0d S=%0d: %0d nonzero MACs in %0d cycles (incl. host loading)", c, wdo, hdo, s, nmac, cyc - t0);
    check_outputs(wdo * hdo, refv, relu, "conv");
  endtask

  task automatic run_fc(int nin, int nout, int dens, bit relu);
    int t0;
    int refv [];
    refv = new[M];
    for (int j = 0; j < M; j++) refv[j] = 0;
    @(negedge clk);
    mode_fc = 1; cfg_relu = relu; start = 1;
    @(negedge clk);
    start = 0; mode_fc = 0;
    t0 = cyc;
    for (int p = 0; p < nin; p++) begin
      int v, prev, n;
      int idx [$];
      logic [7:0] w [$];
      idx.delete(); w.delete();
      v = int'($urandom_range(0, 8)) - 4;
      for (int j = 0; j < M; j++) begin
        logic [7:0] c;
        c = (j < nout) ? rnd_w(dens) : 8'h00;
        if (c != 0) begin idx.push_back(j); w.push_back(c); refv[j] += v * wval(c); end
      end
      prev = -1;
      n = idx.size();
      for (int r = 0; r * NPE < n; r++) begin
        fc_valid = 1; fc_first = (r == 0); fc_v = i2f(v);
        for (int k = 0; k < NPE; k++) begin
          fc_mask[k] = (r * NPE + k < n);
          fc_w[k] = fc_mask[k] ? w[r*NPE+k] : 8'h00;
          fc_rel[k] = '0;
          if (fc_mask[k]) begin fc_rel[k] = IDX_W'(idx[r*NPE+k] - prev - 1); prev = idx[r*NPE+k]; end
        end
        #1;
        while (!fc_ready) begin @(negedge clk); #1; end
        @(negedge clk);
        fc_valid = 0;
      end
    end
    fc_end = 1;
    @(negedge clk);
    fc_end = 0;
    while (busy) @(negedge clk);
    $display("FC %0d -> %0d at %0d%% density: %0d cycles", nin, nout, dens, cyc - t0);
    n_fc++;
    check_outputs(1, refv, relu, "fc");
  endtask

  task automatic mech(int n, string what);
    checks++;
    if (n == 0) begin failures++; $display("FAIL mechanism never happened: %s", what); end
    else $display("mechanism %-26s %0d", what, n);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // VGG16 CONV5-3 shape: 14x14 outputs, 512 filters, 3x3, stride 1; the
    // first 4 of its 512 input channels, weights about 35% dense.
    run_conv(4, WDO_MAX, HDO_MAX, 1, 1);
    // LeNet FC1 (800 -> 500, about 8% dense) and FC2 (500 -> 10, about 20% dense)
    run_fc(800, 500, 8, 1);
    run_fc(500, 10, 20, 0);
    mech(n_fifo, "computation FIFO full");
    mech(n_haz, "hazard stall");
    mech(n_skip, "empty position skipped");
    mech(n_reload, "partial-sum reload");
    mech(n_shift, "line buffer shift");
    mech(n_relu, "ReLU clamp");
    mech(n_fc, "FC mode run");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
