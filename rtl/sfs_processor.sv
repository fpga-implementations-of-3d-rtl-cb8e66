// sfs_processor -- 3D-SIMD processor for sparse CNN layers with stacked
// filters stationary dataflow and relative indexed compressed sparse filters.
//
// One CONV layer division is computed as follows. For each input channel the
// host fills the global feature buffer (Hdi x Wdi values) and the global
// filter buffer (the nonzero weights of all m filters at each of the K*K
// window positions, with relative filter indices, plus the K*K relative
// column pointers). The center controller copies the filters into the local
// filter buffer, where they stay for the whole channel, fills the line buffer,
// and for every output position (y, x) captures a K x K window and runs one
// 3D-SIMD computation: the weight fetch sends, per window position, the
// feature value and its nonzero weights to the main process unit, which
// multiplies by shifting and accumulates into the m local output registers
// chosen by the absolute filter index. Partial sums move between those
// registers and the global output feature buffer before and after each
// computation, so the buffer accumulates over channels. In FC mode the host
// streams rows {value, weights, relative indices} straight into the main
// process unit and the m results are stored at position 0.
// Results are read back through the NL unit (ReLU or bypass) NPE words at a
// time while the processor is idle.
//
// Ports: start/mode_fc/cfg_* and busy/done; ch_req/ch_idx/ch_ready per CONV
// input channel; feat_*, filt_*, ptr_* host write ports of the global buffers
// (write only while the controller waits on ch_req or is idle); fc_* row
// stream and fc_end for FC mode; out_rd_* read port, data one cycle after
// out_rd_en; ev_* one-cycle strobes of a full computation FIFO, a hazard
// stall, a skipped empty window position and a partial-sum reload. Word addresses: feature buffer row*WDI_MAX + column; filter
// buffer row p*(M/NPE) + r; output buffer position*(M/NPE) + r with
// position = y*Wdo + x.
//
// From the source design: the block structure (global feature/filter/output
// buffers, line buffer, window registers, local filter buffer, main process
// unit with computation FIFO and PE array, local output registers, center
// controller, NL), m = 512 stacked filters, 8 PEs, 11-cycle float adds, the
// 14 x 14 x 512 output buffer. Own choices are listed in each block.
module sfs_processor
  import sfs_pkg::*;
#(
  parameter int unsigned K          = 3,
  parameter int unsigned M          = 512,
  parameter int unsigned NPE        = 8,
  parameter int unsigned LAT        = 11,
  parameter int unsigned FIFO_DEPTH = 16,
  parameter int unsigned WDO_MAX    = 14,
  parameter int unsigned HDO_MAX    = 14,
  parameter int unsigned WDI_MAX    = (WDO_MAX - 1) + K,
  parameter int unsigned HDI_MAX    = (HDO_MAX - 1) + K,
  parameter int unsigned IDX_W      = $clog2(M),
  parameter int unsigned PTR_W      = $clog2(M + 1),
  parameter int unsigned ENT_W      = 8 + IDX_W,
  parameter int unsigned FAW        = $clog2(K * K * (M / NPE)),
  parameter int unsigned GAW        = $clog2(WDI_MAX * HDI_MAX),
  parameter int unsigned OAW        = $clog2(WDO_MAX * HDO_MAX * (M / NPE)),
  parameter int unsigned PAW        = $clog2(K * K)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // command
  input  logic                      start,
  input  logic                      mode_fc,
  input  logic [15:0]               cfg_c,
  input  logic [7:0]                cfg_wdo,
  input  logic [7:0]                cfg_hdo,
  input  logic [3:0]                cfg_stride,
  input  logic                      cfg_relu,
  output logic                      busy,
  output logic                      done,
  // per-channel handshake
  output logic                      ch_req,
  output logic [15:0]               ch_idx,
  input  logic                      ch_ready,
  // host writes into the global buffers
  input  logic                      feat_we,
  input  logic [GAW-1:0]            feat_addr,
  input  logic [31:0]               feat_wdata,
  input  logic                      filt_we,
  input  logic [FAW-1:0]            filt_addr,
  input  logic [NPE-1:0][ENT_W-1:0] filt_wdata,
  input  logic                      ptr_we,
  input  logic [PAW-1:0]            ptr_addr,
  input  logic [PTR_W-1:0]          ptr_wdata,
  // FC row stream
  input  logic                      fc_valid,
  output logic                      fc_ready,
  input  logic                      fc_first,
  input  logic [31:0]               fc_v,
  input  logic [NPE-1:0]            fc_mask,
  input  logic [NPE-1:0][7:0]       fc_w,
  input  logic [NPE-1:0][IDX_W-1:0] fc_rel,
  input  logic                      fc_end,
  // result read port
  input  logic                      out_rd_en,
  input  logic [OAW-1:0]            out_rd_addr,
  output logic [NPE-1:0][31:0]      out_rd_data,
  // event strobes for performance counting
  output logic                      ev_fifo_stall,
  output logic                      ev_hazard_stall,
  output logic                      ev_zero_skip,
  output logic                      ev_psum_reload
);
  localparam int unsigned RAW = $clog2(M / NPE) > 0 ? $clog2(M / NPE) : 1;
  localparam int unsigned LRW = $clog2(K) > 0 ? $clog2(K) : 1;
  localparam int unsigned LCW = $clog2(WDI_MAX);

  // controller strobes
  logic                      fc_sel, gfb_rd_en, lfb_wr_en, lfb_ptr_load, gfe_rd_en;
  logic                      lb_wr_en, lb_shift, win_load, wf_start, wf_done, mpu_idle;
  logic                      bulk_clear, bulk_we, gob_rd_en, gob_wr_en, psum_reload;
  logic [FAW-1:0]            gfb_rd_addr, lfb_wr_addr, lfb_rd_addr;
  logic [GAW-1:0]            gfe_rd_addr;
  logic [LRW-1:0]            lb_wr_row;
  logic [LCW-1:0]            lb_wr_col;
  logic [RAW-1:0]            bulk_waddr, bulk_raddr;
  logic [OAW-1:0]            gob_rd_addr, gob_wr_addr;
  // data
  logic [K*K-1:0][PTR_W-1:0] gfb_ptr, lfb_ptr;
  logic [NPE-1:0][ENT_W-1:0] gfb_rd_data, lfb_rd_data;
  logic [31:0]               gfe_rd_data;
  logic [K*K-1:0][31:0]      lb_head, win;
  logic [NPE-1:0][31:0]      gob_rd_data, bulk_rdata;
  logic                      lfb_rd_en, zero_skip, fifo_stall, hazard_stall;
  // weight-row streams
  logic                      wf_valid, wf_ready, wf_first, m_valid, m_ready, m_first;
  logic [31:0]               wf_v, m_v;
  logic [NPE-1:0]            wf_mask, m_mask;
  logic [NPE-1:0][7:0]       wf_w, m_w;
  logic [NPE-1:0][IDX_W-1:0] wf_rel, m_rel;

  center_controller #(
    .K(K), .M(M), .NPE(NPE), .WDO_MAX(WDO_MAX), .HDO_MAX(HDO_MAX),
    .WDI_MAX(WDI_MAX), .HDI_MAX(HDI_MAX), .PTR_W(PTR_W), .FAW(FAW), .GAW(GAW),
    .OAW(OAW), .RAW(RAW), .LRW(LRW), .LCW(LCW)
  ) u_ctrl (
    .clk, .rst_n, .start, .mode_fc, .cfg_c, .cfg_wdo, .cfg_hdo, .cfg_stride,
    .busy, .done, .ch_req, .ch_idx, .ch_ready, .fc_end, .fc_sel,
    .gfb_ptr, .gfb_rd_en, .gfb_rd_addr, .lfb_wr_en, .lfb_wr_addr, .lfb_ptr_load,
    .gfe_rd_en, .gfe_rd_addr, .lb_wr_en, .lb_wr_row, .lb_wr_col, .lb_shift,
    .win_load, .wf_start, .wf_done, .mpu_idle, .bulk_clear, .bulk_we,
    .bulk_waddr, .bulk_raddr, .gob_rd_en, .gob_rd_addr, .gob_wr_en,
    .gob_wr_addr, .psum_reload
  );

  global_feature_buffer #(.WDI_MAX(WDI_MAX), .HDI_MAX(HDI_MAX), .AW(GAW)) u_gfe (
    .clk, .wr_en(feat_we), .wr_addr(feat_addr), .wr_data(feat_wdata),
    .rd_en(gfe_rd_en), .rd_addr(gfe_rd_addr), .rd_data(gfe_rd_data)
  );

  global_filter_buffer #(.K(K), .M(M), .NPE(NPE), .IDX_W(IDX_W), .PTR_W(PTR_W),
                         .ENT_W(ENT_W), .AW(FAW), .PAW(PAW)) u_gfb (
    .clk, .rst_n, .wr_en(filt_we), .wr_addr(filt_addr), .wr_data(filt_wdata),
    .ptr_we, .ptr_addr, .ptr_wdata, .rd_en(gfb_rd_en), .rd_addr(gfb_rd_addr),
    .rd_data(gfb_rd_data), .ptr(gfb_ptr)
  );

  local_filter_buffer #(.K(K), .M(M), .NPE(NPE), .IDX_W(IDX_W), .PTR_W(PTR_W),
                        .ENT_W(ENT_W), .AW(FAW)) u_lfb (
    .clk, .rst_n, .wr_en(lfb_wr_en), .wr_addr(lfb_wr_addr), .wr_data(gfb_rd_data),
    .ptr_load(lfb_ptr_load), .ptr_in(gfb_ptr), .rd_en(lfb_rd_en),
    .rd_addr(lfb_rd_addr), .rd_data(lfb_rd_data), .ptr(lfb_ptr)
  );

  line_buffer #(.K(K), .WDI_MAX(WDI_MAX), .RW(LRW), .CW(LCW)) u_lb (
    .clk, .rst_n, .wr_en(lb_wr_en), .wr_row(lb_wr_row), .wr_col(lb_wr_col),
    .wr_data(gfe_rd_data), .shift(lb_shift), .head(lb_head)
  );

  window_registers #(.K(K)) u_win (
    .clk, .rst_n, .load(win_load), .din(lb_head), .win
  );

  weight_fetch #(.K(K), .M(M), .NPE(NPE), .IDX_W(IDX_W), .PTR_W(PTR_W),
                 .ENT_W(ENT_W), .AW(FAW)) u_wf (
    .clk, .rst_n, .start(wf_start), .done(wf_done), .win, .ptr(lfb_ptr),
    .lfb_rd_en, .lfb_rd_addr, .lfb_rd_data,
    .out_valid(wf_valid), .out_ready(wf_ready), .out_first(wf_first),
    .out_v(wf_v), .out_mask(wf_mask), .out_w(wf_w), .out_rel(wf_rel), .zero_skip
  );

  // FC mode: the host stream replaces the weight fetch at the unit's input.
  assign m_valid  = fc_sel ? fc_valid : wf_valid;
  assign m_first  = fc_sel ? fc_first : wf_first;
  assign m_v      = fc_sel ? fc_v     : wf_v;
  assign m_mask   = fc_sel ? fc_mask  : wf_mask;
  assign m_w      = fc_sel ? fc_w     : wf_w;
  assign m_rel    = fc_sel ? fc_rel   : wf_rel;
  assign wf_ready = !fc_sel && m_ready;
  assign fc_ready = fc_sel && m_ready;

  main_process_unit #(.M(M), .NPE(NPE), .LAT(LAT), .FIFO_DEPTH(FIFO_DEPTH),
                      .IDX_W(IDX_W), .RAW(RAW)) u_mpu (
    .clk, .rst_n, .in_valid(m_valid), .in_ready(m_ready), .in_first(m_first),
    .in_v(m_v), .in_mask(m_mask), .in_w(m_w), .in_rel(m_rel),
    .bulk_clear, .bulk_we, .bulk_waddr, .bulk_wdata(gob_rd_data), .bulk_raddr,
    .bulk_rdata, .idle(mpu_idle), .fifo_stall, .hazard_stall
  );

  // The output buffer's read port serves the controller while busy, the host otherwise.
  global_output_buffer #(.WORDS(WDO_MAX * HDO_MAX * M), .NPE(NPE), .AW(OAW)) u_gob (
    .clk, .wr_en(gob_wr_en), .wr_addr(gob_wr_addr), .wr_data(bulk_rdata),
    .rd_en(busy ? gob_rd_en : out_rd_en), .rd_addr(busy ? gob_rd_addr : out_rd_addr),
    .rd_data(gob_rd_data)
  );

  assign ev_fifo_stall   = fifo_stall;
  assign ev_hazard_stall = hazard_stall;
  assign ev_zero_skip    = zero_skip;
  assign ev_psum_reload  = psum_reload;

  nl_relu #(.NPE(NPE)) u_nl (.en(cfg_relu), .din(gob_rd_data), .dout(out_rd_data));
endmodule
