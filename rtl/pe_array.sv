// pe_array -- PE adder lanes and the m local output feature registers.
//
// NPE lanes each own one pipelined float adder (fp_add_pipe, LAT cycles). A
// product row holds up to NPE products with distinct absolute indices; lane k
// adds prod[k] to register acc[idx[k]] and the sum is written back LAT cycles
// later. A register whose sum is still in a pipeline is marked pending; a row
// that touches a pending register waits (hazard stall), so no update is lost.
// The registers also have a bulk port moving NPE consecutive registers per
// cycle (row r = registers r*NPE .. r*NPE+NPE-1) to or from the global output
// feature buffer, and a one-cycle clear.
//
// Interface: row_valid/row_ready/row_mask/row_idx/row_prod (valid-ready);
// bulk_clear, bulk_we/bulk_waddr/bulk_wdata, bulk_raddr -> bulk_rdata
// (combinational read); busy while any addition is in flight; hazard_stall
// when a valid row is held back. Bulk operations are only allowed while idle.
//
// From the source design: registers (not RAM) for the m outputs, adders per
// PE, 11-cycle float addition. Own choice: the pending-bit stall and the
// whole-row issue rule.
module pe_array
  import sfs_pkg::*;
#(
  parameter int unsigned M     = 512,
  parameter int unsigned NPE   = 8,
  parameter int unsigned LAT   = 11,
  parameter int unsigned IDX_W = $clog2(M),
  parameter int unsigned RAW   = $clog2(M / NPE) > 0 ? $clog2(M / NPE) : 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      row_valid,
  output logic                      row_ready,
  input  logic [NPE-1:0]            row_mask,
  input  logic [NPE-1:0][IDX_W-1:0] row_idx,
  input  logic [NPE-1:0][31:0]      row_prod,
  input  logic                      bulk_clear,
  input  logic                      bulk_we,
  input  logic [RAW-1:0]            bulk_waddr,
  input  logic [NPE-1:0][31:0]      bulk_wdata,
  input  logic [RAW-1:0]            bulk_raddr,
  output logic [NPE-1:0][31:0]      bulk_rdata,
  output logic                      busy,
  output logic                      hazard_stall
);
  fp32_t                       acc [M];
  logic [M-1:0]                pending;
  logic                        fire;
  logic [NPE-1:0]              wb_valid;
  fp32_t                       wb_sum [NPE];
  logic [NPE-1:0][IDX_W-1:0]   wb_idx;

  always_comb begin
    row_ready = 1'b1;
    for (int k = 0; k < NPE; k++)
      if (row_mask[k] && pending[row_idx[k]]) row_ready = 1'b0;
  end
  assign fire         = row_valid && row_ready;
  assign hazard_stall = row_valid && !row_ready;
  assign busy         = |pending;

  for (genvar k = 0; k < NPE; k++) begin : g_lane
    fp_add_pipe #(.LAT(LAT), .TAG_W(IDX_W)) u_add (
      .clk, .rst_n,
      .in_valid (fire && row_mask[k]),
      .a        (acc[row_idx[k]]),
      .b        (row_prod[k]),
      .tag_in   (row_idx[k]),
      .out_valid(wb_valid[k]),
      .sum      (wb_sum[k]),
      .tag_out  (wb_idx[k])
    );
  end

  always_comb
    for (int k = 0; k < NPE; k++) bulk_rdata[k] = acc[bulk_raddr * NPE + k];

  // Every register decodes its own next value: clear, bulk write, or the sum
  // of the lane (at most one) whose write-back targets it.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pending <= '0;
      for (int j = 0; j < M; j++) acc[j] <= '0;
    end else begin
      for (int j = 0; j < M; j++) begin
        logic set, clr;
        set = 1'b0;
        clr = 1'b0;
        for (int k = 0; k < NPE; k++) begin
          if (wb_valid[k] && 32'(wb_idx[k]) == j) clr = 1'b1;
          if (fire && row_mask[k] && 32'(row_idx[k]) == j) set = 1'b1;
        end
        if (set)      pending[j] <= 1'b1;
        else if (clr) pending[j] <= 1'b0;
        if (bulk_clear)
          acc[j] <= '0;
        else if (bulk_we && 32'(bulk_waddr) == j / NPE)
          acc[j] <= bulk_wdata[j % NPE];
        else
          for (int k = 0; k < NPE; k++)
            if (wb_valid[k] && 32'(wb_idx[k]) == j) acc[j] <= wb_sum[k];
      end
    end
  end

  // Indices in one row are distinct, and bulk transfers only happen while idle.
  logic dup_idx;
  always_comb begin
    dup_idx = 1'b0;
    for (int i = 0; i < NPE; i++)
      for (int k = i + 1; k < NPE; k++)
        if (row_mask[i] && row_mask[k] && row_idx[i] == row_idx[k]) dup_idx = 1'b1;
  end
  a_distinct: assert property (@(posedge clk) disable iff (!rst_n) fire |-> !dup_idx);
  a_bulk_idle: assert property (@(posedge clk) disable iff (!rst_n)
    (bulk_we || bulk_clear) |-> !busy && !row_valid);
endmodule
