// global_filter_buffer -- on-chip staging RAM for one channel's filters.
//
// The host writes the CSF-encoded filters of the next input channel here, in
// the same row layout as the local filter buffer (rows of NPE
// {virtual weight, relative index} entries, position p from row p*(M/NPE)),
// and the K*K relative column pointers. The center controller then copies
// the pointers and only the rows in use into the local filter buffer.
//
// Interface: wr_en/wr_addr/wr_data row write; ptr_we/ptr_addr/ptr_wdata
// pointer write; rd_en/rd_addr -> rd_data one cycle later; ptr shows all
// pointers.
//
// From the source design: a global filter buffer between the external RAM and
// the local filter buffer. Own choice: capacity of one channel and the layout.
module global_filter_buffer #(
  parameter int unsigned K     = 3,
  parameter int unsigned M     = 512,
  parameter int unsigned NPE   = 8,
  parameter int unsigned IDX_W = $clog2(M),
  parameter int unsigned PTR_W = $clog2(M + 1),
  parameter int unsigned ENT_W = 8 + IDX_W,
  parameter int unsigned ROWS  = K * K * (M / NPE),
  parameter int unsigned AW    = $clog2(ROWS),
  parameter int unsigned PAW   = $clog2(K * K)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      wr_en,
  input  logic [AW-1:0]             wr_addr,
  input  logic [NPE-1:0][ENT_W-1:0] wr_data,
  input  logic                      ptr_we,
  input  logic [PAW-1:0]            ptr_addr,
  input  logic [PTR_W-1:0]          ptr_wdata,
  input  logic                      rd_en,
  input  logic [AW-1:0]             rd_addr,
  output logic [NPE-1:0][ENT_W-1:0] rd_data,
  output logic [K*K-1:0][PTR_W-1:0] ptr
);
  logic [NPE-1:0][ENT_W-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      ptr <= '0;
    else if (ptr_we) ptr[ptr_addr] <= ptr_wdata;
  end

  a_ptr_range: assert property (@(posedge clk) disable iff (!rst_n)
    ptr_we |-> (ptr_wdata <= PTR_W'(M)) && (ptr_addr < PAW'(K * K)));
endmodule
