// local_filter_buffer -- filters of the current input channel, CSF encoded.
//
// For each of the K*K window positions p the buffer holds the nonzero weights
// of the m stacked filters at that position as {virtual weight, relative
// filter index} entries, packed NPE to a row; the rows of position p start at
// row p*(M/NPE). Next to them sit the K*K relative column pointers: ptr[p] is
// the number of nonzero weights at position p. The weights stay here while the
// window slides over the whole feature division (filters stationary).
//
// Interface: wr_en/wr_addr/wr_data (one row per cycle); ptr_load copies all
// K*K pointers at once from ptr_in; rd_en/rd_addr -> rd_data one cycle later;
// ptr shows all pointers. An entry is {wcode[7:0], rel[IDX_W-1:0]}.
//
// From the source design: per-position rows of virtual weights and relative
// indices and the relative column pointers. Own choice: NPE-wide rows, the
// row layout, and a pointer meaning "count".
module local_filter_buffer #(
  parameter int unsigned K     = 3,
  parameter int unsigned M     = 512,
  parameter int unsigned NPE   = 8,
  parameter int unsigned IDX_W = $clog2(M),
  parameter int unsigned PTR_W = $clog2(M + 1),
  parameter int unsigned ENT_W = 8 + IDX_W,
  parameter int unsigned ROWS  = K * K * (M / NPE),
  parameter int unsigned AW    = $clog2(ROWS)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      wr_en,
  input  logic [AW-1:0]             wr_addr,
  input  logic [NPE-1:0][ENT_W-1:0] wr_data,
  input  logic                      ptr_load,
  input  logic [K*K-1:0][PTR_W-1:0] ptr_in,
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
    if (!rst_n)        ptr <= '0;
    else if (ptr_load) ptr <= ptr_in;
  end
endmodule
