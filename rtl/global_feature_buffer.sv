// global_feature_buffer -- on-chip RAM for one input channel of a feature division.
//
// Holds Hdi x Wdi fp32 feature values of the current channel, row-major with
// a fixed row pitch of WDI_MAX words: address = row*WDI_MAX + column. The
// line buffer is filled from it one value per cycle.
//
// Interface: wr_en/wr_addr/wr_data (host); rd_en/rd_addr -> rd_data one
// cycle later.
//
// From the source design: input features of a channel are buffered on chip
// before computation; the division size follows Wdi = (Wdo-1)*S + K with a
// 14x14 output division. Own choice: the address layout.
module global_feature_buffer #(
  parameter int unsigned WDI_MAX = 16,
  parameter int unsigned HDI_MAX = 16,
  parameter int unsigned AW      = $clog2(WDI_MAX * HDI_MAX)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [31:0]   wr_data,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output logic [31:0]   rd_data
);
  logic [31:0] mem [WDI_MAX * HDI_MAX];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
