// global_output_buffer -- on-chip RAM of partial and final output features.
//
// Holds WORDS fp32 values, the m outputs of every output position of a
// feature division (Hdo*Wdo*m; 14*14*512 = 100352 by default), as rows of NPE
// words: row = position*(M/NPE) + r holds outputs r*NPE .. r*NPE+NPE-1 of that
// position. Partial sums of a position are read into the local output
// registers before a 3D-SIMD computation and written back after it, NPE words
// per cycle, which gives the accumulation over input channels.
//
// Interface: wr_en/wr_addr/wr_data; rd_en/rd_addr -> rd_data one cycle later.
//
// From the source design: the buffer size and the two-way transfer with the
// local output registers. Own choice: the NPE-word row organisation.
module global_output_buffer #(
  parameter int unsigned WORDS = 100352,
  parameter int unsigned NPE   = 8,
  parameter int unsigned ROWS  = WORDS / NPE,
  parameter int unsigned AW    = $clog2(ROWS)
) (
  input  logic                 clk,
  input  logic                 wr_en,
  input  logic [AW-1:0]        wr_addr,
  input  logic [NPE-1:0][31:0] wr_data,
  input  logic                 rd_en,
  input  logic [AW-1:0]        rd_addr,
  output logic [NPE-1:0][31:0] rd_data
);
  logic [NPE-1:0][31:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
