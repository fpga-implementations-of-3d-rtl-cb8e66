// line_buffer -- K rows of one input channel, shifting left.
//
// Row r holds input row y*S + r of the current feature division, column c at
// position c. Each shift moves every row one column to the left, so after
// x*S shifts columns x*S .. x*S+K-1 sit at the head (positions 0..K-1), where
// the window registers pick them up.
//
// Interface: wr_en/wr_row/wr_col/wr_data writes one value; shift shifts all
// rows (a write in the same cycle wins for its own cell); head is the K x K
// block at the left end, head[r*K + c] = row r, position c.
// Timing: registered, visible the cycle after the write or shift.
//
// From the source design: a K-row line buffer feeding the window, drawn with
// a leftward arrow. Own choice: how rows are loaded and the stride handled.
module line_buffer #(
  parameter int unsigned K       = 3,
  parameter int unsigned WDI_MAX = 16,
  parameter int unsigned RW      = $clog2(K) > 0 ? $clog2(K) : 1,
  parameter int unsigned CW      = $clog2(WDI_MAX)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  wr_en,
  input  logic [RW-1:0]         wr_row,
  input  logic [CW-1:0]         wr_col,
  input  logic [31:0]           wr_data,
  input  logic                  shift,
  output logic [K*K-1:0][31:0]  head
);
  logic [31:0] lb [K][WDI_MAX];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < K; r++)
        for (int c = 0; c < WDI_MAX; c++) lb[r][c] <= '0;
    end else begin
      if (shift)
        for (int r = 0; r < K; r++)
          for (int c = 0; c < WDI_MAX; c++)
            lb[r][c] <= (c == WDI_MAX - 1) ? 32'd0 : lb[r][c+1];
      if (wr_en) lb[wr_row][wr_col] <= wr_data;
    end
  end

  always_comb
    for (int r = 0; r < K; r++)
      for (int c = 0; c < K; c++) head[r*K + c] = lb[r][c];
endmodule
