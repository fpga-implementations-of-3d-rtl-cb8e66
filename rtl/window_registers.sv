// window_registers -- the K x K feature window of one 3D-SIMD computation.
//
// Captures the head of the line buffer when `load` is high and holds it while
// the weight fetch walks through the K*K positions; position p = r*K + c is
// the value of window row r, column c (Vi[chi][Sy+r][Sx+c]).
//
// Interface: load, din (K*K fp32) -> win. Timing: win updates the cycle after
// load.
//
// From the source design: separate window registers between line buffer and
// the main process unit. Own choice: capture on an explicit load strobe.
module window_registers #(
  parameter int unsigned K = 3
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 load,
  input  logic [K*K-1:0][31:0] din,
  output logic [K*K-1:0][31:0] win
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    win <= '0;
    else if (load) win <= din;
  end
endmodule
