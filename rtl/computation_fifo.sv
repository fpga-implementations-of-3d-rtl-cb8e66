// computation_fifo -- synchronous first-word-fall-through FIFO.
//
// Holds rows of products (and their absolute indices) between the shift
// multipliers and the adder lanes, so that weight loading can run ahead while
// the adders stall on a data hazard. Also used as a small skid buffer.
//
// Interface: push/din/full, pop/dout/empty, count. dout shows the oldest
// entry whenever empty is low; pop removes it. Push while full and pop while
// empty are ignored (and flagged by assertions). Timing: an entry pushed in
// one cycle is visible at dout the next.
//
// From the source design: the name and place of the computation FIFO. Own
// choice: one FIFO of whole rows instead of one FIFO per window position, and
// the depth.
module computation_fifo #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push,
  input  logic [W-1:0]               din,
  output logic                       full,
  input  logic                       pop,
  output logic [W-1:0]               dout,
  output logic                       empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH + 1);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic          do_push, do_pop;

  assign full    = (count == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign empty   = (count == '0);
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign dout    = mem[rp];

  function automatic logic [AW-1:0] nxt(logic [AW-1:0] x);
    return (x == AW'(DEPTH - 1)) ? '0 : x + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (do_push) wp <= nxt(wp);
      if (do_pop)  rp <= nxt(rp);
      count <= count + CW'(do_push) - CW'(do_pop);
    end
  end

  always_ff @(posedge clk) if (do_push) mem[wp] <= din;

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));
endmodule
