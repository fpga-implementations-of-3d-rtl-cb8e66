// index_accumulator -- relative filter index to absolute filter index.
//
// In the compressed sparse filter format each nonzero weight of a window
// position carries the number of zero weights skipped since the previous
// nonzero one of that position. The absolute index is therefore
//   abs[0] = rel[0],  abs[k] = abs[k-1] + 1 + rel[k],
// so a dense stack W1..Wm has every relative index 0. The unit forms this
// prefix sum over up to NPE lanes per cycle; a running base register carries
// the last index into the next row of the same position and is restarted by
// `first`. Valid lanes must be contiguous from lane 0.
//
// Interface: first/mask/rel (combinational) -> abs_idx; `advance` commits the
// row and updates the base. Timing: combinational result, base updated on the
// clock edge of an advancing row.
//
// From the source design: accumulation of relative indices. Own choice: the
// "skipped zeros" meaning of a relative index (the only one that gives the
// all-zero indices drawn for a dense stack).
module index_accumulator #(
  parameter int unsigned NPE   = 8,
  parameter int unsigned IDX_W = 9
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      advance,
  input  logic                      first,
  input  logic [NPE-1:0]            mask,
  input  logic [NPE-1:0][IDX_W-1:0] rel,
  output logic [NPE-1:0][IDX_W-1:0] abs_idx,
  output logic [IDX_W-1:0]          last_idx
);
  logic [IDX_W:0] base_q;   // last absolute index, or all ones (= -1) at restart

  always_comb begin
    logic [IDX_W:0] run;
    run = first ? '1 : base_q;
    for (int k = 0; k < NPE; k++) begin
      if (mask[k]) run = run + 1'b1 + {1'b0, rel[k]};
      abs_idx[k] = run[IDX_W-1:0];
    end
    last_idx = run[IDX_W-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) base_q <= '1;
    else if (advance) base_q <= {1'b0, last_idx};
  end
endmodule
