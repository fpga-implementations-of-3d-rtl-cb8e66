// weight_fetch -- issue logic of one 3D-SIMD computation.
//
// On start it walks the window positions p = 0 .. K*K-1 in order. For each
// position it takes the relative column pointer ptr[p] (the number of nonzero
// weights there) and reads ceil(ptr[p]/NPE) rows of the local filter buffer,
// starting at row p*(M/NPE). Every row leaves as one item of the output
// stream together with the window value Vi[p], a lane mask for the last,
// partly filled row and a `first` flag on the first row of the position. A
// position with ptr[p] = 0 costs one cycle and sends nothing. Reads are
// issued only while a 4-entry skid FIFO has room for their data, so the
// stream may stall at any time without losing rows.
//
// Interface: start -> done (one-cycle pulse after the last row has left);
// win (window registers), ptr (pointers); lfb_rd_en/lfb_rd_addr ->
// lfb_rd_data (1-cycle read latency); out_* stream with valid/ready;
// zero_skip pulses when a position without weights is skipped.
// Timing: one row per cycle when not stalled.
//
// From the source design: the loop "load Vi[p] and ptr[p], load ptr[p]
// weights and relative indices", K*K times per computation, zero weights
// absent. Own choice: row layout, skid buffering, handshakes.
module weight_fetch #(
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
  input  logic                      start,
  output logic                      done,
  input  logic [K*K-1:0][31:0]      win,
  input  logic [K*K-1:0][PTR_W-1:0] ptr,
  output logic                      lfb_rd_en,
  output logic [AW-1:0]             lfb_rd_addr,
  input  logic [NPE-1:0][ENT_W-1:0] lfb_rd_data,
  output logic                      out_valid,
  input  logic                      out_ready,
  output logic                      out_first,
  output logic [31:0]               out_v,
  output logic [NPE-1:0]            out_mask,
  output logic [NPE-1:0][7:0]       out_w,
  output logic [NPE-1:0][IDX_W-1:0] out_rel,
  output logic                      zero_skip
);
  localparam int unsigned RPP   = M / NPE;
  localparam int unsigned PW    = $clog2(K * K + 1);
  localparam int unsigned RPW   = $clog2(RPP) > 0 ? $clog2(RPP) : 1;
  localparam int unsigned SKID  = 4;
  localparam int unsigned FW    = 1 + 32 + NPE + NPE * ENT_W;

  logic                      active;
  logic [PW-1:0]             p;
  logic [RPW-1:0]            r;
  logic                      pend_q, first_q;
  logic [31:0]               v_q;
  logic [NPE-1:0]            mask_q, mask_c;
  logic [$clog2(SKID+1)-1:0] count;
  logic                      empty, full, issue, at_end, cur_zero, last_row;
  logic [PTR_W-1:0]          cur_ptr;
  logic [FW-1:0]             f_dout;
  logic [NPE-1:0][ENT_W-1:0] f_row;

  assign at_end   = (p == PW'(K * K));
  assign cur_ptr  = at_end ? '0 : ptr[p];
  assign cur_zero = (cur_ptr == '0);
  assign last_row = ((32'(r) + 1) * NPE >= 32'(cur_ptr));
  assign issue    = active && !at_end && !cur_zero &&
                    (32'(count) + 32'(pend_q) < SKID);
  assign zero_skip = active && !at_end && cur_zero;

  always_comb
    for (int k = 0; k < NPE; k++)
      mask_c[k] = (32'(r) * NPE + k < 32'(cur_ptr));

  assign lfb_rd_en   = issue;
  assign lfb_rd_addr = AW'(32'(p) * RPP + 32'(r));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active  <= 1'b0;
      p       <= '0;
      r       <= '0;
      pend_q  <= 1'b0;
      first_q <= 1'b0;
      v_q     <= '0;
      mask_q  <= '0;
    end else begin
      pend_q <= issue;
      if (issue) begin
        first_q <= (r == '0);
        v_q     <= win[p];
        mask_q  <= mask_c;
      end
      if (start) begin
        active <= 1'b1;
        p      <= '0;
        r      <= '0;
      end else if (active && !at_end) begin
        if (cur_zero) begin
          p <= p + 1'b1;
          r <= '0;
        end else if (issue) begin
          if (last_row) begin
            p <= p + 1'b1;
            r <= '0;
          end else begin
            r <= r + 1'b1;
          end
        end
      end else if (active && at_end && !pend_q && empty) begin
        active <= 1'b0;
      end
    end
  end

  assign done = active && at_end && !pend_q && empty && !start;

  computation_fifo #(.W(FW), .DEPTH(SKID)) u_skid (
    .clk, .rst_n,
    .push (pend_q),
    .din  ({first_q, v_q, mask_q, lfb_rd_data}),
    .full,
    .pop  (out_valid && out_ready),
    .dout (f_dout),
    .empty,
    .count
  );

  assign out_valid = !empty;
  assign {out_first, out_v, out_mask, f_row} = f_dout;
  always_comb
    for (int k = 0; k < NPE; k++) begin
      out_w[k]   = f_row[k][ENT_W-1 -: 8];
      out_rel[k] = f_row[k][IDX_W-1:0];
    end
endmodule
