// main_process_unit -- the 3D-SIMD datapath: index accumulation, shift
// multiplication, computation FIFO and PE array with the output registers.
//
// Input is a stream of weight rows. A row carries one feature value Vi[p] and
// up to NPE nonzero virtual weights of window position p with their relative
// filter indices; `first` marks the first row of a position. In the cycle a
// row is accepted, the index accumulator turns relative into absolute indices
// and NPE shift multipliers form the products Vi[p] * W[j]; the row of
// {mask, indices, products} is pushed into the computation FIFO. The PE array
// pops rows and adds each product into output register j. Rows of one
// position have distinct indices, so a row never conflicts with itself;
// conflicts with additions still in flight stall the FIFO head.
//
// Interface: in_valid/in_ready/in_first/in_v/in_mask/in_w/in_rel
// (valid-ready); bulk_* port of the local output registers (see pe_array);
// idle when nothing is queued or in flight; fifo_stall (input held back by a
// full FIFO) and hazard_stall for observation.
// Timing: one row accepted per cycle while the FIFO has room; a product
// reaches its register LAT+1 cycles after its row is accepted at the earliest.
//
// From the source design: the order load Vi[p] and ptr[p] -> load weights and
// relative indices -> accumulate indices -> multiply -> accumulate into the
// register chosen by the absolute index; computation FIFO between products
// and PEs. Own choice: one row-wide FIFO, its depth, the handshakes.
module main_process_unit
  import sfs_pkg::*;
#(
  parameter int unsigned M          = 512,
  parameter int unsigned NPE        = 8,
  parameter int unsigned LAT        = 11,
  parameter int unsigned FIFO_DEPTH = 16,
  parameter int unsigned IDX_W      = $clog2(M),
  parameter int unsigned RAW        = $clog2(M / NPE) > 0 ? $clog2(M / NPE) : 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  output logic                      in_ready,
  input  logic                      in_first,
  input  fp32_t                     in_v,
  input  logic [NPE-1:0]            in_mask,
  input  logic [NPE-1:0][7:0]       in_w,
  input  logic [NPE-1:0][IDX_W-1:0] in_rel,
  input  logic                      bulk_clear,
  input  logic                      bulk_we,
  input  logic [RAW-1:0]            bulk_waddr,
  input  logic [NPE-1:0][31:0]      bulk_wdata,
  input  logic [RAW-1:0]            bulk_raddr,
  output logic [NPE-1:0][31:0]      bulk_rdata,
  output logic                      idle,
  output logic                      fifo_stall,
  output logic                      hazard_stall
);
  localparam int unsigned RW = NPE + NPE * IDX_W + NPE * 32;

  logic                      accept, full, empty, pe_ready, pe_busy;
  logic [NPE-1:0][IDX_W-1:0] abs_idx, f_idx;
  logic [IDX_W-1:0]          last_idx;
  logic [NPE-1:0][31:0]      prod, f_prod;
  logic [NPE-1:0]            f_mask;
  logic [RW-1:0]             f_dout;
  logic [$clog2(FIFO_DEPTH+1)-1:0] f_count;

  assign in_ready   = !full;
  assign accept     = in_valid && in_ready;
  assign fifo_stall = in_valid && full;

  index_accumulator #(.NPE(NPE), .IDX_W(IDX_W)) u_idx (
    .clk, .rst_n, .advance(accept), .first(in_first), .mask(in_mask),
    .rel(in_rel), .abs_idx, .last_idx
  );

  for (genvar k = 0; k < NPE; k++) begin : g_mul
    shift_mul u_mul (.v(in_v), .w(in_w[k]), .p(prod[k]));
  end

  computation_fifo #(.W(RW), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .push (accept),
    .din  ({in_mask, abs_idx, prod}),
    .full,
    .pop  (!empty && pe_ready),
    .dout (f_dout),
    .empty,
    .count(f_count)
  );
  assign {f_mask, f_idx, f_prod} = f_dout;

  pe_array #(.M(M), .NPE(NPE), .LAT(LAT), .IDX_W(IDX_W), .RAW(RAW)) u_pe (
    .clk, .rst_n,
    .row_valid (!empty),
    .row_ready (pe_ready),
    .row_mask  (f_mask),
    .row_idx   (f_idx),
    .row_prod  (f_prod),
    .bulk_clear, .bulk_we, .bulk_waddr, .bulk_wdata, .bulk_raddr, .bulk_rdata,
    .busy      (pe_busy),
    .hazard_stall
  );

  assign idle = empty && !pe_busy && !in_valid;
endmodule
