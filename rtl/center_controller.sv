// center_controller -- sequencer of a CONV layer division or an FC layer.
//
// CONV mode follows the loop nest  for chi { buffer channel; for y, x { one
// 3D-SIMD computation } }:
//   CH_REQ    ask the host for channel chi (ch_req/ch_idx) and wait for
//             ch_ready: its features are in the global feature buffer and its
//             filters and pointers in the global filter buffer;
//   COPY_PTR  copy the K*K pointers to the local filter buffer;
//   COPY_ROWS copy only the rows in use, ceil(ptr[p]/NPE) per position;
//   Y_LOAD    fill the line buffer with input rows y*S .. y*S+K-1 of width
//             Wdi = (Wdo-1)*S + K;
//   X_WIN     capture the window; PS_LOAD clear the local output registers
//             (chi = 0) or reload the partial sums of position (y,x) from the
//             global output buffer; RUN/WAIT start the weight fetch and wait
//             until it is done and the main process unit has drained;
//   PS_STORE  write the m registers back to the global output buffer;
//   SHIFT     shift the line buffer S times for the next x.
// FC mode clears the registers, lets the host stream rows straight into the
// main process unit (fc_sel) until fc_end, and stores the m results at
// position 0.
//
// Interface: start/mode/cfg_* -> busy, done (one-cycle pulse); ch_req/ch_idx/
// ch_ready per channel; strobes and addresses for every buffer; psum_reload
// pulses when partial sums are reloaded. Latched configuration: cfg_c input
// channels, cfg_wdo x cfg_hdo output division, cfg_stride S.
// Timing: a 3D-SIMD computation costs M/NPE cycles to reload (channels after
// the first), the fetch and drain time, and M/NPE cycles to store.
//
// From the source design: the loop order, per-channel buffering, moving the m
// outputs to the global buffer after each computation, Eq. (4), the FC
// streaming mode. Own choice: the state machine, host handshake, no overlap
// of channel loading with computation.
module center_controller #(
  parameter int unsigned K       = 3,
  parameter int unsigned M       = 512,
  parameter int unsigned NPE     = 8,
  parameter int unsigned WDO_MAX = 14,
  parameter int unsigned HDO_MAX = 14,
  parameter int unsigned WDI_MAX = (WDO_MAX - 1) + K,
  parameter int unsigned HDI_MAX = (HDO_MAX - 1) + K,
  parameter int unsigned PTR_W   = $clog2(M + 1),
  parameter int unsigned FAW     = $clog2(K * K * (M / NPE)),
  parameter int unsigned GAW     = $clog2(WDI_MAX * HDI_MAX),
  parameter int unsigned OAW     = $clog2(WDO_MAX * HDO_MAX * (M / NPE)),
  parameter int unsigned RAW     = $clog2(M / NPE) > 0 ? $clog2(M / NPE) : 1,
  parameter int unsigned LRW     = $clog2(K) > 0 ? $clog2(K) : 1,
  parameter int unsigned LCW     = $clog2(WDI_MAX)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic                      mode_fc,
  input  logic [15:0]               cfg_c,
  input  logic [7:0]                cfg_wdo,
  input  logic [7:0]                cfg_hdo,
  input  logic [3:0]                cfg_stride,
  output logic                      busy,
  output logic                      done,
  output logic                      ch_req,
  output logic [15:0]               ch_idx,
  input  logic                      ch_ready,
  input  logic                      fc_end,
  output logic                      fc_sel,
  input  logic [K*K-1:0][PTR_W-1:0] gfb_ptr,
  output logic                      gfb_rd_en,
  output logic [FAW-1:0]            gfb_rd_addr,
  output logic                      lfb_wr_en,
  output logic [FAW-1:0]            lfb_wr_addr,
  output logic                      lfb_ptr_load,
  output logic                      gfe_rd_en,
  output logic [GAW-1:0]            gfe_rd_addr,
  output logic                      lb_wr_en,
  output logic [LRW-1:0]            lb_wr_row,
  output logic [LCW-1:0]            lb_wr_col,
  output logic                      lb_shift,
  output logic                      win_load,
  output logic                      wf_start,
  input  logic                      wf_done,
  input  logic                      mpu_idle,
  output logic                      bulk_clear,
  output logic                      bulk_we,
  output logic [RAW-1:0]            bulk_waddr,
  output logic [RAW-1:0]            bulk_raddr,
  output logic                      gob_rd_en,
  output logic [OAW-1:0]            gob_rd_addr,
  output logic                      gob_wr_en,
  output logic [OAW-1:0]            gob_wr_addr,
  output logic                      psum_reload
);
  localparam int unsigned RPP = M / NPE;
  localparam int unsigned KK  = K * K;

  typedef enum logic [3:0] {
    IDLE, CH_REQ, COPY_PTR, COPY_ROWS, Y_LOAD, X_WIN, PS_LOAD, RUN, WAIT,
    PS_STORE, SHIFT, FC_CLEAR, FC_RUN, DONE
  } state_t;

  state_t       st;
  logic         fc_q;
  logic [15:0]  c_q, chi;
  logic [7:0]   wdo_q, hdo_q, x, y, wdi;
  logic [3:0]   s_q, sh;
  logic [7:0]   cp;                 // position / line-buffer row counter
  logic [15:0]  cr;                 // row / column counter
  logic         pend_q, fin_q;
  logic [FAW-1:0] waddr_q;
  logic [LRW-1:0] lrow_q;
  logic [LCW-1:0] lcol_q;
  logic [RAW-1:0] prow_q;
  logic [31:0]  pos;
  logic [PTR_W-1:0] cptr;
  logic         c_last_row;

  assign wdi  = 8'((32'(wdo_q) - 1) * 32'(s_q) + K);
  assign pos  = fc_q ? 32'd0 : 32'(y) * 32'(wdo_q) + 32'(x);
  assign cptr = (32'(cp) < KK) ? gfb_ptr[cp] : '0;
  assign c_last_row = ((32'(cr) + 1) * NPE >= 32'(cptr));

  assign busy   = (st != IDLE);
  assign done   = (st == DONE);
  assign ch_req = (st == CH_REQ);
  assign ch_idx = chi;
  assign fc_sel = (st == FC_RUN);

  always_comb begin
    gfb_rd_en    = 1'b0;
    gfb_rd_addr  = FAW'(32'(cp) * RPP + 32'(cr));
    lfb_ptr_load = (st == COPY_PTR);
    gfe_rd_en    = 1'b0;
    gfe_rd_addr  = GAW'((32'(y) * 32'(s_q) + 32'(cp)) * WDI_MAX + 32'(cr));
    lb_shift     = (st == SHIFT);
    win_load     = (st == X_WIN);
    wf_start     = (st == RUN);
    bulk_clear   = 1'b0;
    gob_rd_en    = 1'b0;
    gob_rd_addr  = OAW'(pos * RPP + 32'(cr));
    gob_wr_en    = 1'b0;
    gob_wr_addr  = OAW'(pos * RPP + 32'(cr));
    bulk_raddr   = RAW'(cr);
    psum_reload  = 1'b0;
    case (st)
      COPY_ROWS: gfb_rd_en = (32'(cp) < KK) && (cptr != '0);
      Y_LOAD:    gfe_rd_en = (32'(cp) < K);
      PS_LOAD: begin
        bulk_clear  = (chi == '0) && !pend_q && (cr == '0);
        gob_rd_en   = (chi != '0) && (32'(cr) < RPP);
        psum_reload = (chi != '0) && (cr == '0);
      end
      FC_CLEAR:  bulk_clear = 1'b1;
      PS_STORE:  gob_wr_en = 1'b1;
      default: ;
    endcase
  end

  // One-cycle delayed write side of the copy loops (buffer reads take a cycle).
  assign lfb_wr_en   = (st == COPY_ROWS) && pend_q;
  assign lfb_wr_addr = waddr_q;
  assign lb_wr_en    = (st == Y_LOAD) && pend_q;
  assign lb_wr_row   = lrow_q;
  assign lb_wr_col   = lcol_q;
  assign bulk_we     = (st == PS_LOAD) && pend_q;
  assign bulk_waddr  = prow_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= IDLE; fc_q <= 1'b0; c_q <= '0; chi <= '0; wdo_q <= '0; hdo_q <= '0;
      s_q <= '0; sh <= '0; x <= '0; y <= '0; cp <= '0; cr <= '0; pend_q <= 1'b0;
      fin_q <= 1'b0; waddr_q <= '0; lrow_q <= '0; lcol_q <= '0; prow_q <= '0;
    end else begin
      pend_q <= 1'b0;
      case (st)
        IDLE: if (start) begin
          fc_q  <= mode_fc;
          c_q   <= cfg_c;
          wdo_q <= cfg_wdo;
          hdo_q <= cfg_hdo;
          s_q   <= cfg_stride;
          chi   <= '0;
          x     <= '0;
          y     <= '0;
          cr    <= '0;
          st    <= mode_fc ? FC_CLEAR : CH_REQ;
        end
        CH_REQ: if (ch_ready) st <= COPY_PTR;
        COPY_PTR: begin
          cp <= '0;
          cr <= '0;
          st <= COPY_ROWS;
        end
        COPY_ROWS: begin
          pend_q  <= gfb_rd_en;
          waddr_q <= gfb_rd_addr;
          if (32'(cp) < KK) begin
            if (cptr == '0 || c_last_row) begin
              cp <= cp + 1'b1;
              cr <= '0;
            end else begin
              cr <= cr + 1'b1;
            end
          end else if (!pend_q) begin
            y  <= '0;
            cp <= '0;
            cr <= '0;
            st <= Y_LOAD;
          end
        end
        Y_LOAD: begin
          pend_q <= gfe_rd_en;
          lrow_q <= LRW'(cp);
          lcol_q <= LCW'(cr);
          if (32'(cp) < K) begin
            if (cr == 16'(wdi) - 1) begin
              cp <= cp + 1'b1;
              cr <= '0;
            end else begin
              cr <= cr + 1'b1;
            end
          end else if (!pend_q) begin
            x  <= '0;
            cp <= '0;
            cr <= '0;
            st <= X_WIN;
          end
        end
        X_WIN: begin
          cr <= '0;
          st <= PS_LOAD;
        end
        PS_LOAD: begin
          if (chi == '0) begin
            st <= RUN;
          end else begin
            pend_q <= gob_rd_en;
            prow_q <= RAW'(cr);
            if (32'(cr) < RPP) cr <= cr + 1'b1;
            else if (!pend_q) begin
              cr <= '0;
              st <= RUN;
            end
          end
        end
        RUN: begin
          fin_q <= 1'b0;
          st    <= WAIT;
        end
        WAIT: begin
          if (wf_done) fin_q <= 1'b1;
          if ((fin_q || wf_done) && mpu_idle) begin
            cr <= '0;
            st <= PS_STORE;
          end
        end
        PS_STORE: begin
          if (32'(cr) == RPP - 1) begin
            cr <= '0;
            if (fc_q) st <= DONE;
            else if (x == wdo_q - 1) begin
              if (y == hdo_q - 1) begin
                if (chi == c_q - 1) st <= DONE;
                else begin
                  chi <= chi + 1'b1;
                  st  <= CH_REQ;
                end
              end else begin
                y  <= y + 1'b1;
                cp <= '0;
                st <= Y_LOAD;
              end
            end else begin
              sh <= s_q;
              st <= SHIFT;
            end
          end else begin
            cr <= cr + 1'b1;
          end
        end
        SHIFT: begin
          if (sh == 4'd1) begin
            x  <= x + 1'b1;
            st <= X_WIN;
          end
          sh <= sh - 1'b1;
        end
        FC_CLEAR: begin
          fin_q <= 1'b0;
          st    <= FC_RUN;
        end
        FC_RUN: begin
          if (fc_end) fin_q <= 1'b1;
          if ((fin_q || fc_end) && mpu_idle) begin
            cr <= '0;
            st <= PS_STORE;
          end
        end
        DONE: st <= IDLE;
        default: st <= IDLE;
      endcase
    end
  end

  a_stride: assert property (@(posedge clk) disable iff (!rst_n)
    (st == IDLE && start && !mode_fc) |-> (cfg_stride != 0 && 32'(cfg_stride) <= K));
  a_size: assert property (@(posedge clk) disable iff (!rst_n)
    (st == IDLE && start && !mode_fc) |-> (cfg_c != 0 && cfg_wdo != 0 && cfg_hdo != 0 &&
      (32'(cfg_wdo) - 1) * 32'(cfg_stride) + K <= WDI_MAX &&
      (32'(cfg_hdo) - 1) * 32'(cfg_stride) + K <= HDI_MAX &&
      32'(cfg_wdo) <= WDO_MAX && 32'(cfg_hdo) <= HDO_MAX));
endmodule
