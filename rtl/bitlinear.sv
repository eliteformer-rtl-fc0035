// bitlinear: one complete ternary (BitNet b1.58 style) linear projection for
// a mini-batch of MB tokens: y[r] = dequant(W_ternary * quant(RMSNorm(x[r]))).
//
// Memory layout of one projection, starting at byte address base (64-byte
// frames): frame 0 bits [31:0] hold the weight scale s_w (Q16.16); the next
// D_IN/32 frames hold the RMSNorm scaling weights gamma (Q8.8, entry i in
// bits [16*(i%32)+15 : 16*(i%32)] of frame 1 + i/32); the weights follow as
// dataframes in the order g outer (input group of four), j inner (output).
// Operation after start:
//   1. read the parameter frames over AXI (gamma into the quantiser);
//   2. start streaming the weights into the weight buffer (runs on while the
//      next steps proceed) and, row by row, normalise and quantise x[r] to
//      INT8 into the PE array's input buffer, keeping each row's scale s_act;
//   3. run the ELTF PE array over all weights;
//   4. stream y[r][j] = acc * s_act[r] * s_w out on y_valid/y_row/y_idx/y_data
//      (Q8.8, saturated), one per clock, row-major.
// done pulses after the last y. Inputs are written beforehand through x_we.
// The paper gives steps 1 to 4 and their blocks (RMSNorm, INT8 Quant., bit
// masking, INT8 Dequant.); the single AXI port shared by parameters and
// weights, the layout and the fixed-point scales are this design's.
module bitlinear
  import eltf_pkg::*;
#(
  parameter int unsigned MB       = 2,
  parameter int unsigned D_IN     = 4096,
  parameter int unsigned D_OUT    = 4096,
  parameter int unsigned NCOL     = 4,
  parameter int unsigned ACC_W    = 32,
  parameter int unsigned WB_DEPTH = 128,
  localparam int unsigned RW = (MB > 1) ? $clog2(MB) : 1,
  localparam int unsigned IW = (D_IN > 1) ? $clog2(D_IN) : 1,
  localparam int unsigned OW = (D_OUT > 1) ? $clog2(D_OUT) : 1,
  localparam int unsigned NGRP = D_IN / W_PER_DF,
  localparam int unsigned GW = (NGRP > 1) ? $clog2(NGRP) : 1,
  localparam int unsigned NPF = 1 + D_IN / ACTS_PER_FRAME,            // parameter frames
  localparam int unsigned NWF = (NGRP * D_OUT) / DF_PER_FRAME          // weight frames
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 x_we,
  input  logic [RW-1:0]        x_row,
  input  logic [IW-1:0]        x_idx,
  input  act_t                 x_data,
  input  logic                 start,
  input  logic [AXI_AW-1:0]    base,
  output logic                 busy,
  output logic                 done,
  output logic [AXI_AW-1:0]    m_araddr,
  output logic [7:0]           m_arlen,
  output logic [2:0]           m_arsize,
  output logic [1:0]           m_arburst,
  output logic                 m_arvalid,
  input  logic                 m_arready,
  input  logic [AXI_DW-1:0]    m_rdata,
  input  logic [1:0]           m_rresp,
  input  logic                 m_rlast,
  input  logic                 m_rvalid,
  output logic                 m_rready,
  output logic                 y_valid,
  output logic [RW-1:0]        y_row,
  output logic [OW-1:0]        y_idx,
  output act_t                 y_data
);
  initial begin
    assert (D_IN % ACTS_PER_FRAME == 0) else $error("D_IN must be a multiple of 32");
    assert ((NGRP * D_OUT) % DF_PER_FRAME == 0) else $error("weights must fill whole frames");
  end

  act_t xin [MB][D_IN];
  always_ff @(posedge clk) if (x_we) xin[x_row][x_idx] <= x_data;

  typedef enum logic [3:0] {B_IDLE, B_PSTART, B_PARAM, B_GAMMA, B_WSTART, B_COPY, B_QUANT,
                            B_RUN, B_OUT, B_FIN} state_e;
  state_e state;

  // ---------------- AXI reader shared by parameters and weights
  logic              rd_start, rd_busy, rd_done, f_valid, f_ready;
  logic [AXI_AW-1:0] rd_base;
  logic [23:0]       rd_n;
  logic [AXI_DW-1:0] f_data;
  logic              wphase;              // 0: parameters, 1: weights
  logic [$clog2(WB_DEPTH):0] wb_free;
  logic              wb_f_ready, pf_ready;
  logic [7:0]        credit;

  assign credit  = wphase ? 8'((wb_free > 64) ? 64 : wb_free) : 8'd64;
  assign f_ready = wphase ? wb_f_ready : pf_ready;

  axi_weight_reader #(.NW(24), .CREDIT_W(8)) u_rd (
    .clk, .rst_n, .start(rd_start), .base(rd_base), .n_frames(rd_n), .busy(rd_busy),
    .done(rd_done), .credit(credit),
    .m_araddr, .m_arlen, .m_arsize, .m_arburst, .m_arvalid, .m_arready,
    .m_rdata, .m_rresp, .m_rlast, .m_rvalid, .m_rready,
    .f_valid, .f_ready, .f_data
  );

  // ---------------- weight buffer and PE array
  logic wb_clear, wvalid, wready;
  wdf_t wdata [NCOL];
  weight_buffer #(.NCOL(NCOL), .DEPTH(WB_DEPTH)) u_wb (
    .clk, .rst_n, .clear(wb_clear), .f_valid(f_valid && wphase), .f_ready(wb_f_ready),
    .f_data, .w_valid(wvalid), .w_ready(wready), .w_data(wdata), .free_slots(wb_free)
  );

  logic              pa_we, pa_start, pa_busy, pa_done;
  logic [RW-1:0]     pa_row, o_row;
  logic [GW-1:0]     pa_grp;
  q8_t               pa_x [W_PER_DF];
  logic [OW-1:0]     o_idx;
  logic signed [ACC_W-1:0] o_data;
  eltf_pe_array #(.MB(MB), .NCOL(NCOL), .D_IN(D_IN), .D_OUT(D_OUT), .ACC_W(ACC_W)) u_pa (
    .clk, .rst_n, .x_we(pa_we), .x_row(pa_row), .x_grp(pa_grp), .x_data(pa_x),
    .start(pa_start), .busy(pa_busy), .done(pa_done),
    .w_valid(wvalid), .w_ready(wready), .w_data(wdata),
    .o_rd_row(o_row), .o_rd_idx(o_idx), .o_rd_data(o_data)
  );

  // ---------------- normaliser / quantiser
  logic          aq_xwe, aq_gwe, aq_start, aq_busy, aq_done, aq_qv;
  logic [IW-1:0] aq_xidx, aq_gidx, aq_qidx;
  act_t          aq_xdata, aq_gdata;
  q8_t           aq_q;
  logic [31:0]   aq_s;
  act_quant #(.D(D_IN)) u_aq (
    .clk, .rst_n, .x_we(aq_xwe), .x_idx(aq_xidx), .x_data(aq_xdata),
    .g_we(aq_gwe), .g_idx(aq_gidx), .g_data(aq_gdata), .start(aq_start), .busy(aq_busy),
    .done(aq_done), .q_valid(aq_qv), .q_idx(aq_qidx), .q_data(aq_q), .s_act(aq_s)
  );

  // ---------------- control
  logic [31:0]       s_w;
  logic [31:0]       s_act [MB];
  logic [AXI_DW-1:0] gframe;
  logic [4:0]        gsub;
  logic [IW-1:0]     gidx, ci;
  logic [RW-1:0]     r;
  logic              pf_seen;
  q8_t               qpack [W_PER_DF-1];
  logic [OW-1:0]     oj;
  logic              o_pend;
  logic [RW-1:0]     o_row_d;
  logic [OW-1:0]     o_idx_d;

  assign pf_ready = (state == B_PARAM);
  assign busy     = (state != B_IDLE);
  assign o_row    = r;
  assign o_idx    = oj;

  always_comb begin
    aq_xwe   = (state == B_COPY);
    aq_xidx  = ci;
    aq_xdata = xin[r][ci];
    aq_gwe   = (state == B_GAMMA);
    aq_gidx  = gidx;
    aq_gdata = act_t'(gframe[16*gsub +: 16]);
    pa_we    = aq_qv && (aq_qidx[1:0] == 2'd3);
    pa_row   = r;
    pa_grp   = GW'(aq_qidx >> 2);
    for (int n = 0; n < W_PER_DF - 1; n++) pa_x[n] = qpack[n];
    pa_x[W_PER_DF-1] = aq_q;
  end

  // dequantisation of the element read in the previous clock
  logic signed [95:0] t1, t2;
  always_comb begin
    t1 = 96'(o_data) * $signed({64'd0, s_act[o_row_d]});          // Q.16
    t2 = (t1 * $signed({64'd0, s_w})) >>> 24;                      // Q.32 -> Q8.8
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= B_IDLE; rd_start <= 1'b0; rd_base <= '0; rd_n <= '0; wphase <= 1'b0;
      wb_clear <= 1'b0; pa_start <= 1'b0; aq_start <= 1'b0; s_w <= '0; gframe <= '0;
      gsub <= '0; gidx <= '0; ci <= '0; r <= '0; pf_seen <= 1'b0; oj <= '0; o_pend <= 1'b0;
      o_row_d <= '0; o_idx_d <= '0; y_valid <= 1'b0; y_row <= '0; y_idx <= '0; y_data <= '0;
      done <= 1'b0;
      for (int n = 0; n < W_PER_DF - 1; n++) qpack[n] <= '0;
      for (int m = 0; m < MB; m++) s_act[m] <= '0;
    end else begin
      rd_start <= 1'b0; wb_clear <= 1'b0; pa_start <= 1'b0; aq_start <= 1'b0;
      done <= 1'b0; y_valid <= 1'b0;
      if (aq_qv && aq_qidx[1:0] != 2'd3) qpack[aq_qidx[1:0]] <= aq_q;
      unique case (state)
        B_IDLE: if (start) begin
          rd_base <= base; rd_n <= 24'(NPF); rd_start <= 1'b1; wphase <= 1'b0;
          wb_clear <= 1'b1; pf_seen <= 1'b0; gidx <= '0; state <= B_PSTART;
        end
        B_PSTART: state <= B_PARAM;
        B_PARAM: if (f_valid) begin
          if (!pf_seen) begin
            s_w <= f_data[31:0]; pf_seen <= 1'b1;
          end else begin
            gframe <= f_data; gsub <= '0; state <= B_GAMMA;
          end
        end
        B_GAMMA: begin
          gidx <= gidx + 1'b1;
          gsub <= gsub + 1'b1;
          if (gsub == 5'd31) begin
            if (gidx == IW'(D_IN - 1)) state <= B_WSTART;
            else state <= B_PARAM;
          end
        end
        B_WSTART: if (!rd_busy) begin
          rd_base <= rd_base + AXI_AW'(NPF * FRAME_BYTES);
          rd_n <= 24'(NWF); rd_start <= 1'b1; wphase <= 1'b1;
          r <= '0; ci <= '0; state <= B_COPY;
        end
        B_COPY: begin
          ci <= ci + 1'b1;
          if (ci == IW'(D_IN - 1)) begin
            aq_start <= 1'b1; state <= B_QUANT;
          end
        end
        B_QUANT: if (aq_done) begin
          s_act[r] <= aq_s;
          ci <= '0;
          if (r == RW'(MB - 1)) begin
            pa_start <= 1'b1; state <= B_RUN;
          end else begin
            r <= r + 1'b1; state <= B_COPY;
          end
        end
        B_RUN: if (pa_done) begin
          r <= '0; oj <= '0; o_pend <= 1'b0; state <= B_OUT;
        end
        B_OUT: begin
          // read (r, oj) this clock, emit it next clock
          o_pend <= 1'b1; o_row_d <= r; o_idx_d <= oj;
          if (o_pend) begin
            y_valid <= 1'b1; y_row <= o_row_d; y_idx <= o_idx_d; y_data <= sat16(t2 > 96'sd32767 ? 64'sd32767 : t2 < -96'sd32768 ? -64'sd32768 : 64'(t2));
          end
          if (oj == OW'(D_OUT - 1)) begin
            oj <= '0;
            if (r == RW'(MB - 1)) state <= B_FIN;
            else r <= r + 1'b1;
          end else oj <= oj + 1'b1;
        end
        B_FIN: begin
          y_valid <= 1'b1; y_row <= o_row_d; y_idx <= o_idx_d; y_data <= sat16(t2 > 96'sd32767 ? 64'sd32767 : t2 < -96'sd32768 ? -64'sd32768 : 64'(t2));
          done <= 1'b1; state <= B_IDLE;
        end
        default: state <= B_IDLE;
      endcase
    end
  end
endmodule
