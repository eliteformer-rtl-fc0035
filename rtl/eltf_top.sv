// eltf_top: ELiTeFormer generation accelerator, one generative step over
// n_layers decoder layers for NB batches of MB tokens each.
//
// Every layer is split into four stages with their own hardware, started by
// stage_sched so that different batches occupy different stages at once:
//   QKV    BitLinear D_MODEL -> HQ*DH + 2*HKV*DH producing q, k and v
//   attn   per token and key/value head: hybrid attention (attn_head, the
//          HQ/HKV query heads of a group in parallel), the heads'
//          concatenation, BitLinear output projection, residual add
//   FFN12  BitLinear D_MODEL -> 2*D_FFN (up and gate projections side by side)
//   FFN3   SwiGLU gating silu(gate)*up, BitLinear D_FFN -> D_MODEL, residual add
// Each BitLinear has its own AXI4 read master (arrays m_* indexed by stage);
// stage s of layer l reads its projection at proj_base[s] + l*layer_stride
// (layout in bitlinear). The attention's recurrent state, sliding-window
// cache and feature-map weights live in an external word memory reached by
// the st_* port (read data one clock after st_re). Context words for
// (layer, batch, token row, kv head) start at
//   ((((l*NB + b)*MB + r)*HKV + g) * CTX_WORDS), CTX_WORDS = F*DH + F + 2*W*DH
// (linear state first, then the window cache) and the feature-map weights of
// (l, g) at FMAP_BASE + (l*HKV + g)*DH*F.
// The residual stream X of every batch stays on chip; it is written through
// x_we and read back through x_rd_* (one clock latency) between steps.
// pos is the index of the token being generated (same for all sequences).
// The stage split, the BitLinear projections, the hybrid attention and the
// mini-batch dimension follow the paper; the gating function (taken from the
// LLaMA 3 family the model derives from), the concatenated projections, the
// ports and all number formats are this design's. The positional
// embeddings the paper places in the QKV stage are not given in a form that
// could be built and are left out: q and k enter attention as projected.
module eltf_top
  import eltf_pkg::*;
#(
  parameter int unsigned MB      = 2,
  parameter int unsigned NB      = 2,
  parameter int unsigned NL      = 32,
  parameter int unsigned D_MODEL = 4096,
  parameter int unsigned HQ      = 32,
  parameter int unsigned HKV     = 8,
  parameter int unsigned DH      = 128,
  parameter int unsigned F       = 128,
  parameter int unsigned W       = 256,
  parameter int unsigned D_FFN   = 14336,
  parameter int unsigned NCOL    = 4,
  parameter int unsigned SAW     = 32,
  localparam int unsigned NQ     = HQ / HKV,
  localparam int unsigned D_KV   = HKV * DH,
  localparam int unsigned D_QKV  = D_MODEL + 2 * D_KV,
  localparam int unsigned CTX_WORDS = F * DH + F + 2 * W * DH,
  localparam longint unsigned FMAP_BASE = longint'(NL) * NB * MB * HKV * CTX_WORDS,
  localparam int unsigned BW = $clog2(NB + 1),
  localparam int unsigned LW = (NL > 1) ? $clog2(NL) : 1,
  localparam int unsigned RW = (MB > 1) ? $clog2(MB) : 1,
  localparam int unsigned XW = $clog2(D_MODEL)
) (
  input  logic                clk,
  input  logic                rst_n,
  // control
  input  logic                start,
  input  logic [LW:0]         n_layers,
  input  logic [31:0]         pos,
  input  logic [AXI_AW-1:0]   proj_base [N_STAGES],
  input  logic [AXI_AW-1:0]   layer_stride,
  output logic                busy,
  output logic                done,
  // residual stream access
  input  logic                x_we,
  input  logic [BW-1:0]       x_batch,
  input  logic [RW-1:0]       x_row,
  input  logic [XW-1:0]       x_idx,
  input  act_t                x_data,
  input  logic [BW-1:0]       x_rd_batch,
  input  logic [RW-1:0]       x_rd_row,
  input  logic [XW-1:0]       x_rd_idx,
  output act_t                x_rd_data,
  // weights: one AXI4 read master per stage
  output logic [AXI_AW-1:0]   m_araddr  [N_STAGES],
  output logic [7:0]          m_arlen   [N_STAGES],
  output logic [2:0]          m_arsize  [N_STAGES],
  output logic [1:0]          m_arburst [N_STAGES],
  output logic                m_arvalid [N_STAGES],
  input  logic                m_arready [N_STAGES],
  input  logic [AXI_DW-1:0]   m_rdata   [N_STAGES],
  input  logic [1:0]          m_rresp   [N_STAGES],
  input  logic                m_rlast   [N_STAGES],
  input  logic                m_rvalid  [N_STAGES],
  output logic                m_rready  [N_STAGES],
  // attention state memory
  output logic                st_re,
  output logic [SAW-1:0]      st_raddr,
  input  logic [63:0]         st_rdata,
  output logic                st_we,
  output logic [SAW-1:0]      st_waddr,
  output logic [63:0]         st_wdata
);
  // ------------------------------------------------------------------ buffers
  act_t xres [NB][MB][D_MODEL];          // residual stream
  act_t qkv  [NB][MB][D_QKV];            // QKV stage output
  act_t hbuf [NB][MB][2 * D_FFN];        // FFN12 output: up, then gate

  // ------------------------------------------------------------------ scheduler
  logic          st_start [N_STAGES];
  logic [BW-1:0] st_batch [N_STAGES];
  logic          st_done  [N_STAGES];
  logic [LW-1:0] layer;
  logic          sched_busy;
  logic [LW:0]   nl_run;

  stage_sched #(.NB(NB), .NL(NL)) u_sched (
    .clk, .rst_n, .start, .n_layers(nl_run), .busy(sched_busy), .done, .st_start, .st_batch,
    .st_done, .st_layer(layer)
  );
  assign nl_run = n_layers;
  assign busy   = sched_busy;

  // ------------------------------------------------------------------ projections
  logic                 bl_xwe [N_STAGES];
  logic [RW-1:0]        bl_xrow [N_STAGES];
  logic [15:0]          bl_xidx [N_STAGES];
  act_t                 bl_xdata [N_STAGES];
  logic                 bl_start [N_STAGES];
  logic                 bl_busy [N_STAGES], bl_done [N_STAGES];
  logic                 bl_yv [N_STAGES];
  logic [RW-1:0]        bl_yrow [N_STAGES];
  logic [15:0]          bl_yidx [N_STAGES];
  act_t                 bl_y [N_STAGES];
  logic [AXI_AW-1:0]    bl_base [N_STAGES];
  logic [BW-1:0]        cur_b [N_STAGES];

  for (genvar s = 0; s < N_STAGES; s++) begin : g_bl
    localparam int unsigned DI = (s == 3) ? D_FFN : D_MODEL;
    localparam int unsigned DO = (s == 0) ? D_QKV : (s == 2) ? 2 * D_FFN : D_MODEL;
    logic [$clog2(DO)-1:0] yi;
    assign bl_base[s] = proj_base[s] + AXI_AW'(layer) * layer_stride;
    bitlinear #(.MB(MB), .D_IN(DI), .D_OUT(DO), .NCOL(NCOL)) u_bl (
      .clk, .rst_n, .x_we(bl_xwe[s]), .x_row(bl_xrow[s]), .x_idx(bl_xidx[s][$clog2(DI)-1:0]),
      .x_data(bl_xdata[s]), .start(bl_start[s]), .base(bl_base[s]), .busy(bl_busy[s]),
      .done(bl_done[s]),
      .m_araddr(m_araddr[s]), .m_arlen(m_arlen[s]), .m_arsize(m_arsize[s]),
      .m_arburst(m_arburst[s]), .m_arvalid(m_arvalid[s]), .m_arready(m_arready[s]),
      .m_rdata(m_rdata[s]), .m_rresp(m_rresp[s]), .m_rlast(m_rlast[s]),
      .m_rvalid(m_rvalid[s]), .m_rready(m_rready[s]),
      .y_valid(bl_yv[s]), .y_row(bl_yrow[s]), .y_idx(yi), .y_data(bl_y[s])
    );
    assign bl_yidx[s] = 16'(yi);
  end

  // ------------------------------------------------------------------ attention
  act_t          qreg [NQ][DH];
  act_t          kreg [DH];
  act_t          vreg [DH];
  act_t          aout [NQ][DH];
  logic          ah_start, ah_busy, ah_done;
  logic [SAW-1:0] la_base, sw_base, fm_base;

  attn_head #(.D(DH), .F(F), .W(W), .NQ(NQ), .SAW(SAW)) u_attn (
    .clk, .rst_n, .start(ah_start), .la_base, .sw_base, .fmap_base(fm_base), .pos,
    .q(qreg), .k(kreg), .v(vreg), .busy(ah_busy), .done(ah_done), .out(aout),
    .mem_re(st_re), .mem_raddr(st_raddr), .mem_rdata(st_rdata), .mem_we(st_we),
    .mem_waddr(st_waddr), .mem_wdata(st_wdata)
  );

  // ------------------------------------------------------------------ SwiGLU
  logic        sg_start, sg_busy, sg_done;
  logic [39:0] sg_den, sg_q;
  logic [31:0] e_negx;
  seq_div #(.W(40)) u_sgdiv (.clk, .rst_n, .start(sg_start), .num(40'd1 << 32), .den(sg_den),
                             .busy(sg_busy), .done(sg_done), .quot(sg_q));

  // ------------------------------------------------------------------ stage FSMs
  typedef enum logic [2:0] {P_IDLE, P_COPY, P_START, P_WAIT, P_AUX1, P_AUX2, P_AUX3} pst_e;
  pst_e ps [N_STAGES];
  logic [RW-1:0] cr [N_STAGES];       // copy row
  logic [15:0]   ci [N_STAGES];       // copy index
  // attention-stage loop state
  logic [$clog2(HKV+1)-1:0] ag;
  logic [15:0]              ac;

  // combinational reads for copies
  act_t gate_v, up_v;
  logic signed [63:0] silu, glu;
  always_comb begin
    up_v   = hbuf[cur_b[3]][cr[3]][ci[3]];
    gate_v = hbuf[cur_b[3]][cr[3]][D_FFN + ci[3]];
    silu   = (64'(gate_v) * $signed(64'(sg_q))) >>> 16;
    glu    = (silu * 64'(up_v)) >>> ACT_FRAC;
  end
  exp_fx u_eneg (.x(-(32'(gate_v) <<< 8)), .y(e_negx));

  always_comb begin
    // projection input ports
    for (int s = 0; s < N_STAGES; s++) begin
      bl_xwe[s] = 1'b0; bl_xrow[s] = cr[s]; bl_xidx[s] = ci[s]; bl_xdata[s] = '0;
    end
    bl_xwe[0]   = (ps[0] == P_COPY);
    bl_xdata[0] = xres[cur_b[0]][cr[0]][ci[0]];
    bl_xwe[2]   = (ps[2] == P_COPY);
    bl_xdata[2] = xres[cur_b[2]][cr[2]][ci[2]];
    bl_xwe[1]   = (ps[1] == P_AUX3);
    bl_xidx[1]  = 16'(ag) * 16'(NQ * DH) + ac;
    bl_xdata[1] = aout[ac / DH][ac % DH];
    bl_xwe[3]   = (ps[3] == P_AUX2) && sg_done;
    bl_xdata[3] = sat16(glu);
    // attention contexts
    la_base = SAW'((((longint'(layer) * NB + cur_b[1]) * MB + cr[1]) * HKV + ag) * CTX_WORDS);
    sw_base = la_base + SAW'(F * DH + F);
    fm_base = SAW'(FMAP_BASE + (longint'(layer) * HKV + ag) * DH * F);
    sg_den  = 40'd65536 + 40'(e_negx);
  end

  always_ff @(posedge clk) x_rd_data <= xres[x_rd_batch][x_rd_row][x_rd_idx];

  // residual stream, QKV and FFN12 buffers
  always_ff @(posedge clk) begin
    if (x_we) xres[x_batch][x_row][x_idx] <= x_data;
    if (bl_yv[0]) qkv[cur_b[0]][bl_yrow[0]][bl_yidx[0]] <= bl_y[0];
    if (bl_yv[2]) hbuf[cur_b[2]][bl_yrow[2]][bl_yidx[2]] <= bl_y[2];
    if (bl_yv[1]) xres[cur_b[1]][bl_yrow[1]][bl_yidx[1]] <=
        sat16(64'(xres[cur_b[1]][bl_yrow[1]][bl_yidx[1]]) + 64'(bl_y[1]));
    if (bl_yv[3]) xres[cur_b[3]][bl_yrow[3]][bl_yidx[3]] <=
        sat16(64'(xres[cur_b[3]][bl_yrow[3]][bl_yidx[3]]) + 64'(bl_y[3]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < N_STAGES; s++) begin
        ps[s] <= P_IDLE; cr[s] <= '0; ci[s] <= '0; cur_b[s] <= '0;
        bl_start[s] <= 1'b0; st_done[s] <= 1'b0;
      end
      ag <= '0; ac <= '0; ah_start <= 1'b0; sg_start <= 1'b0;
    end else begin
      for (int s = 0; s < N_STAGES; s++) begin
        bl_start[s] <= 1'b0; st_done[s] <= 1'b0;
      end
      ah_start <= 1'b0; sg_start <= 1'b0;

      // ---- QKV (0) and FFN12 (2): copy X, project
      for (int s = 0; s < N_STAGES; s += 2) begin
        unique case (ps[s])
          P_IDLE: if (st_start[s]) begin
            cur_b[s] <= st_batch[s]; cr[s] <= '0; ci[s] <= '0; ps[s] <= P_COPY;
          end
          P_COPY: begin
            if (ci[s] == 16'(D_MODEL - 1)) begin
              ci[s] <= '0;
              if (cr[s] == RW'(MB - 1)) ps[s] <= P_START;
              else cr[s] <= cr[s] + 1'b1;
            end else ci[s] <= ci[s] + 1'b1;
          end
          P_START: begin
            bl_start[s] <= 1'b1; ps[s] <= P_WAIT;
          end
          P_WAIT: if (bl_done[s]) begin
            st_done[s] <= 1'b1; ps[s] <= P_IDLE;
          end
          default: ps[s] <= P_IDLE;
        endcase
      end

      // ---- attn (1): per row and kv head: load q,k,v, attend, store heads
      unique case (ps[1])
        P_IDLE: if (st_start[1]) begin
          cur_b[1] <= st_batch[1]; cr[1] <= '0; ag <= '0; ac <= '0; ps[1] <= P_AUX1;
        end
        P_AUX1: begin                                   // load q, k, v registers
          if (ac < 16'(NQ * DH))
            qreg[ac / DH][ac % DH] <= qkv[cur_b[1]][cr[1]][16'(ag) * 16'(NQ * DH) + ac];
          else if (ac < 16'(NQ * DH + DH))
            kreg[ac - 16'(NQ * DH)] <= qkv[cur_b[1]][cr[1]][16'(D_MODEL) + 16'(ag) * 16'(DH) + ac - 16'(NQ * DH)];
          else
            vreg[ac - 16'(NQ * DH + DH)] <= qkv[cur_b[1]][cr[1]][16'(D_MODEL + D_KV) + 16'(ag) * 16'(DH) + ac - 16'(NQ * DH + DH)];
          if (ac == 16'(NQ * DH + 2 * DH - 1)) begin
            ac <= '0; ah_start <= 1'b1; ps[1] <= P_AUX2;
          end else ac <= ac + 1'b1;
        end
        P_AUX2: if (ah_done) begin
          ac <= '0; ps[1] <= P_AUX3;
        end
        P_AUX3: begin                                   // head concatenation
          if (ac == 16'(NQ * DH - 1)) begin
            ac <= '0;
            if (ag == ($bits(ag))'(HKV - 1)) begin
              ag <= '0;
              if (cr[1] == RW'(MB - 1)) ps[1] <= P_START;
              else begin
                cr[1] <= cr[1] + 1'b1; ps[1] <= P_AUX1;
              end
            end else begin
              ag <= ag + 1'b1; ps[1] <= P_AUX1;
            end
          end else ac <= ac + 1'b1;
        end
        P_START: begin
          bl_start[1] <= 1'b1; ps[1] <= P_WAIT;
        end
        P_WAIT: if (bl_done[1]) begin
          st_done[1] <= 1'b1; ps[1] <= P_IDLE;
        end
        default: ps[1] <= P_IDLE;
      endcase

      // ---- FFN3 (3): SwiGLU element by element, project
      unique case (ps[3])
        P_IDLE: if (st_start[3]) begin
          cur_b[3] <= st_batch[3]; cr[3] <= '0; ci[3] <= '0; ps[3] <= P_AUX1;
        end
        P_AUX1: begin
          sg_start <= 1'b1; ps[3] <= P_AUX2;
        end
        P_AUX2: if (sg_done) begin
          if (ci[3] == 16'(D_FFN - 1)) begin
            ci[3] <= '0;
            if (cr[3] == RW'(MB - 1)) ps[3] <= P_START;
            else begin
              cr[3] <= cr[3] + 1'b1; ps[3] <= P_AUX1;
            end
          end else begin
            ci[3] <= ci[3] + 1'b1; ps[3] <= P_AUX1;
          end
        end
        P_START: begin
          bl_start[3] <= 1'b1; ps[3] <= P_WAIT;
        end
        P_WAIT: if (bl_done[3]) begin
          st_done[3] <= 1'b1; ps[3] <= P_IDLE;
        end
        default: ps[3] <= P_IDLE;
      endcase
    end
  end
endmodule
