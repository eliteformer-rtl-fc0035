// attn_head: hybrid attention for one key/value head and its NQ query heads:
// Hedgehog linear attention over the recurrent state plus softmax attention
// over the sliding window, combined by one shared normalisation
// ("Add & Normalize"):
//   out[h] = (num_la[h] + num_sw[h]) / (den_la[h] + den_sw[h])
// The two parts run one after the other on a single state-memory port (the
// memory is shared and the port is the bottleneck); the NQ query heads run
// in parallel inside each part. The division is done once per query head
// as a reciprocal (2^40 / den, 64-cycle divider) followed by D multiplies.
// Interface: start with q, k, v, pos and the three base addresses held
// stable until done; out (Q8.8, saturated) is valid from done until the
// next start. Memory port as in hedgehog_la / sw_attn.
// The paper gives the two parallel parts and their combination; running
// them in sequence on one port and the reciprocal are this design's.
module attn_head
  import eltf_pkg::*;
#(
  parameter int unsigned D   = 128,
  parameter int unsigned F   = 128,
  parameter int unsigned W   = 256,
  parameter int unsigned NQ  = 4,
  parameter int unsigned SAW = 32
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [SAW-1:0] la_base,
  input  logic [SAW-1:0] sw_base,
  input  logic [SAW-1:0] fmap_base,
  input  logic [31:0]    pos,
  input  act_t           q [NQ][D],
  input  act_t           k [D],
  input  act_t           v [D],
  output logic           busy,
  output logic           done,
  output act_t           out [NQ][D],
  output logic           mem_re,
  output logic [SAW-1:0] mem_raddr,
  input  logic [63:0]    mem_rdata,
  output logic           mem_we,
  output logic [SAW-1:0] mem_waddr,
  output logic [63:0]    mem_wdata
);
  localparam int unsigned DW = $clog2(D);
  localparam int unsigned HW = (NQ > 1) ? $clog2(NQ) : 1;

  typedef enum logic [2:0] {H_IDLE, H_LA, H_SW, H_DIV, H_DIVW, H_MUL, H_END} state_e;
  state_e state;

  logic la_start, la_busy, la_done, sw_start, sw_busy, sw_done;
  logic signed [63:0] la_num [NQ][D], sw_num [NQ][D];
  logic signed [63:0] la_den [NQ], sw_den [NQ];
  logic la_re, la_we, sw_re, sw_we;
  logic [SAW-1:0] la_ra, la_wa, sw_ra, sw_wa;
  logic [63:0] la_wd, sw_wd;

  hedgehog_la #(.D(D), .F(F), .NQ(NQ), .SAW(SAW)) u_la (
    .clk, .rst_n, .start(la_start), .ctx_base(la_base), .fmap_base, .q, .k, .v,
    .busy(la_busy), .done(la_done), .num(la_num), .den(la_den),
    .mem_re(la_re), .mem_raddr(la_ra), .mem_rdata, .mem_we(la_we), .mem_waddr(la_wa), .mem_wdata(la_wd)
  );
  sw_attn #(.D(D), .W(W), .NQ(NQ), .SAW(SAW)) u_sw (
    .clk, .rst_n, .start(sw_start), .ctx_base(sw_base), .pos, .q, .k, .v,
    .busy(sw_busy), .done(sw_done), .num(sw_num), .den(sw_den),
    .mem_re(sw_re), .mem_raddr(sw_ra), .mem_rdata, .mem_we(sw_we), .mem_waddr(sw_wa), .mem_wdata(sw_wd)
  );

  // one port: the part that is running owns it
  always_comb begin
    mem_re    = la_re | sw_re;
    mem_raddr = la_busy ? la_ra : sw_ra;
    mem_we    = la_we | sw_we;
    mem_waddr = la_we ? la_wa : sw_wa;
    mem_wdata = la_we ? la_wd : sw_wd;
  end

  logic        dv_start, dv_busy, dv_done;
  logic [63:0] dv_den, dv_q, recip;
  seq_div #(.W(64)) u_div (.clk, .rst_n, .start(dv_start), .num(64'd1 << 40), .den(dv_den),
                           .busy(dv_busy), .done(dv_done), .quot(dv_q));

  logic [HW-1:0] h;
  logic [DW-1:0] j;
  logic signed [63:0]  nsum;
  logic signed [127:0] prod;
  always_comb begin
    nsum = la_num[h][j] + sw_num[h][j];
    prod = (128'(nsum) * 128'(signed'({1'b0, recip}))) >>> 32;
  end

  assign busy = (state != H_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= H_IDLE; la_start <= 1'b0; sw_start <= 1'b0; dv_start <= 1'b0; dv_den <= '0;
      recip <= '0; h <= '0; j <= '0; done <= 1'b0;
      for (int a = 0; a < NQ; a++) for (int b = 0; b < D; b++) out[a][b] <= '0;
    end else begin
      la_start <= 1'b0; sw_start <= 1'b0; dv_start <= 1'b0; done <= 1'b0;
      unique case (state)
        H_IDLE: if (start) begin
          la_start <= 1'b1; state <= H_LA;
        end
        H_LA: if (la_done) begin
          sw_start <= 1'b1; state <= H_SW;
        end
        H_SW: if (sw_done) begin
          h <= '0; state <= H_DIV;
        end
        H_DIV: begin
          dv_den   <= 64'(la_den[h] + sw_den[h]);
          dv_start <= 1'b1;
          state    <= H_DIVW;
        end
        H_DIVW: if (dv_done) begin
          recip <= dv_q; j <= '0; state <= H_MUL;
        end
        H_MUL: begin
          out[h][j] <= (prod > 128'sd32767) ? 16'sh7fff : (prod < -128'sd32768) ? 16'sh8000 : act_t'(prod[15:0]);
          j <= j + 1'b1;
          if (j == DW'(D - 1)) begin
            if (h == HW'(NQ - 1)) state <= H_END;
            else begin
              h <= h + 1'b1; state <= H_DIV;
            end
          end
        end
        H_END: begin
          done <= 1'b1; state <= H_IDLE;
        end
        default: state <= H_IDLE;
      endcase
    end
  end
endmodule
