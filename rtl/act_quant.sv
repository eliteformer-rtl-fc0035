// act_quant: RMSNorm followed by INT8 activation quantisation (the front of
// every BitLinear projection).
//
// For one token x[0..D-1] (Q8.8) with scaling weights gamma (Q8.8):
//   xg_i  = x_i * gamma_i                       (scaled, not yet normalised, Q16.16)
//   rms   = sqrt(mean(x_i^2))
//   xq_i  = round(127 * xg_i / max_j |xg_j|)    INT8, per-token absmax
//   s_act = max_j |xg_j| / (127 * rms)          so that x_i*gamma_i/rms = xq_i*s_act
// The division by rms cancels in xq, so normalisation and quantisation share
// one pass; rms only enters the dequantisation scale s_act (Q16.16).
// Pass 1 (D clocks) accumulates sum of squares and absmax; then one isqrt and
// three sequential divisions (about 3*48+24 clocks); pass 2 (D clocks)
// streams xq_i out on q_valid/q_idx/q_data, one per clock. done pulses with
// s_act valid after the last q_valid.
// The paper gives the order RMSNorm -> INT8 quantisation and FP32 scaling
// weights; the fixed-point formats and this schedule are this design's.
module act_quant
  import eltf_pkg::*;
#(
  parameter int unsigned D = 4096,
  localparam int unsigned IW = (D > 1) ? $clog2(D) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          x_we,
  input  logic [IW-1:0] x_idx,
  input  act_t          x_data,
  input  logic          g_we,
  input  logic [IW-1:0] g_idx,
  input  act_t          g_data,
  input  logic          start,
  output logic          busy,
  output logic          done,
  output logic          q_valid,
  output logic [IW-1:0] q_idx,
  output q8_t           q_data,
  output logic [31:0]   s_act
);
  act_t xbuf [D];
  act_t gbuf [D];
  logic signed [31:0] xg_buf [D];

  typedef enum logic [3:0] {A_IDLE, A_P1, A_MEAN, A_MEANW, A_SQRTW, A_RECW, A_SCW, A_P2} state_e;
  state_e state;
  logic [IW-1:0] i;
  logic [47:0]   sumsq;
  logic [31:0]   absmax;
  logic [47:0]   recip;
  logic [23:0]   rms;

  always_ff @(posedge clk) begin
    if (x_we) xbuf[x_idx] <= x_data;
    if (g_we) gbuf[g_idx] <= g_data;
  end

  // divider and square root
  logic        dv_start, dv_done, sq_start, sq_done, dv_busy, sq_busy;
  logic [47:0] dv_num, dv_den, dv_q;
  logic [23:0] sq_root;
  seq_div #(.W(48)) u_div (.clk, .rst_n, .start(dv_start), .num(dv_num), .den(dv_den),
                           .busy(dv_busy), .done(dv_done), .quot(dv_q));
  isqrt #(.W(48)) u_sqrt (.clk, .rst_n, .start(sq_start), .v(dv_q), .busy(sq_busy),
                          .done(sq_done), .root(sq_root));

  logic signed [31:0] xg_now;
  logic [31:0]        xg_abs;
  logic signed [31:0] xsq;
  always_comb begin
    xg_now = 32'(xbuf[i]) * 32'(gbuf[i]);     // Q16.16, kept exact
    xg_abs = xg_now[31] ? 32'(-xg_now) : 32'(xg_now);
    xsq    = 32'(xbuf[i]) * 32'(xbuf[i]);
  end

  // pass 2 arithmetic
  logic signed [95:0] prod, rnd;
  always_comb begin
    prod = 96'(xg_buf[i]) * $signed({48'd0, recip});
    rnd  = (prod + (96'sd1 <<< 39)) >>> 40;
  end

  assign busy = (state != A_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= A_IDLE; i <= '0; sumsq <= '0; absmax <= '0; recip <= '0; rms <= '0;
      s_act <= '0; done <= 1'b0; q_valid <= 1'b0; q_idx <= '0; q_data <= '0;
      dv_start <= 1'b0; sq_start <= 1'b0; dv_num <= '0; dv_den <= '0;
    end else begin
      done <= 1'b0; q_valid <= 1'b0; dv_start <= 1'b0; sq_start <= 1'b0;
      unique case (state)
        A_IDLE: if (start) begin
          i <= '0; sumsq <= '0; absmax <= '0; state <= A_P1;
        end
        A_P1: begin
          xg_buf[i] <= xg_now;
          sumsq <= sumsq + 48'(unsigned'(xsq));
          if (xg_abs > absmax) absmax <= xg_abs;
          if (i == IW'(D - 1)) begin
            i <= '0; state <= A_MEAN;
          end else i <= i + 1'b1;
        end
        A_MEAN: begin          // mean of squares, Q16.16
          dv_num <= sumsq; dv_den <= 48'(D); dv_start <= 1'b1; state <= A_MEANW;
        end
        A_MEANW: if (dv_done) begin
          sq_start <= 1'b1; state <= A_SQRTW;
        end
        A_SQRTW: if (sq_done) begin
          rms <= sq_root;      // Q8.8
          dv_num <= 48'd127 << 40; dv_den <= 48'(absmax); dv_start <= 1'b1;
          state <= A_RECW;
        end
        A_RECW: if (dv_done) begin
          recip  <= (absmax == '0) ? '0 : dv_q;
          dv_num <= 48'(absmax) << 8; dv_den <= 48'(rms) * 48'd127; dv_start <= 1'b1;
          state  <= A_SCW;
        end
        A_SCW: if (dv_done) begin
          s_act <= (rms == '0) ? '0 : 32'(dv_q);
          i <= '0; state <= A_P2;
        end
        A_P2: begin
          q_valid <= 1'b1;
          q_idx   <= i;
          q_data  <= (rnd > 96'sd127) ? 8'sd127 : (rnd < -96'sd127) ? -8'sd127 : q8_t'(rnd[7:0]);
          if (i == IW'(D - 1)) begin
            state <= A_IDLE; done <= 1'b1;
          end else i <= i + 1'b1;
        end
        default: state <= A_IDLE;
      endcase
    end
  end
endmodule
