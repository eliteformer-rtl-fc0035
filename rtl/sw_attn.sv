// sw_attn: sliding-window softmax attention for one key/value head and NQ
// query heads that share it.
//
// The cache holds the W most recent key/value pairs in a ring: the current
// pair is written to slot pos % W, which drops (dequeues) the oldest pair
// once the window is full. Then, for each of the n = min(pos+1, W) valid
// slots s and each query head h:
//   e[h,s]  = exp((q[h] . K[s]) / sqrt(D))
//   num[h] += e[h,s] * V[s]     (the "QKV product")
//   den[h] += e[h,s]            (the "norm. term")
// No running maximum is subtracted: scores are clamped inside exp_fx, and
// the caller divides after adding the linear-attention terms.
// Memory (64-bit words, Q8.8 values in bits [15:0], one read with one clock
// of latency and one write per clock): K[s][i] at ctx_base + s*D + i,
// V[s][i] at ctx_base + W*D + s*D + i.
// Timing: 2*D (write) + n*(2*D + 2) + 3 clocks.
// The paper gives the blocks (elementwise scale, MatMul, elementwise exp,
// sum, MatMul, concatenate and dequeue-oldest on the cache) and W = 256;
// the fixed-point formats and the memory layout are this design's.
module sw_attn
  import eltf_pkg::*;
#(
  parameter int unsigned D   = 128,
  parameter int unsigned W   = 256,
  parameter int unsigned NQ  = 4,
  parameter int unsigned SAW = 32,
  // 1/sqrt(D) in Q.16
  parameter logic [16:0] RSQRT_D = 17'(int'(65536.0 / $sqrt(real'(D)) + 0.5))
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [SAW-1:0]        ctx_base,
  input  logic [31:0]           pos,
  input  act_t                  q [NQ][D],
  input  act_t                  k [D],
  input  act_t                  v [D],
  output logic                  busy,
  output logic                  done,
  output logic signed [63:0]    num [NQ][D],
  output logic signed [63:0]    den [NQ],
  output logic                  mem_re,
  output logic [SAW-1:0]        mem_raddr,
  input  logic [63:0]           mem_rdata,
  output logic                  mem_we,
  output logic [SAW-1:0]        mem_waddr,
  output logic [63:0]           mem_wdata
);
  localparam int unsigned DW = $clog2(D);
  localparam int unsigned WW = $clog2(W);

  typedef enum logic [2:0] {W_IDLE, W_WK, W_WV, W_RK, W_EXP, W_RV, W_END} state_e;
  state_e state;

  logic [WW-1:0] wslot;       // slot of the current pair
  logic [WW:0]   nvalid;      // slots to visit
  logic [WW:0]   s;           // slot being visited
  logic [DW-1:0] i;           // element issued
  logic          rv;
  logic [DW-1:0] ri;
  state_e        rstate;
  logic signed [47:0] score [NQ];
  logic [31:0]        e [NQ];

  assign busy = (state != W_IDLE);

  always_comb begin
    mem_re = (state == W_RK) || (state == W_RV);
    mem_raddr = (state == W_RV) ? ctx_base + SAW'(W * D) + SAW'(s) * SAW'(D) + SAW'(i)
                                : ctx_base + SAW'(s) * SAW'(D) + SAW'(i);
  end

  logic [31:0] e_n [NQ];
  for (genvar h = 0; h < NQ; h++) begin : g_exp
    logic signed [63:0] scaled;
    assign scaled = (64'(score[h]) * 64'(signed'({1'b0, RSQRT_D}))) >>> 16;
    exp_fx u_exp (.x(32'(scaled)), .y(e_n[h]));
  end

  logic signed [15:0] rdv;
  assign rdv = signed'(mem_rdata[15:0]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= W_IDLE; wslot <= '0; nvalid <= '0; s <= '0; i <= '0; rv <= 1'b0; ri <= '0;
      rstate <= W_IDLE; done <= 1'b0; mem_we <= 1'b0; mem_waddr <= '0; mem_wdata <= '0;
      for (int h = 0; h < NQ; h++) begin
        score[h] <= '0; e[h] <= '0; den[h] <= '0;
        for (int j = 0; j < D; j++) num[h][j] <= '0;
      end
    end else begin
      done <= 1'b0; mem_we <= 1'b0;
      rv <= mem_re; ri <= i; rstate <= state;
      if (rv && rstate == W_RK)
        for (int h = 0; h < NQ; h++)
          score[h] <= ((ri == '0) ? 48'sd0 : score[h]) + 48'(q[h][ri]) * 48'(rdv);
      if (rv && rstate == W_RV)
        for (int h = 0; h < NQ; h++)
          num[h][ri] <= num[h][ri] + ((64'(signed'({1'b0, e[h]})) * 64'(rdv)) >>> 8);
      unique case (state)
        W_IDLE: if (start) begin
          wslot  <= WW'(pos % W);
          nvalid <= (pos >= 32'(W)) ? (WW+1)'(W) : (WW+1)'(pos + 1);
          i <= '0; s <= '0; state <= W_WK;
          for (int h = 0; h < NQ; h++) begin
            den[h] <= '0;
            for (int j = 0; j < D; j++) num[h][j] <= '0;
          end
        end
        W_WK, W_WV: begin        // concatenate the current pair to the cache
          mem_we    <= 1'b1;
          mem_waddr <= ctx_base + ((state == W_WV) ? SAW'(W * D) : '0) + SAW'(wslot) * SAW'(D) + SAW'(i);
          mem_wdata <= 64'(signed'((state == W_WV) ? v[i] : k[i]));
          i <= i + 1'b1;
          if (i == DW'(D - 1)) state <= (state == W_WK) ? W_WV : W_RK;
        end
        W_RK: begin
          i <= i + 1'b1;
          if (i == DW'(D - 1)) state <= W_EXP;
        end
        W_EXP: if (!rv) begin    // last score has landed
          e <= e_n;
          for (int h = 0; h < NQ; h++) den[h] <= den[h] + 64'(e_n[h]);
          state <= W_RV;
        end
        W_RV: begin
          i <= i + 1'b1;
          if (i == DW'(D - 1)) begin
            if (s == nvalid - 1'b1) state <= W_END;
            else begin
              s <= s + 1'b1; state <= W_RK;
            end
          end
        end
        W_END: if (!rv) begin
          done <= 1'b1; state <= W_IDLE;
        end
        default: state <= W_IDLE;
      endcase
    end
  end
endmodule
