// hedgehog_la: Hedgehog-style linear attention for one key/value head and
// NQ query heads that share it (grouped-query attention, processed in
// parallel so the state is streamed from memory only once).
//
// With feature map phi(x) = exp(x * Wf) (elementwise exp of a learned D x F
// projection, one Wf per head shared by queries and keys) it performs, for
// the current token k, v and each query head h:
//   S  <- S + phi(k)^T v        (F x D linear-attention state)
//   z  <- z + phi(k)            (F normaliser state)
//   num[h] = phi(q[h]) S        (the "QKV product")
//   den[h] = phi(q[h]) . z      (the "norm. term")
// The division num/den is left to the caller, which adds the sliding-window
// terms first. The state and Wf live in an external word-addressed memory
// (64-bit words, one read with one clock of latency plus one write per
// clock); S and z are read, updated and written back in one streaming pass.
// Layout: Wf[i][j] at fmap_base + j*D + i (Q8.8 in bits [15:0]);
// S[i][j] at ctx_base + i*D + j and z[i] at ctx_base + F*D + i (Q.16).
// Timing: F*D (feature maps) + F*D (S) + F (z) + a few clocks.
// The paper gives the blocks (FP32 Q/K maps with feature-map weights, two
// MatMuls, two elementwise adds, KV state and z_t); the exp form of the map,
// the shared Wf, the fixed-point formats and the memory layout are this
// design's. The current key is added to the state before it is read, as
// the figure feeds Key and Value straight into the state update.
module hedgehog_la
  import eltf_pkg::*;
#(
  parameter int unsigned D   = 128,
  parameter int unsigned F   = 128,
  parameter int unsigned NQ  = 4,
  parameter int unsigned SAW = 32
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [SAW-1:0]        ctx_base,
  input  logic [SAW-1:0]        fmap_base,
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
  localparam int unsigned FW = $clog2(F);

  typedef enum logic [2:0] {L_IDLE, L_MAP, L_S, L_Z, L_END} state_e;
  state_e state;

  logic [31:0] phi_q [NQ][F];
  logic [31:0] phi_k [F];
  logic signed [47:0] acc_q [NQ];
  logic signed [47:0] acc_k;

  // issue side counters
  logic [FW-1:0] ia;   // outer index (j for maps, i for S and z)
  logic [DW-1:0] ib;   // inner index
  logic          issuing;
  // return side (one clock later)
  logic          rv;
  logic [FW-1:0] ra;
  logic [DW-1:0] rb;
  state_e        rstate;

  assign busy = (state != L_IDLE);

  always_comb begin
    mem_re    = issuing;
    mem_raddr = '0;
    unique case (state)
      L_MAP:   mem_raddr = fmap_base + SAW'(ia) * SAW'(D) + SAW'(ib);
      L_S:     mem_raddr = ctx_base + SAW'(ia) * SAW'(D) + SAW'(ib);
      L_Z:     mem_raddr = ctx_base + SAW'(F * D) + SAW'(ia);
      default: mem_raddr = '0;
    endcase
  end

  // feature map of the accumulators that complete this clock
  logic signed [47:0] accq_n [NQ];
  logic signed [47:0] acck_n;
  logic [31:0]        eq [NQ];
  logic [31:0]        ek;
  logic signed [15:0] wf;
  always_comb begin
    wf = signed'(mem_rdata[15:0]);
    for (int h = 0; h < NQ; h++) accq_n[h] = ((rb == '0) ? 48'sd0 : acc_q[h]) + 48'(q[h][rb]) * 48'(wf);
    acck_n = ((rb == '0) ? 48'sd0 : acc_k) + 48'(k[rb]) * 48'(wf);
  end
  for (genvar h = 0; h < NQ; h++) begin : g_eq
    exp_fx u_eq (.x(32'(accq_n[h])), .y(eq[h]));
  end
  exp_fx u_ek (.x(32'(acck_n)), .y(ek));

  // state update arithmetic
  logic signed [63:0] s_new, z_new;
  always_comb begin
    s_new = signed'(mem_rdata) + ((64'(signed'({1'b0, phi_k[ra]})) * 64'(v[rb])) >>> 8);
    z_new = signed'(mem_rdata) + 64'(phi_k[ra]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= L_IDLE; ia <= '0; ib <= '0; issuing <= 1'b0; rv <= 1'b0; ra <= '0; rb <= '0;
      rstate <= L_IDLE; done <= 1'b0; mem_we <= 1'b0; mem_waddr <= '0; mem_wdata <= '0;
      acc_k <= '0;
      for (int h = 0; h < NQ; h++) begin
        acc_q[h] <= '0; den[h] <= '0;
        for (int j = 0; j < D; j++) num[h][j] <= '0;
      end
    end else begin
      done <= 1'b0; mem_we <= 1'b0;
      // return pipeline
      rv <= issuing; ra <= ia; rb <= ib; rstate <= state;
      if (rv) begin
        unique case (rstate)
          L_MAP: begin
            acc_q <= accq_n; acc_k <= acck_n;
            if (rb == DW'(D - 1)) begin
              for (int h = 0; h < NQ; h++) phi_q[h][ra] <= eq[h];
              phi_k[ra] <= ek;
            end
          end
          L_S: begin
            mem_we <= 1'b1; mem_waddr <= ctx_base + SAW'(ra) * SAW'(D) + SAW'(rb);
            mem_wdata <= s_new;
            for (int h = 0; h < NQ; h++)
              num[h][rb] <= num[h][rb] + 64'((96'(signed'({1'b0, phi_q[h][ra]})) * 96'(s_new)) >>> 16);
          end
          L_Z: begin
            mem_we <= 1'b1; mem_waddr <= ctx_base + SAW'(F * D) + SAW'(ra);
            mem_wdata <= z_new;
            for (int h = 0; h < NQ; h++)
              den[h] <= den[h] + 64'((96'(signed'({1'b0, phi_q[h][ra]})) * 96'(z_new)) >>> 16);
          end
          default: ;
        endcase
      end
      // issue side
      unique case (state)
        L_IDLE: if (start) begin
          state <= L_MAP; ia <= '0; ib <= '0; issuing <= 1'b1;
          for (int h = 0; h < NQ; h++) begin
            den[h] <= '0;
            for (int j = 0; j < D; j++) num[h][j] <= '0;
          end
        end
        L_MAP, L_S: begin
          if (ib == DW'(D - 1)) begin
            ib <= '0;
            if (ia == FW'(F - 1)) begin
              ia <= '0;
              state <= (state == L_MAP) ? L_S : L_Z;
            end else ia <= ia + 1'b1;
          end else ib <= ib + 1'b1;
        end
        L_Z: begin
          if (ia == FW'(F - 1)) begin
            issuing <= 1'b0; state <= L_END;
          end else ia <= ia + 1'b1;
        end
        L_END: if (!rv) begin
          done <= 1'b1; state <= L_IDLE;
        end
        default: state <= L_IDLE;
      endcase
    end
  end
endmodule
