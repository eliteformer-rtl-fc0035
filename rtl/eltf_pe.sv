// eltf_pe: the ELiTeFormer processing element (ELTF PE).
//
// Multiplies four stationary INT8 activations by four ternary weights without
// a multiplier and adds the result to an output value. As in the paper, the
// 8-bit weight dataframe is shifted apart into four 2-bit indices; each index
// selects a bit-flip mask, a null-value mask and a two's-complement value.
// Each activation is XORed with its flip mask, ANDed with its null mask and
// incremented by its complement value, which yields -x, 0 or +x. A two-level
// reduction tree sums the four terms and a final adder combines them with the
// output value read from the output buffer.
//
// Interface: x_load captures x_in[0..3] (stationary until the next x_load).
// When w_valid is high, acc_in and w_df are consumed and acc_out/out_valid
// appear one clock later (one result per clock).
// Own choices: the index encoding (see eltf_pkg), sign extension to 9 bits
// so that -(-128) is exact, and an ACC_W-bit output value. The paper's figure
// labels the output "INT8"; a sum over thousands of INT8 products needs more,
// so the accumulator is wider.
module eltf_pe
  import eltf_pkg::*;
#(
  parameter int unsigned ACC_W = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     x_load,
  input  q8_t                      x_in [W_PER_DF],
  input  logic                     w_valid,
  input  wdf_t                     w_df,
  input  logic signed [ACC_W-1:0]  acc_in,
  output logic                     out_valid,
  output logic signed [ACC_W-1:0]  acc_out
);
  q8_t x_q [W_PER_DF];
  logic signed [8:0]  term [W_PER_DF];
  logic signed [10:0] tree_sum;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int n = 0; n < W_PER_DF; n++) x_q[n] <= '0;
    end else if (x_load) begin
      x_q <= x_in;
    end
  end

  // Mask-based "multiplication".
  always_comb begin
    for (int n = 0; n < W_PER_DF; n++) begin
      tmask_t m;
      logic signed [8:0] xe;
      m  = tern_mask(w_df[2*n +: 2]);
      xe = 9'(x_q[n]);
      term[n] = ((xe ^ {9{m.flip}}) & {9{m.pass}}) + 9'(m.cpl);
    end
    // Reduction tree: two pair adders, then one adder.
    tree_sum = (11'(term[0]) + 11'(term[1])) + (11'(term[2]) + 11'(term[3]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      acc_out   <= '0;
    end else begin
      out_valid <= w_valid;
      if (w_valid) acc_out <= acc_in + ACC_W'(tree_sum);
    end
  end
endmodule
