// tb_hedgehog_la: three consecutive tokens through the linear attention
// (D=8, F=8, two query heads) with its state in a memory model. A real-valued
// reference keeps its own S and z and computes phi = exp(x Wf), the state
// update and num/den; results must agree within 1.5 % of the largest value.
// It also checks that S and z in memory match the reference state and that
// a token takes 2*F*D + F + a few clocks.
module tb_hedgehog_la;
  import eltf_pkg::*;
  localparam int D = 8, F = 8, NQ = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done, mem_re, mem_we;
  logic [31:0] ctx_base, fmap_base, mem_raddr, mem_waddr;
  logic [63:0] mem_rdata, mem_wdata;
  act_t q [NQ][D], k [D], v [D];
  logic signed [63:0] num [NQ][D], den [NQ];

  hedgehog_la #(.D(D), .F(F), .NQ(NQ)) dut (.*);
  st_mem_model mem (.clk, .re(mem_re), .raddr(mem_raddr), .rdata(mem_rdata), .we(mem_we),
                    .waddr(mem_waddr), .wdata(mem_wdata));

  real wf [D][F];
  real S [F][D];
  real z [F];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real absr(input real a); return a < 0 ? -a : a; endfunction

  initial begin
    ctx_base = 32'h100; fmap_base = 32'h4000; start = 0;
    for (int i = 0; i < D; i++) for (int j = 0; j < F; j++) begin
      int w;
      w = $signed($urandom_range(160)) - 80;
      wf[i][j] = real'(w) / 256.0;
      mem.mem[longint'(fmap_base) + j * D + i] = 64'(signed'(16'(w)));
    end
    for (int i = 0; i < F; i++) begin
      z[i] = 0;
      for (int j = 0; j < D; j++) S[i][j] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3; t++) begin
      real pq [NQ][F];
      real pk [F];
      real rn [NQ][D];
      real rd [NQ];
      real mx, a;
      int cyc;
      for (int i = 0; i < D; i++) begin
        k[i] = act_t'($signed($urandom_range(512)) - 256);
        v[i] = act_t'($signed($urandom_range(512)) - 256);
        for (int h = 0; h < NQ; h++) q[h][i] = act_t'($signed($urandom_range(512)) - 256);
      end
      for (int j = 0; j < F; j++) begin
        a = 0; for (int i = 0; i < D; i++) a += real'(k[i]) / 256.0 * wf[i][j];
        pk[j] = $exp(a);
        for (int h = 0; h < NQ; h++) begin
          a = 0; for (int i = 0; i < D; i++) a += real'(q[h][i]) / 256.0 * wf[i][j];
          pq[h][j] = $exp(a);
        end
      end
      for (int i = 0; i < F; i++) begin
        z[i] += pk[i];
        for (int j = 0; j < D; j++) S[i][j] += pk[i] * real'(v[j]) / 256.0;
      end
      mx = 0;
      for (int h = 0; h < NQ; h++) begin
        rd[h] = 0;
        for (int i = 0; i < F; i++) rd[h] += pq[h][i] * z[i];
        for (int j = 0; j < D; j++) begin
          rn[h][j] = 0;
          for (int i = 0; i < F; i++) rn[h][j] += pq[h][i] * S[i][j];
          if (absr(rn[h][j]) > mx) mx = absr(rn[h][j]);
        end
      end
      @(negedge clk); start = 1;
      @(negedge clk); start = 0; cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc < 2 * F * D + F || cyc > 2 * F * D + F + 8) begin failures++; $display("cycles %0d", cyc); end
      for (int h = 0; h < NQ; h++) begin
        checks++;
        if (absr(real'(den[h]) / 65536.0 - rd[h]) > 0.015 * rd[h]) begin
          failures++; $display("t=%0d den[%0d] %f ref %f", t, h, real'(den[h]) / 65536.0, rd[h]);
        end
        for (int j = 0; j < D; j++) begin
          checks++;
          if (absr(real'(num[h][j]) / 65536.0 - rn[h][j]) > 0.015 * mx) begin
            failures++;
            if (failures < 10) $display("t=%0d num[%0d][%0d] %f ref %f", t, h, j, real'(num[h][j]) / 65536.0, rn[h][j]);
          end
        end
      end
      for (int i = 0; i < F; i++) begin
        checks++;
        if (absr(real'(signed'(mem.mem[longint'(ctx_base) + F * D + i])) / 65536.0 - z[i]) > 0.015 * z[i] + 0.001) begin
          failures++; $display("z[%0d] in memory wrong", i);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
