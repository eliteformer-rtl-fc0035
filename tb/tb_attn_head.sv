// tb_attn_head: six tokens through the hybrid attention (D=8, F=8, W=4, two
// query heads), so the window wraps. A real-valued reference computes the
// linear part (exp feature map, running S and z) and the window part and
// combines them as (num_la + num_sw) / (den_la + den_sw); each Q8.8 output
// must agree within 2 LSB + 2 %.
module tb_attn_head;
  import eltf_pkg::*;
  localparam int D = 8, F = 8, W = 4, NQ = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done, mem_re, mem_we;
  logic [31:0] la_base, sw_base, fmap_base, pos, mem_raddr, mem_waddr;
  logic [63:0] mem_rdata, mem_wdata;
  act_t q [NQ][D], k [D], v [D], out [NQ][D];

  attn_head #(.D(D), .F(F), .W(W), .NQ(NQ)) dut (.*);
  st_mem_model mem (.clk, .re(mem_re), .raddr(mem_raddr), .rdata(mem_rdata), .we(mem_we),
                    .waddr(mem_waddr), .wdata(mem_wdata));

  real wf [D][F];
  real S [F][D];
  real z [F];
  real hk [$][D];
  real hv [$][D];

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real absr(input real a); return a < 0 ? -a : a; endfunction

  initial begin
    la_base = 32'h100; sw_base = 32'h300; fmap_base = 32'h4000; start = 0; pos = 0;
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
    for (int t = 0; t < 6; t++) begin
      real kr [D], vr [D], pk [F], pq [F];
      real rn [D];
      real rd, a, s, e, o;
      for (int i = 0; i < D; i++) begin
        k[i] = act_t'($signed($urandom_range(512)) - 256);
        v[i] = act_t'($signed($urandom_range(512)) - 256);
        for (int h = 0; h < NQ; h++) q[h][i] = act_t'($signed($urandom_range(512)) - 256);
        kr[i] = real'(k[i]) / 256.0; vr[i] = real'(v[i]) / 256.0;
      end
      hk.push_back(kr); hv.push_back(vr);
      if (hk.size() > W) begin void'(hk.pop_front()); void'(hv.pop_front()); end
      for (int j = 0; j < F; j++) begin
        a = 0; for (int i = 0; i < D; i++) a += kr[i] * wf[i][j];
        pk[j] = $exp(a);
      end
      for (int i = 0; i < F; i++) begin
        z[i] += pk[i];
        for (int j = 0; j < D; j++) S[i][j] += pk[i] * vr[j];
      end
      @(negedge clk); pos = t; start = 1;
      @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      for (int h = 0; h < NQ; h++) begin
        for (int j = 0; j < F; j++) begin
          a = 0; for (int i = 0; i < D; i++) a += real'(q[h][i]) / 256.0 * wf[i][j];
          pq[j] = $exp(a);
        end
        rd = 0;
        for (int j = 0; j < D; j++) rn[j] = 0;
        for (int i = 0; i < F; i++) begin
          rd += pq[i] * z[i];
          for (int j = 0; j < D; j++) rn[j] += pq[i] * S[i][j];
        end
        for (int p = 0; p < hk.size(); p++) begin
          s = 0;
          for (int i = 0; i < D; i++) s += real'(q[h][i]) / 256.0 * hk[p][i];
          e = $exp(s / $sqrt(real'(D)));
          rd += e;
          for (int j = 0; j < D; j++) rn[j] += e * hv[p][j];
        end
        for (int j = 0; j < D; j++) begin
          o = rn[j] / rd * 256.0;
          checks++;
          if (absr(real'(out[h][j]) - o) > 2.0 + 0.02 * absr(o)) begin
            failures++;
            if (failures < 10) $display("t=%0d out[%0d][%0d]=%0d ref %f", t, h, j, out[h][j], o);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
