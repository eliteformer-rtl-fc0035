// tb_sw_attn: runs positions 0..6 through the sliding-window attention with
// a window of W=4 (so the oldest pair is dropped from position 4 on),
// D=8, two query heads. A reference keeps the last W key/value pairs and
// computes num/den with real exp(q.k/sqrt(D)); results must agree within
// 1.5 %. It also checks the clock count 2*D + n*(2*D+2) + a few.
module tb_sw_attn;
  import eltf_pkg::*;
  localparam int D = 8, W = 4, NQ = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done, mem_re, mem_we;
  logic [31:0] ctx_base, pos, mem_raddr, mem_waddr;
  logic [63:0] mem_rdata, mem_wdata;
  act_t q [NQ][D], k [D], v [D];
  logic signed [63:0] num [NQ][D], den [NQ];

  sw_attn #(.D(D), .W(W), .NQ(NQ)) dut (.*);
  st_mem_model mem (.clk, .re(mem_re), .raddr(mem_raddr), .rdata(mem_rdata), .we(mem_we),
                    .waddr(mem_waddr), .wdata(mem_wdata));

  real hk [$][D];
  real hv [$][D];
  int  dropped = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real absr(input real a); return a < 0 ? -a : a; endfunction

  initial begin
    ctx_base = 32'h800; start = 0; pos = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 7; t++) begin
      real kr [D], vr [D];
      real rn [NQ][D];
      real rd [NQ];
      real mx, s, e;
      int cyc, n;
      for (int i = 0; i < D; i++) begin
        k[i] = act_t'($signed($urandom_range(512)) - 256);
        v[i] = act_t'($signed($urandom_range(512)) - 256);
        for (int h = 0; h < NQ; h++) q[h][i] = act_t'($signed($urandom_range(512)) - 256);
        kr[i] = real'(k[i]) / 256.0; vr[i] = real'(v[i]) / 256.0;
      end
      hk.push_back(kr); hv.push_back(vr);
      if (hk.size() > W) begin void'(hk.pop_front()); void'(hv.pop_front()); dropped++; end
      n = hk.size();
      mx = 0;
      for (int h = 0; h < NQ; h++) begin
        rd[h] = 0;
        for (int j = 0; j < D; j++) rn[h][j] = 0;
        for (int p = 0; p < n; p++) begin
          s = 0;
          for (int i = 0; i < D; i++) s += real'(q[h][i]) / 256.0 * hk[p][i];
          e = $exp(s / $sqrt(real'(D)));
          rd[h] += e;
          for (int j = 0; j < D; j++) rn[h][j] += e * hv[p][j];
        end
        for (int j = 0; j < D; j++) if (absr(rn[h][j]) > mx) mx = absr(rn[h][j]);
      end
      @(negedge clk); pos = t; start = 1;
      @(negedge clk); start = 0; cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc < 2 * D + n * (2 * D + 2) || cyc > 2 * D + n * (2 * D + 2) + 6) begin
        failures++; $display("t=%0d cycles %0d", t, cyc);
      end
      for (int h = 0; h < NQ; h++) begin
        checks++;
        if (absr(real'(den[h]) / 65536.0 - rd[h]) > 0.015 * rd[h]) begin
          failures++; $display("t=%0d den[%0d] %f ref %f", t, h, real'(den[h]) / 65536.0, rd[h]);
        end
        for (int j = 0; j < D; j++) begin
          checks++;
          if (absr(real'(num[h][j]) / 65536.0 - rn[h][j]) > 0.015 * mx + 0.001) begin
            failures++;
            if (failures < 10) $display("t=%0d num[%0d][%0d] %f ref %f", t, h, j, real'(num[h][j]) / 65536.0, rn[h][j]);
          end
        end
      end
    end
    checks++;
    if (dropped == 0) begin failures++; $display("window never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
