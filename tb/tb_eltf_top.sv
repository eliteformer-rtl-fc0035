// tb_eltf_top: end-to-end test of the accelerator at reduced size (MB=2,
// NB=2, two layers, D_MODEL=32, four query heads on two key/value heads of
// dimension 8, window 2, D_FFN=64). Three generative steps are run; before
// each, new token embeddings are written into the residual stream, and
// after it the stream is read back and compared with a real-valued model of
// the whole layer stack (BitLinear with RMSNorm and absmax INT8
// quantisation, hybrid linear + sliding-window attention with its own
// state, SwiGLU, residual adds). Tolerance: 4 LSB + 4 % of the largest value.
// Mechanisms counted and required: stages of different batches running at
// once, a second layer after the layer barrier, the window dropping its
// oldest pair, the linear state carried across steps (read non-zero), and
// AXI bursts on all four projection ports.
module tb_eltf_top;
  import eltf_pkg::*;
  localparam int MB = 2, NB = 2, NL = 2, DM = 32, HQ = 4, HKV = 2, DH = 8, F = 8, W = 2, DF = 64;
  localparam int NQ = HQ / HKV, DKV = HKV * DH, DQKV = DM + 2 * DKV;
  localparam int CTX = F * DH + F + 2 * W * DH;
  localparam int FMB = NL * NB * MB * HKV * CTX;
  localparam int NSTEP = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done, x_we, st_re, st_we;
  logic [1:0] n_layers;
  logic [31:0] pos, st_raddr, st_waddr;
  logic [39:0] proj_base [4];
  logic [39:0] layer_stride;
  logic [1:0] x_batch, x_rd_batch;
  logic [0:0] x_row, x_rd_row;
  logic [4:0] x_idx, x_rd_idx;
  act_t x_data, x_rd_data;
  logic [39:0] m_araddr [4]; logic [7:0] m_arlen [4]; logic [2:0] m_arsize [4]; logic [1:0] m_arburst [4];
  logic m_arvalid [4], m_arready [4], m_rlast [4], m_rvalid [4], m_rready [4];
  logic [511:0] m_rdata [4]; logic [1:0] m_rresp [4];
  logic [63:0] st_rdata, st_wdata;

  eltf_top #(.MB(MB), .NB(NB), .NL(NL), .D_MODEL(DM), .HQ(HQ), .HKV(HKV), .DH(DH), .F(F),
             .W(W), .D_FFN(DF), .NCOL(4)) dut (.*);

  axi_mem_model mm0 (.clk, .rst_n, .araddr(m_araddr[0]), .arlen(m_arlen[0]), .arsize(m_arsize[0]),
    .arburst(m_arburst[0]), .arvalid(m_arvalid[0]), .arready(m_arready[0]), .rdata(m_rdata[0]),
    .rresp(m_rresp[0]), .rlast(m_rlast[0]), .rvalid(m_rvalid[0]), .rready(m_rready[0]));
  axi_mem_model mm1 (.clk, .rst_n, .araddr(m_araddr[1]), .arlen(m_arlen[1]), .arsize(m_arsize[1]),
    .arburst(m_arburst[1]), .arvalid(m_arvalid[1]), .arready(m_arready[1]), .rdata(m_rdata[1]),
    .rresp(m_rresp[1]), .rlast(m_rlast[1]), .rvalid(m_rvalid[1]), .rready(m_rready[1]));
  axi_mem_model mm2 (.clk, .rst_n, .araddr(m_araddr[2]), .arlen(m_arlen[2]), .arsize(m_arsize[2]),
    .arburst(m_arburst[2]), .arvalid(m_arvalid[2]), .arready(m_arready[2]), .rdata(m_rdata[2]),
    .rresp(m_rresp[2]), .rlast(m_rlast[2]), .rvalid(m_rvalid[2]), .rready(m_rready[2]));
  axi_mem_model mm3 (.clk, .rst_n, .araddr(m_araddr[3]), .arlen(m_arlen[3]), .arsize(m_arsize[3]),
    .arburst(m_arburst[3]), .arvalid(m_arvalid[3]), .arready(m_arready[3]), .rdata(m_rdata[3]),
    .rresp(m_rresp[3]), .rlast(m_rlast[3]), .rvalid(m_rvalid[3]), .rready(m_rready[3]));
  st_mem_model stm (.clk, .re(st_re), .raddr(st_raddr), .rdata(st_rdata), .we(st_we),
                    .waddr(st_waddr), .wdata(st_wdata));

  // ---------------- reference parameters and state
  real gam [NL][4][DF];
  logic [1:0] wt [NL][4][2*DF][DF];
  real sw [NL][4];
  real wf [NL][HKV][DH][F];
  real S [NL][NB][MB][HKV][F][DH];
  real z [NL][NB][MB][HKV][F];
  real hk [NL][NB][MB][HKV][$][DH];
  real hv [NL][NB][MB][HKV][$][DH];
  real X [NB][MB][DM];
  int  overlap = 0, drops = 0, state_reads = 0, layer2 = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int din(input int s);  return (s == 3) ? DF : DM; endfunction
  function automatic int dout(input int s); return (s == 0) ? DQKV : (s == 2) ? 2 * DF : DM; endfunction
  function automatic int tern(input logic [1:0] c); return (c == 2'b01) ? 1 : (c == 2'b11) ? -1 : 0; endfunction
  function automatic real absr(input real a); return a < 0 ? -a : a; endfunction
  function automatic real q88(input real a);
    real f;
    f = $floor(a * 256.0);
    if (f > 32767) f = 32767;
    if (f < -32768) f = -32768;
    return f / 256.0;
  endfunction

  task automatic fill_proj(input int l, input int s);
    longint unsigned f0;
    logic [511:0] fr;
    int ni, no, sw_i;
    ni = din(s); no = dout(s);
    f0 = (longint'(s) * 40'h10000 + longint'(l) * 40'h4000) >> 6;
    sw_i = $urandom_range(9000, 16000);
    sw[l][s] = real'(sw_i) / 65536.0;
    fr = '0; fr[31:0] = 32'(sw_i);
    case (s) 0: mm0.frames[f0] = fr; 1: mm1.frames[f0] = fr; 2: mm2.frames[f0] = fr; default: mm3.frames[f0] = fr; endcase
    for (int k = 0; k < ni; k++) begin
      int g;
      g = $urandom_range(200, 320);
      gam[l][s][k] = real'(g) / 256.0;
      fr[16*(k%32) +: 16] = 16'(g);
      if (k % 32 == 31)
        case (s) 0: mm0.frames[f0+1+k/32] = fr; 1: mm1.frames[f0+1+k/32] = fr; 2: mm2.frames[f0+1+k/32] = fr; default: mm3.frames[f0+1+k/32] = fr; endcase
    end
    for (int j = 0; j < no; j++) for (int k = 0; k < ni; k++) wt[l][s][j][k] = 2'($urandom);
    for (int fi = 0; fi < (ni / 4) * no / 64; fi++) begin
      for (int e = 0; e < 64; e++) begin
        int n;
        n = fi * 64 + e;
        for (int m = 0; m < 4; m++) fr[8*e + 2*m +: 2] = wt[l][s][n % no][4*(n / no) + m];
      end
      case (s) 0: mm0.frames[f0+1+ni/32+fi] = fr; 1: mm1.frames[f0+1+ni/32+fi] = fr; 2: mm2.frames[f0+1+ni/32+fi] = fr; default: mm3.frames[f0+1+ni/32+fi] = fr; endcase
    end
  endtask

  task automatic bl_ref(input int l, input int s, input real x [], output real y []);
    real amax, ss, acc, xg, xq;
    int ni, no;
    ni = din(s); no = dout(s);
    y = new[no];
    amax = 0; ss = 0;
    for (int k = 0; k < ni; k++) begin
      xg = x[k] * gam[l][s][k];
      if (absr(xg) > amax) amax = absr(xg);
      ss += x[k] * x[k];
    end
    for (int j = 0; j < no; j++) begin
      acc = 0;
      for (int k = 0; k < ni; k++) begin
        xq = $floor(127.0 * x[k] * gam[l][s][k] / amax + 0.5);
        acc += tern(wt[l][s][j][k]) * xq;
      end
      y[j] = q88(acc * amax / (127.0 * $sqrt(ss / ni)) * sw[l][s]);
    end
  endtask

  task automatic layer_ref(input int l, input int b, input int p);
    real x [], y [], o [], hin [], u [];
    real qv [DQKV];
    for (int r = 0; r < MB; r++) begin
      x = new[DM];
      for (int i = 0; i < DM; i++) x[i] = X[b][r][i];
      bl_ref(l, 0, x, y);
      for (int i = 0; i < DQKV; i++) qv[i] = y[i];
      o = new[DM];
      for (int g = 0; g < HKV; g++) begin
        real kr [DH], vr [DH], pk [F], pq [F], rn [DH];
        real a, rd, sc, e;
        for (int i = 0; i < DH; i++) begin
          kr[i] = qv[DM + g*DH + i]; vr[i] = qv[DM + DKV + g*DH + i];
        end
        hk[l][b][r][g].push_back(kr); hv[l][b][r][g].push_back(vr);
        if (hk[l][b][r][g].size() > W) begin
          void'(hk[l][b][r][g].pop_front()); void'(hv[l][b][r][g].pop_front()); drops++;
        end
        for (int j = 0; j < F; j++) begin
          a = 0; for (int i = 0; i < DH; i++) a += kr[i] * wf[l][g][i][j];
          pk[j] = $exp(a);
        end
        for (int i = 0; i < F; i++) begin
          z[l][b][r][g][i] += pk[i];
          for (int j = 0; j < DH; j++) S[l][b][r][g][i][j] += pk[i] * vr[j];
        end
        for (int h = 0; h < NQ; h++) begin
          for (int j = 0; j < F; j++) begin
            a = 0; for (int i = 0; i < DH; i++) a += qv[(g*NQ + h)*DH + i] * wf[l][g][i][j];
            pq[j] = $exp(a);
          end
          rd = 0;
          for (int j = 0; j < DH; j++) rn[j] = 0;
          for (int i = 0; i < F; i++) begin
            rd += pq[i] * z[l][b][r][g][i];
            for (int j = 0; j < DH; j++) rn[j] += pq[i] * S[l][b][r][g][i][j];
          end
          for (int pp = 0; pp < hk[l][b][r][g].size(); pp++) begin
            sc = 0;
            for (int i = 0; i < DH; i++) sc += qv[(g*NQ + h)*DH + i] * hk[l][b][r][g][pp][i];
            e = $exp(sc / $sqrt(real'(DH)));
            rd += e;
            for (int j = 0; j < DH; j++) rn[j] += e * hv[l][b][r][g][pp][j];
          end
          for (int j = 0; j < DH; j++) o[(g*NQ + h)*DH + j] = q88(rn[j] / rd);
        end
      end
      bl_ref(l, 1, o, y);
      for (int i = 0; i < DM; i++) X[b][r][i] = q88(X[b][r][i] + y[i]);
      for (int i = 0; i < DM; i++) x[i] = X[b][r][i];
      bl_ref(l, 2, x, hin);
      u = new[DF];
      for (int i = 0; i < DF; i++) u[i] = q88(hin[DF + i] / (1.0 + $exp(-hin[DF + i])) * hin[i]);
      bl_ref(l, 3, u, y);
      for (int i = 0; i < DM; i++) X[b][r][i] = q88(X[b][r][i] + y[i]);
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    int na;
    na = 0;
    for (int s = 0; s < 4; s++) na += dut.u_sched.active[s];
    if (na > 1) overlap++;
    if (dut.u_sched.st_start[0] && dut.layer == 1) layer2++;
    if (st_re && st_raddr < FMB) state_reads++;
  end

  initial begin
    real mx, maxerr;
    int nb0;
    maxerr = 0;
    start = 0; x_we = 0; n_layers = 2'd2; pos = 0; layer_stride = 40'h4000;
    x_batch = 0; x_row = 0; x_idx = 0; x_data = 0; x_rd_batch = 0; x_rd_row = 0; x_rd_idx = 0;
    for (int s = 0; s < 4; s++) proj_base[s] = 40'(s) * 40'h10000;
    for (int l = 0; l < NL; l++) begin
      for (int s = 0; s < 4; s++) fill_proj(l, s);
      for (int g = 0; g < HKV; g++) for (int i = 0; i < DH; i++) for (int j = 0; j < F; j++) begin
        int w;
        w = $signed($urandom_range(60)) - 30;
        wf[l][g][i][j] = real'(w) / 256.0;
        stm.mem[longint'(FMB) + (l*HKV + g)*DH*F + j*DH + i] = 64'(signed'(16'(w)));
      end
      for (int b = 0; b < NB; b++) for (int r = 0; r < MB; r++) for (int g = 0; g < HKV; g++)
        for (int i = 0; i < F; i++) begin
          z[l][b][r][g][i] = 0;
          for (int j = 0; j < DH; j++) S[l][b][r][g][i][j] = 0;
        end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int p = 0; p < NSTEP; p++) begin
      int cyc;
      for (int b = 0; b < NB; b++) for (int r = 0; r < MB; r++) for (int i = 0; i < DM; i++) begin
        int xi;
        xi = $signed($urandom_range(1024)) - 512;
        X[b][r][i] = real'(xi) / 256.0;
        @(negedge clk); x_we = 1; x_batch = 2'(b); x_row = r[0]; x_idx = 5'(i); x_data = act_t'(xi);
      end
      @(negedge clk); x_we = 0; pos = p; start = 1;
      @(negedge clk); start = 0; cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      $display("step %0d: %0d clocks", p, cyc);
      for (int l = 0; l < NL; l++) for (int b = 0; b < NB; b++) layer_ref(l, b, p);
      mx = 0;
      for (int b = 0; b < NB; b++) for (int r = 0; r < MB; r++) for (int i = 0; i < DM; i++)
        if (absr(X[b][r][i]) > mx) mx = absr(X[b][r][i]);
      for (int b = 0; b < NB; b++) for (int r = 0; r < MB; r++) for (int i = 0; i < DM; i++) begin
        x_rd_batch = 2'(b); x_rd_row = r[0]; x_rd_idx = 5'(i);
        @(negedge clk);
        checks++;
        if (absr(real'(x_rd_data) / 256.0 - X[b][r][i]) > maxerr) maxerr = absr(real'(x_rd_data) / 256.0 - X[b][r][i]);
        if (absr(real'(x_rd_data) / 256.0 - X[b][r][i]) > 4.0 / 256.0 + 0.04 * mx) begin
          failures++;
          if (failures < 12) $display("step %0d b=%0d r=%0d i=%0d got %f ref %f", p, b, r, i,
                                      real'(x_rd_data) / 256.0, X[b][r][i]);
        end
      end
    end
    $display("largest deviation from the real-valued model: %0.1f LSB", maxerr * 256.0);
    checks += 5;
    $display("overlap=%0d layer2=%0d drops=%0d state_reads=%0d bursts=%0d/%0d/%0d/%0d", overlap, layer2,
             drops, state_reads, mm0.bursts, mm1.bursts, mm2.bursts, mm3.bursts);
    if (overlap == 0) begin failures++; $display("no stage overlap"); end
    if (layer2 == 0) begin failures++; $display("second layer never ran"); end
    if (drops == 0) begin failures++; $display("window never dropped a pair"); end
    if (state_reads == 0) begin failures++; $display("state never read"); end
    nb0 = mm0.bursts * mm1.bursts * mm2.bursts * mm3.bursts;
    if (nb0 == 0) begin failures++; $display("a projection port stayed idle"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
