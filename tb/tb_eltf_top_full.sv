// tb_eltf_top_full: one generative step through one decoder layer of the
// accelerator at its full default size (MB=2 tokens per batch, NB=2
// batches, D_MODEL=4096, 32 query heads on 8 key/value heads of 128, window
// 256, D_FFN=14336). The weight memories generate their frames from a hash
// of the frame index (GEN=1), so only the scale and RMSNorm-gain frames are
// written; the reference model decodes the same frames. The step is the
// first of a sequence (pos=0), where hybrid attention returns each head's
// own value vector whatever the feature map, so the reference follows it
// exactly; the projections, RMSNorm/absmax quantisation, SwiGLU and the
// residual adds are modelled in real arithmetic. Every element of the
// resulting residual stream (4 x 4096) is compared with a tolerance of
// 6 LSB + 4 % of the largest value. Stage overlap between the two batches
// and bursts on all four weight ports are counted and required.
module tb_eltf_top_full;
  import eltf_pkg::*;
  localparam int MB = 2, NB = 2, DM = 4096, HQ = 32, HKV = 8, DH = 128, DF = 14336;
  localparam int NQ = HQ / HKV, DKV = HKV * DH, DQKV = DM + 2 * DKV;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done, x_we, st_re, st_we;
  logic [5:0] n_layers;
  logic [31:0] pos, st_raddr, st_waddr;
  logic [39:0] proj_base [4];
  logic [39:0] layer_stride;
  logic [1:0] x_batch, x_rd_batch;
  logic [0:0] x_row, x_rd_row;
  logic [11:0] x_idx, x_rd_idx;
  act_t x_data, x_rd_data;
  logic [39:0] m_araddr [4]; logic [7:0] m_arlen [4]; logic [2:0] m_arsize [4]; logic [1:0] m_arburst [4];
  logic m_arvalid [4], m_arready [4], m_rlast [4], m_rvalid [4], m_rready [4];
  logic [511:0] m_rdata [4]; logic [1:0] m_rresp [4];
  logic [63:0] st_rdata, st_wdata;

  eltf_top dut (.*);

  axi_mem_model #(.GEN(1'b1)) mm0 (.clk, .rst_n, .araddr(m_araddr[0]), .arlen(m_arlen[0]), .arsize(m_arsize[0]),
    .arburst(m_arburst[0]), .arvalid(m_arvalid[0]), .arready(m_arready[0]), .rdata(m_rdata[0]),
    .rresp(m_rresp[0]), .rlast(m_rlast[0]), .rvalid(m_rvalid[0]), .rready(m_rready[0]));
  axi_mem_model #(.GEN(1'b1)) mm1 (.clk, .rst_n, .araddr(m_araddr[1]), .arlen(m_arlen[1]), .arsize(m_arsize[1]),
    .arburst(m_arburst[1]), .arvalid(m_arvalid[1]), .arready(m_arready[1]), .rdata(m_rdata[1]),
    .rresp(m_rresp[1]), .rlast(m_rlast[1]), .rvalid(m_rvalid[1]), .rready(m_rready[1]));
  axi_mem_model #(.GEN(1'b1)) mm2 (.clk, .rst_n, .araddr(m_araddr[2]), .arlen(m_arlen[2]), .arsize(m_arsize[2]),
    .arburst(m_arburst[2]), .arvalid(m_arvalid[2]), .arready(m_arready[2]), .rdata(m_rdata[2]),
    .rresp(m_rresp[2]), .rlast(m_rlast[2]), .rvalid(m_rvalid[2]), .rready(m_rready[2]));
  axi_mem_model #(.GEN(1'b1)) mm3 (.clk, .rst_n, .araddr(m_araddr[3]), .arlen(m_arlen[3]), .arsize(m_arsize[3]),
    .arburst(m_arburst[3]), .arvalid(m_arvalid[3]), .arready(m_arready[3]), .rdata(m_rdata[3]),
    .rresp(m_rresp[3]), .rlast(m_rlast[3]), .rvalid(m_rvalid[3]), .rready(m_rready[3]));
  st_mem_model stm (.clk, .re(st_re), .raddr(st_raddr), .rdata(st_rdata), .we(st_we),
                    .waddr(st_waddr), .wdata(st_wdata));

  real gam [4][DF];
  real sw [4];
  real X [NB][MB][DM];
  int  overlap = 0;

  initial begin
    repeat (60000000) @(posedge clk);
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
  function automatic longint unsigned f0(input int s); return longint'(s) << 24; endfunction

  task automatic fill_params(input int s);
    logic [511:0] fr;
    int sw_i, ni;
    ni = din(s);
    sw_i = (s == 3) ? $urandom_range(700, 900) : $urandom_range(1100, 1500);
    sw[s] = real'(sw_i) / 65536.0;
    fr = '0; fr[31:0] = 32'(sw_i);
    case (s) 0: mm0.frames[f0(s)] = fr; 1: mm1.frames[f0(s)] = fr; 2: mm2.frames[f0(s)] = fr; default: mm3.frames[f0(s)] = fr; endcase
    for (int k = 0; k < ni; k++) begin
      int g;
      g = $urandom_range(200, 320);
      gam[s][k] = real'(g) / 256.0;
      fr[16*(k%32) +: 16] = 16'(g);
      if (k % 32 == 31)
        case (s) 0: mm0.frames[f0(s)+1+k/32] = fr; 1: mm1.frames[f0(s)+1+k/32] = fr; 2: mm2.frames[f0(s)+1+k/32] = fr; default: mm3.frames[f0(s)+1+k/32] = fr; endcase
    end
  endtask

  // BitLinear of all NB*MB rows at once, walking the weight frames in memory order
  task automatic bl_ref(input int s, input real x [NB*MB][], output real y [NB*MB][]);
    real amax [NB*MB], rn [NB*MB];
    real acc [NB*MB][];
    int xq [NB*MB][];
    int ni, no;
    logic [511:0] fr;
    ni = din(s); no = dout(s);
    for (int t = 0; t < NB*MB; t++) begin
      real ss;
      amax[t] = 0; ss = 0;
      for (int k = 0; k < ni; k++) begin
        if (absr(x[t][k] * gam[s][k]) > amax[t]) amax[t] = absr(x[t][k] * gam[s][k]);
        ss += x[t][k] * x[t][k];
      end
      rn[t] = $sqrt(ss / ni);
      xq[t] = new[ni];
      for (int k = 0; k < ni; k++) xq[t][k] = int'($floor(127.0 * x[t][k] * gam[s][k] / amax[t] + 0.5));
      acc[t] = new[no];
      for (int j = 0; j < no; j++) acc[t][j] = 0;
    end
    for (int fi = 0; fi < (ni / 4) * no / 64; fi++) begin
      fr = mm0.gen_frame(f0(s) + 1 + ni / 32 + fi);
      for (int e = 0; e < 64; e++) begin
        int n, j, g;
        n = fi * 64 + e; j = n % no; g = n / no;
        for (int m = 0; m < 4; m++) begin
          int w;
          w = tern(fr[8*e + 2*m +: 2]);
          if (w != 0) for (int t = 0; t < NB*MB; t++) acc[t][j] += w * xq[t][4*g + m];
        end
      end
    end
    for (int t = 0; t < NB*MB; t++) begin
      y[t] = new[no];
      for (int j = 0; j < no; j++) y[t][j] = q88(acc[t][j] * amax[t] / (127.0 * rn[t]) * sw[s]);
    end
  endtask

  task automatic layer_ref();
    real x [NB*MB][], y [NB*MB][], o [NB*MB][], u [NB*MB][];
    for (int t = 0; t < NB*MB; t++) begin
      x[t] = new[DM];
      for (int i = 0; i < DM; i++) x[t][i] = X[t / MB][t % MB][i];
    end
    bl_ref(0, x, y);
    for (int t = 0; t < NB*MB; t++) begin
      o[t] = new[DM];
      for (int g = 0; g < HKV; g++) for (int h = 0; h < NQ; h++) for (int j = 0; j < DH; j++)
        o[t][(g*NQ + h)*DH + j] = y[t][DM + DKV + g*DH + j];
    end
    bl_ref(1, o, y);
    for (int t = 0; t < NB*MB; t++) for (int i = 0; i < DM; i++) begin
      X[t / MB][t % MB][i] = q88(X[t / MB][t % MB][i] + y[t][i]);
      x[t][i] = X[t / MB][t % MB][i];
    end
    bl_ref(2, x, y);
    for (int t = 0; t < NB*MB; t++) begin
      u[t] = new[DF];
      for (int i = 0; i < DF; i++) u[t][i] = q88(y[t][DF + i] / (1.0 + $exp(-y[t][DF + i])) * y[t][i]);
    end
    bl_ref(3, u, y);
    for (int t = 0; t < NB*MB; t++) for (int i = 0; i < DM; i++)
      X[t / MB][t % MB][i] = q88(X[t / MB][t % MB][i] + y[t][i]);
  endtask

  always @(posedge clk) if (rst_n) begin
    int na;
    na = 0;
    for (int s = 0; s < 4; s++) na += dut.u_sched.active[s];
    if (na > 1) overlap++;
  end

  initial begin
    real mx, maxerr;
    int cyc;
    start = 0; x_we = 0; n_layers = 6'd1; pos = 0; layer_stride = 40'h1_0000_0000;
    x_batch = 0; x_row = 0; x_idx = 0; x_data = 0; x_rd_batch = 0; x_rd_row = 0; x_rd_idx = 0;
    for (int s = 0; s < 4; s++) begin
      proj_base[s] = 40'(f0(s)) << 6;
      fill_params(s);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < NB; b++) for (int r = 0; r < MB; r++) for (int i = 0; i < DM; i++) begin
      int xi;
      xi = $signed($urandom_range(1024)) - 512;
      X[b][r][i] = real'(xi) / 256.0;
      @(negedge clk); x_we = 1; x_batch = 2'(b); x_row = r[0]; x_idx = 12'(i); x_data = act_t'(xi);
    end
    @(negedge clk); x_we = 0; start = 1;
    @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    $display("one layer, two batches: %0d clocks", cyc);
    layer_ref();
    mx = 0; maxerr = 0;
    for (int b = 0; b < NB; b++) for (int r = 0; r < MB; r++) for (int i = 0; i < DM; i++)
      if (absr(X[b][r][i]) > mx) mx = absr(X[b][r][i]);
    for (int b = 0; b < NB; b++) for (int r = 0; r < MB; r++) for (int i = 0; i < DM; i++) begin
      real d;
      x_rd_batch = 2'(b); x_rd_row = r[0]; x_rd_idx = 12'(i);
      @(negedge clk);
      checks++;
      d = absr(real'(x_rd_data) / 256.0 - X[b][r][i]);
      if (d > maxerr) maxerr = d;
      if (d > 6.0 / 256.0 + 0.04 * mx) begin
        failures++;
        if (failures < 12) $display("b=%0d r=%0d i=%0d got %f ref %f", b, r, i, real'(x_rd_data) / 256.0, X[b][r][i]);
      end
    end
    $display("largest |X| %0.2f, largest deviation %0.1f LSB", mx, maxerr * 256.0);
    $display("overlap=%0d bursts=%0d/%0d/%0d/%0d", overlap, mm0.bursts, mm1.bursts, mm2.bursts, mm3.bursts);
    checks += 2;
    if (overlap == 0) begin failures++; $display("no stage overlap"); end
    if (mm0.bursts * mm1.bursts * mm2.bursts * mm3.bursts == 0) begin failures++; $display("a weight port stayed idle"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
