// tb_bitlinear: one BitLinear projection end to end (MB=2, D_IN=64,
// D_OUT=16) against an AXI memory model holding the weight scale, the
// RMSNorm scaling weights and random ternary weights. Each output is checked
// against a real-valued reference y = s_w * W * round(127*xg/max|xg|) *
// max|xg|/(127*rms) with a tolerance of 2 LSB + 2 %. Runs twice, the second
// time at a different base address, to check re-use.
module tb_bitlinear;
  import eltf_pkg::*;
  localparam int MB = 2, D_IN = 64, D_OUT = 16, NCOL = 4;
  localparam int NGRP = D_IN / 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic x_we, start, busy, done, y_valid;
  logic [0:0] x_row, y_row;
  logic [5:0] x_idx;
  logic [3:0] y_idx;
  act_t x_data, y_data;
  logic [39:0] base;
  logic [39:0] m_araddr; logic [7:0] m_arlen; logic [2:0] m_arsize; logic [1:0] m_arburst;
  logic m_arvalid, m_arready, m_rlast, m_rvalid, m_rready;
  logic [511:0] m_rdata; logic [1:0] m_rresp;

  bitlinear #(.MB(MB), .D_IN(D_IN), .D_OUT(D_OUT), .NCOL(NCOL)) dut (.*);
  axi_mem_model mem (.clk, .rst_n, .araddr(m_araddr), .arlen(m_arlen), .arsize(m_arsize),
    .arburst(m_arburst), .arvalid(m_arvalid), .arready(m_arready), .rdata(m_rdata),
    .rresp(m_rresp), .rlast(m_rlast), .rvalid(m_rvalid), .rready(m_rready));

  act_t xs [MB][D_IN];
  act_t gs [D_IN];
  logic [1:0] wt [D_OUT][D_IN];
  logic [31:0] s_w;
  real yref [MB][D_OUT];
  int  ny;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int tern(input logic [1:0] c);
    return (c == 2'b01) ? 1 : (c == 2'b11) ? -1 : 0;
  endfunction

  task automatic setup(input logic [39:0] b);
    longint unsigned f0 = longint'(b) >> 6;
    logic [511:0] fr;
    s_w = 32'($urandom_range(30000, 90000));
    mem.frames[f0] = {480'd0, s_w};
    for (int i = 0; i < D_IN; i++) gs[i] = act_t'($urandom_range(160, 400));
    for (int f = 0; f < D_IN / 32; f++) begin
      for (int e = 0; e < 32; e++) fr[16*e +: 16] = gs[32*f + e];
      mem.frames[f0 + 1 + f] = fr;
    end
    for (int j = 0; j < D_OUT; j++) for (int k = 0; k < D_IN; k++) wt[j][k] = 2'($urandom);
    // dataframe index n = g*D_OUT + j, weights k = 4g..4g+3
    for (int n = 0; n < NGRP * D_OUT; n++) begin
      longint unsigned fa = f0 + 1 + D_IN / 32 + n / 64;
      logic [511:0] cur;
      cur = mem.frames.exists(fa) ? mem.frames[fa] : '0;
      for (int m = 0; m < 4; m++) cur[8*(n % 64) + 2*m +: 2] = wt[n % D_OUT][4*(n / D_OUT) + m];
      mem.frames[fa] = cur;
    end
    for (int r = 0; r < MB; r++) begin
      real xg [D_IN];
      real amax, ss, acc;
      amax = 0; ss = 0;
      for (int k = 0; k < D_IN; k++) begin
        xs[r][k] = act_t'($signed($urandom_range(4000)) - 2000);
        xg[k] = real'(xs[r][k]) * real'(gs[k]);
        if ((xg[k] < 0 ? -xg[k] : xg[k]) > amax) amax = (xg[k] < 0 ? -xg[k] : xg[k]);
        ss += (real'(xs[r][k]) / 256.0) ** 2;
      end
      for (int j = 0; j < D_OUT; j++) begin
        acc = 0;
        for (int k = 0; k < D_IN; k++) acc += tern(wt[j][k]) * $floor(127.0 * xg[k] / amax + 0.5);
        yref[r][j] = acc * (amax / 65536.0) / (127.0 * $sqrt(ss / D_IN)) * (real'(s_w) / 65536.0) * 256.0;
      end
    end
  endtask

  task automatic run(input logic [39:0] b);
    setup(b);
    for (int r = 0; r < MB; r++) for (int k = 0; k < D_IN; k++) begin
      @(negedge clk); x_we = 1; x_row = r[0]; x_idx = 6'(k); x_data = xs[r][k];
    end
    @(negedge clk); x_we = 0; base = b; start = 1;
    @(negedge clk); start = 0;
    ny = 0;
    while (!done) begin
      @(posedge clk); #1;
      if (y_valid) begin
        real d, tol;
        d = real'(y_data) - yref[y_row][y_idx];
        tol = 2.0 + 0.02 * (yref[y_row][y_idx] < 0 ? -yref[y_row][y_idx] : yref[y_row][y_idx]);
        checks++; ny++;
        if (d > tol || d < -tol) begin
          failures++;
          if (failures < 10) $display("r=%0d j=%0d y=%0d ref=%f", y_row, y_idx, y_data, yref[y_row][y_idx]);
        end
      end
    end
    checks++;
    if (ny != MB * D_OUT) begin failures++; $display("%0d outputs", ny); end
  endtask

  initial begin
    x_we = 0; start = 0; x_row = 0; x_idx = 0; x_data = 0; base = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(40'h1000);
    run(40'h23440);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
