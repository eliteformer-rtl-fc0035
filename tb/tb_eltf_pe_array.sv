// tb_eltf_pe_array: runs two random ternary projections through a small PE
// array (MB=2, NCOL=4, D_IN=32, D_OUT=16), first with weights always
// available, then with random gaps, and compares every output with a
// multiply-based reference. The first run also checks the cycle count
// D_IN/4 * (D_OUT/NCOL + 1) + 2 from start to done.
module tb_eltf_pe_array;
  import eltf_pkg::*;
  localparam int MB = 2, NCOL = 4, D_IN = 32, D_OUT = 16;
  localparam int NGRP = D_IN / 4, NJB = D_OUT / NCOL;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic x_we, start, busy, done, w_valid, w_ready;
  logic [0:0] x_row, o_rd_row;
  logic [2:0] x_grp;
  q8_t  x_data [4];
  wdf_t w_data [NCOL];
  logic [3:0] o_rd_idx;
  logic signed [31:0] o_rd_data;

  eltf_pe_array #(.MB(MB), .NCOL(NCOL), .D_IN(D_IN), .D_OUT(D_OUT)) dut (.*);

  q8_t  xs [MB][D_IN];
  wdf_t ws [NGRP][D_OUT];

  function automatic int tern(input logic [1:0] c);
    return (c == 2'b01) ? 1 : (c == 2'b11) ? -1 : 0;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int stall_pct);
    int g, jb, cyc, ref_v;
    for (int r = 0; r < MB; r++) for (int k = 0; k < D_IN; k++) xs[r][k] = q8_t'($urandom);
    for (int gg = 0; gg < NGRP; gg++) for (int j = 0; j < D_OUT; j++) ws[gg][j] = wdf_t'($urandom);
    for (int r = 0; r < MB; r++) for (int gg = 0; gg < NGRP; gg++) begin
      @(negedge clk);
      x_we = 1; x_row = r[0]; x_grp = gg[2:0];
      for (int n = 0; n < 4; n++) x_data[n] = xs[r][4*gg+n];
    end
    @(negedge clk); x_we = 0; start = 1;
    @(negedge clk); start = 0;
    g = 0; jb = 0; cyc = 1;
    while (!done) begin
      w_valid = (g < NGRP) && ($urandom_range(99) >= stall_pct);
      for (int c = 0; c < NCOL; c++) w_data[c] = (g < NGRP) ? ws[g][jb*NCOL+c] : '0;
      @(posedge clk);
      if (w_valid && w_ready) begin
        jb++;
        if (jb == NJB) begin jb = 0; g++; end
      end
      @(negedge clk);
      cyc++;
    end
    w_valid = 0;
    if (stall_pct == 0) begin
      checks++;
      if (cyc != NGRP * (NJB + 1) + 2) begin
        failures++; $display("cycle count %0d expected %0d", cyc, NGRP * (NJB + 1) + 2);
      end
    end
    for (int r = 0; r < MB; r++) for (int j = 0; j < D_OUT; j++) begin
      ref_v = 0;
      for (int k = 0; k < D_IN; k++) ref_v += int'(xs[r][k]) * tern(ws[k/4][j][2*(k%4) +: 2]);
      o_rd_row = r[0]; o_rd_idx = j[3:0];
      @(negedge clk);
      checks++;
      if (o_rd_data !== ref_v) begin
        failures++;
        if (failures < 10) $display("r=%0d j=%0d got %0d exp %0d", r, j, o_rd_data, ref_v);
      end
    end
  endtask

  initial begin
    x_we = 0; start = 0; w_valid = 0; x_row = 0; x_grp = 0; o_rd_row = 0; o_rd_idx = 0;
    for (int n = 0; n < 4; n++) x_data[n] = '0;
    for (int c = 0; c < NCOL; c++) w_data[c] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(0);
    run(30);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
