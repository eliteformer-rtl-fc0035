// eltf_pe_array: mini-batched array of ELTF PEs for one ternary projection.
//
// Computes out[r][j] = sum_k xq[r][k] * W[j][k] for MB mini-batch rows,
// D_IN inputs and D_OUT outputs. PE (r,c) sits in row r (one mini-batch
// entry, as in the paper's mB0..mB3 rows) and column c (one weight-buffer
// partition). The schedule is input stationary: for each group g of four
// inputs, every PE of row r loads xq[r][4g..4g+3] once; then, for every
// output block jb, column c receives the dataframe of output j = jb*NCOL+c
// (broadcast down the column), reads out[r][j] from its row's output
// buffer, adds the four ternary products and writes it back. Group 0 starts
// from zero instead of reading the buffer.
//
// Interface: quantised inputs are written through x_we/x_row/x_grp (four
// INT8 values per write, the input buffer is partitioned by four). start
// runs one projection; weights arrive on w_valid/w_ready as NCOL dataframes
// per beat, in the order g outer, j inner. done pulses once the last result
// is written. Results are read through o_rd_* with one clock of latency.
// Timing: D_IN/4 * (D_OUT/NCOL + 1) + 2 clocks when weights never stall.
// The output buffers are NCOL-way partitioned so every PE has its own port.
// Requires D_OUT/NCOL >= 2 so that a read never meets a pending write.
module eltf_pe_array
  import eltf_pkg::*;
#(
  parameter int unsigned MB    = 2,
  parameter int unsigned NCOL  = 4,
  parameter int unsigned D_IN  = 4096,
  parameter int unsigned D_OUT = 4096,
  parameter int unsigned ACC_W = 32,
  localparam int unsigned NGRP = D_IN / W_PER_DF,
  localparam int unsigned NJB  = D_OUT / NCOL,
  localparam int unsigned RW   = (MB > 1) ? $clog2(MB) : 1,
  localparam int unsigned GW   = (NGRP > 1) ? $clog2(NGRP) : 1,
  localparam int unsigned JW   = (D_OUT > 1) ? $clog2(D_OUT) : 1,
  localparam int unsigned BW   = (NJB > 1) ? $clog2(NJB) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // quantised input buffer write port
  input  logic                    x_we,
  input  logic [RW-1:0]           x_row,
  input  logic [GW-1:0]           x_grp,
  input  q8_t                     x_data [W_PER_DF],
  // control
  input  logic                    start,
  output logic                    busy,
  output logic                    done,
  // weights, NCOL dataframes per beat
  input  logic                    w_valid,
  output logic                    w_ready,
  input  wdf_t                    w_data [NCOL],
  // output buffer read port
  input  logic [RW-1:0]           o_rd_row,
  input  logic [JW-1:0]           o_rd_idx,
  output logic signed [ACC_W-1:0] o_rd_data
);
  initial begin
    assert (D_IN % W_PER_DF == 0) else $error("D_IN must be a multiple of 4");
    assert (D_OUT % NCOL == 0 && NJB >= 2) else $error("D_OUT must be >= 2*NCOL and a multiple of NCOL");
  end

  // Partially partitioned, mini-batched input buffer: one 4-wide word per group.
  q8_t xbuf [MB][NGRP][W_PER_DF];
  // Output buffers: one bank per (row, column).
  logic signed [ACC_W-1:0] obuf [MB][NCOL][NJB];

  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_RUN, S_DRAIN} state_e;
  state_e state;
  logic [GW-1:0] g;
  logic [BW-1:0] jb;

  always_ff @(posedge clk) begin
    if (x_we) xbuf[x_row][x_grp] <= x_data;
  end

  logic pe_load, pe_fire;
  assign pe_load = (state == S_LOAD);
  assign w_ready = (state == S_RUN);
  assign pe_fire = (state == S_RUN) && w_valid;
  assign busy    = (state != S_IDLE);

  // Delayed write address for the PE results.
  logic [BW-1:0] jb_d;
  logic          pe_v [MB][NCOL];
  logic signed [ACC_W-1:0] pe_acc [MB][NCOL];

  for (genvar r = 0; r < MB; r++) begin : g_row
    for (genvar c = 0; c < NCOL; c++) begin : g_col
      logic signed [ACC_W-1:0] acc_in;
      assign acc_in = (g == '0) ? '0 : obuf[r][c][jb];
      eltf_pe #(.ACC_W(ACC_W)) u_pe (
        .clk, .rst_n,
        .x_load   (pe_load),
        .x_in     (xbuf[r][g]),
        .w_valid  (pe_fire),
        .w_df     (w_data[c]),
        .acc_in   (acc_in),
        .out_valid(pe_v[r][c]),
        .acc_out  (pe_acc[r][c])
      );
      always_ff @(posedge clk) begin
        if (pe_v[r][c]) obuf[r][c][jb_d] <= pe_acc[r][c];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      g     <= '0;
      jb    <= '0;
      jb_d  <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (pe_fire) jb_d <= jb;
      unique case (state)
        S_IDLE: if (start) begin
          g     <= '0;
          jb    <= '0;
          state <= S_LOAD;
        end
        S_LOAD: state <= S_RUN;
        S_RUN: if (w_valid) begin
          if (jb == BW'(NJB - 1)) begin
            jb <= '0;
            if (g == GW'(NGRP - 1)) state <= S_DRAIN;
            else begin
              g     <= g + 1'b1;
              state <= S_LOAD;
            end
          end else begin
            jb <= jb + 1'b1;
          end
        end
        S_DRAIN: begin
          // last PE result is written this clock
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    o_rd_data <= obuf[o_rd_row][o_rd_idx % NCOL][o_rd_idx / NCOL];
  end

  // A weight beat is only accepted while running.
  a_ready_only_run: assert property (@(posedge clk) disable iff (!rst_n) w_ready |-> state == S_RUN);
endmodule
