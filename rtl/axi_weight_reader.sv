// axi_weight_reader: memory-mapped AXI4 read master for packed weights.
//
// Reads n_frames consecutive 512-bit frames starting at byte address base
// (64-byte aligned) and forwards every beat on f_valid/f_ready. Bursts are
// INCR, 64 bytes per beat, at most 64 beats (4 kB) and never cross a 4 kB
// boundary, as AXI requires. A burst is only requested when the consumer has
// announced (credit) at least as many free frame slots as the burst is long,
// so RREADY never has to stall the bus for long. One burst is outstanding at
// a time. done pulses after the last beat has been handed on.
// The paper gives the bus type, the 512-bit width and the 4 kB bursts; the
// single-outstanding policy and the credit check are this design's choice.
module axi_weight_reader
  import eltf_pkg::*;
#(
  parameter int unsigned NW = 24,        // width of the frame count
  parameter int unsigned CREDIT_W = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [AXI_AW-1:0]    base,
  input  logic [NW-1:0]        n_frames,
  output logic                 busy,
  output logic                 done,
  input  logic [CREDIT_W-1:0]  credit,
  // AXI4 read address channel
  output logic [AXI_AW-1:0]    m_araddr,
  output logic [7:0]           m_arlen,
  output logic [2:0]           m_arsize,
  output logic [1:0]           m_arburst,
  output logic                 m_arvalid,
  input  logic                 m_arready,
  // AXI4 read data channel
  input  logic [AXI_DW-1:0]    m_rdata,
  input  logic [1:0]           m_rresp,
  input  logic                 m_rlast,
  input  logic                 m_rvalid,
  output logic                 m_rready,
  // frame stream
  output logic                 f_valid,
  input  logic                 f_ready,
  output logic [AXI_DW-1:0]    f_data
);
  typedef enum logic [1:0] {R_IDLE, R_ADDR, R_DATA} state_e;
  state_e state;
  logic [AXI_AW-1:0] addr;
  logic [NW-1:0]     left;     // frames not yet requested
  logic [8:0]        blen;     // beats of the current burst

  // Beats until the next 4 kB boundary and the length of the next burst.
  logic [6:0] to_4k;
  logic [NW-1:0] next_len;
  always_comb begin
    to_4k = 7'(MAX_BURST) - 7'(addr[11:6]);
    next_len = (left < NW'(to_4k)) ? left : NW'(to_4k);
  end

  assign m_arsize  = 3'($clog2(FRAME_BYTES));
  assign m_arburst = 2'b01;
  assign m_arvalid = (state == R_ADDR);
  assign m_araddr  = addr;
  assign m_arlen   = 8'(blen - 1'b1);
  assign m_rready  = (state == R_DATA) && f_ready;
  assign f_valid   = (state == R_DATA) && m_rvalid;
  assign f_data    = m_rdata;
  assign busy      = (state != R_IDLE) || (left != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= R_IDLE; addr <= '0; left <= '0; blen <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        R_IDLE: begin
          if (start) begin
            addr <= base;
            left <= n_frames;
          end else if (left != '0 && NW'(credit) >= next_len) begin
            blen  <= 9'(next_len);
            left  <= left - next_len;
            state <= R_ADDR;
          end
        end
        R_ADDR: if (m_arready) state <= R_DATA;
        R_DATA: if (m_rvalid && m_rready) begin
          addr <= addr + AXI_AW'(FRAME_BYTES);
          if (m_rlast) begin
            state <= R_IDLE;
            if (left == '0) done <= 1'b1;
          end
        end
        default: state <= R_IDLE;
      endcase
    end
  end

  a_arlen_max: assert property (@(posedge clk) disable iff (!rst_n) m_arvalid |-> m_arlen < 8'(MAX_BURST));
  a_no_4k_cross: assert property (@(posedge clk) disable iff (!rst_n)
    m_arvalid |-> (13'(m_araddr[11:0]) + 13'((m_arlen + 1) * FRAME_BYTES)) <= 13'd4096);
  a_ar_stable: assert property (@(posedge clk) disable iff (!rst_n)
    m_arvalid && !m_arready |=> m_arvalid && $stable(m_araddr) && $stable(m_arlen));
endmodule
