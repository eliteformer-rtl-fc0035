// weight_buffer: partially partitioned weight buffer between the memory bus
// and the ELTF PE array.
//
// Stores whole 512-bit frames (64 weight dataframes) in a FIFO of DEPTH
// frames and hands NCOL dataframes per clock to the PE columns. It is split
// into NCOL banks with cyclic partitioning: dataframe k of a frame goes to
// bank k % NCOL, slot k / NCOL, so column c always reads bank c and all
// columns read in the same clock. A frame is drained in 64/NCOL clocks.
//
// Interface: f_valid/f_ready accept frames (f_ready while a slot is free);
// w_valid/w_ready deliver NCOL dataframes per beat; free_slots tells the bus
// reader how many frames it may still request. clear empties the FIFO.
// The paper gives the partitioning and the 512-bit frame; the depth (one
// 4 kB burst) and the FIFO organisation are this design's choice.
module weight_buffer
  import eltf_pkg::*;
#(
  parameter int unsigned NCOL  = 4,
  parameter int unsigned DEPTH = 128,
  localparam int unsigned SLOTS = DF_PER_FRAME / NCOL,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned SW = (SLOTS > 1) ? $clog2(SLOTS) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear,
  input  logic               f_valid,
  output logic               f_ready,
  input  logic [AXI_DW-1:0]  f_data,
  output logic               w_valid,
  input  logic               w_ready,
  output wdf_t               w_data [NCOL],
  output logic [AW:0]        free_slots
);
  initial assert (DF_PER_FRAME % NCOL == 0) else $error("NCOL must divide 64");

  wdf_t bank [NCOL][DEPTH][SLOTS];
  logic [AW-1:0] wr_ptr, rd_ptr;
  logic [AW:0]   count;
  logic [SW-1:0] slot;

  assign f_ready    = (count != (AW+1)'(DEPTH));
  assign w_valid    = (count != '0);
  assign free_slots = (AW+1)'(DEPTH) - count;

  logic push, pop_frame;
  assign push      = f_valid && f_ready;
  assign pop_frame = w_valid && w_ready && (slot == SW'(SLOTS - 1));

  always_ff @(posedge clk) begin
    if (push) begin
      for (int k = 0; k < DF_PER_FRAME; k++)
        bank[k % NCOL][wr_ptr][k / NCOL] <= f_data[DF_W*k +: DF_W];
    end
  end

  always_comb begin
    for (int c = 0; c < NCOL; c++) w_data[c] = bank[c][rd_ptr][slot];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0; rd_ptr <= '0; count <= '0; slot <= '0;
    end else if (clear) begin
      wr_ptr <= '0; rd_ptr <= '0; count <= '0; slot <= '0;
    end else begin
      if (push) wr_ptr <= (wr_ptr == AW'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      if (w_valid && w_ready) slot <= (slot == SW'(SLOTS - 1)) ? '0 : slot + 1'b1;
      if (pop_frame) rd_ptr <= (rd_ptr == AW'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop_frame);
    end
  end
endmodule
