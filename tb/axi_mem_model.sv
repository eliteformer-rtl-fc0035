// axi_mem_model: behavioural AXI4 read-only slave standing in for the
// off-chip DDR that holds the packed weights. Frames are 64 bytes, stored
// sparsely in `frames`, indexed by byte address / 64; an unwritten frame
// reads as zero. ARREADY and RVALID are held back at random (STALL percent)
// to exercise the master's handshakes. It counts bursts and checks that none
// crosses a 4 kB boundary. With GEN=1 an unwritten frame reads as the
// pseudo-random pattern gen_frame(index) instead, so that a testbench can
// stand in gigabytes of weights without storing them.
module axi_mem_model #(
  parameter int unsigned AW = 40,
  parameter int unsigned STALL = 20,
  parameter bit          GEN = 1'b0
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [AW-1:0] araddr,
  input  logic [7:0]    arlen,
  input  logic [2:0]    arsize,
  input  logic [1:0]    arburst,
  input  logic          arvalid,
  output logic          arready,
  output logic [511:0]  rdata,
  output logic [1:0]    rresp,
  output logic          rlast,
  output logic          rvalid,
  input  logic          rready
);
  logic [511:0] frames [longint unsigned];
  int unsigned  bursts = 0;
  int unsigned  errors = 0;
  logic         active = 1'b0;
  logic [AW-1:0] addr;
  int unsigned  left;

  assign rresp = 2'b00;

  // splitmix64 of (frame index, word index)
  function automatic logic [511:0] gen_frame(input longint unsigned k);
    logic [511:0] f;
    longint unsigned h;
    for (int w = 0; w < 8; w++) begin
      h = k * 64'h9E3779B97F4A7C15 + longint'(w) * 64'hBF58476D1CE4E5B9 + 64'h94D049BB133111EB;
      h = (h ^ (h >> 30)) * 64'hBF58476D1CE4E5B9;
      h = (h ^ (h >> 27)) * 64'h94D049BB133111EB;
      f[64*w +: 64] = h ^ (h >> 31);
    end
    return f;
  endfunction

  function automatic logic [511:0] rd(input logic [AW-1:0] a);
    longint unsigned k = longint'(a) >> 6;
    return frames.exists(k) ? frames[k] : GEN ? gen_frame(k) : '0;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      arready <= 1'b0; rvalid <= 1'b0; rlast <= 1'b0; rdata <= '0; active <= 1'b0;
    end else begin
      arready <= !active && ($urandom_range(99) >= STALL);
      if (arvalid && arready && !active) begin
        if (arsize != 3'd6 || arburst != 2'b01) errors <= errors + 1;
        if ((int'(araddr[11:0]) + (int'(arlen) + 1) * 64) > 4096) errors <= errors + 1;
        active <= 1'b1; addr <= araddr; left <= int'(arlen) + 1; bursts <= bursts + 1;
        arready <= 1'b0; rvalid <= 1'b0;
      end else if (active) begin
        if (!rvalid || rready) begin
          if (rvalid && rready && rlast) begin
            active <= 1'b0; rvalid <= 1'b0; rlast <= 1'b0;
          end else if ($urandom_range(99) >= STALL) begin
            rvalid <= 1'b1; rdata <= rd(addr); rlast <= (left == 1);
            addr <= addr + 64; left <= left - 1;
          end else rvalid <= 1'b0;
        end
      end
    end
  end
endmodule
