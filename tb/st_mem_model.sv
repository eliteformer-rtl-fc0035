// st_mem_model: behavioural model of the off-chip memory that holds the
// attention state (linear-attention state, sliding-window cache and
// feature-map weights): 64-bit words, sparse, unwritten words read as zero,
// read data one clock after re, one write per clock.
module st_mem_model #(
  parameter int unsigned AW = 32
) (
  input  logic          clk,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [63:0]   rdata,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [63:0]   wdata
);
  logic [63:0] mem [longint unsigned];
  always_ff @(posedge clk) begin
    if (re) rdata <= mem.exists(longint'(raddr)) ? mem[longint'(raddr)] : '0;
    if (we) mem[longint'(waddr)] = wdata;
  end
endmodule
