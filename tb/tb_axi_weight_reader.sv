// tb_axi_weight_reader: fetches frame runs from a randomly stalling AXI
// slave model, from an address that is not 4 kB aligned and with a
// consumer that applies back-pressure, and checks every frame in order, the
// number of bursts (bursts split at 4 kB, at most 64 beats) and done.
module tb_axi_weight_reader;
  import eltf_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done, f_valid, f_ready;
  logic [39:0] base;
  logic [23:0] n_frames;
  logic [7:0]  credit;
  logic [39:0] m_araddr; logic [7:0] m_arlen; logic [2:0] m_arsize; logic [1:0] m_arburst;
  logic m_arvalid, m_arready, m_rlast, m_rvalid, m_rready;
  logic [511:0] m_rdata, f_data; logic [1:0] m_rresp;

  axi_weight_reader dut (.*);
  axi_mem_model mem (.clk, .rst_n, .araddr(m_araddr), .arlen(m_arlen), .arsize(m_arsize),
    .arburst(m_arburst), .arvalid(m_arvalid), .arready(m_arready), .rdata(m_rdata),
    .rresp(m_rresp), .rlast(m_rlast), .rvalid(m_rvalid), .rready(m_rready));

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [511:0] pat(input longint unsigned fa);
    return {16{32'(fa * 2654435761) ^ 32'h5a5a0000}};
  endfunction

  task automatic fetch(input logic [39:0] b, input int n, input int exp_bursts);
    int got = 0, b0 = mem.bursts, seen_done = 0;
    for (int i = 0; i < n; i++) mem.frames[(longint'(b) >> 6) + i] = pat((longint'(b) >> 6) + i);
    @(negedge clk); base = b; n_frames = 24'(n); start = 1;
    @(negedge clk); start = 0;
    while (!seen_done) begin
      f_ready = ($urandom_range(99) < 80);
      @(posedge clk);
      if (done) seen_done = 1;
      if (f_valid && f_ready) begin
        checks++;
        if (f_data !== pat((longint'(b) >> 6) + got)) begin
          failures++; if (failures < 10) $display("frame %0d wrong", got);
        end
        got++;
      end
      @(negedge clk);
    end
    checks += 2;
    if (got != n) begin failures++; $display("got %0d frames of %0d", got, n); end
    if (mem.bursts - b0 != exp_bursts) begin
      failures++; $display("bursts %0d expected %0d", mem.bursts - b0, exp_bursts);
    end
  endtask

  initial begin
    start = 0; base = '0; n_frames = '0; f_ready = 0; credit = 8'd64;
    repeat (3) @(posedge clk);
    rst_n = 1;
    fetch(40'h0000_1000, 64, 1);          // one full 4 kB burst
    fetch(40'h0000_2f80, 70, 3);          // 2 beats to the boundary, then 64, then 4
    fetch(40'h0001_0040, 5, 1);
    checks++;
    if (mem.errors != 0) begin failures++; $display("AXI rule errors %0d", mem.errors); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
