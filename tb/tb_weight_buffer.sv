// tb_weight_buffer: pushes random 512-bit frames with random gaps, pops
// dataframes with random back-pressure and checks that the NCOL columns see
// the dataframes of each frame in order (column c gets k % NCOL == c), that
// frames leave in order, and that free_slots tracks occupancy and fills up.
module tb_weight_buffer;
  import eltf_pkg::*;
  localparam int NCOL = 4, DEPTH = 4, NFR = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clear, f_valid, f_ready, w_valid, w_ready;
  logic [511:0] f_data;
  wdf_t w_data [NCOL];
  logic [2:0] free_slots;

  weight_buffer #(.NCOL(NCOL), .DEPTH(DEPTH)) dut (.*);

  logic [511:0] fr [NFR];
  int pushed = 0, popped_df = 0, full_seen = 0, occ = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear = 0; f_valid = 0; w_ready = 0; f_data = '0;
    for (int i = 0; i < NFR; i++) fr[i] = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom,
      $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (popped_df < NFR * 64) begin
      @(negedge clk);
      f_valid = (pushed < NFR) && ($urandom_range(99) < 60);
      f_data  = (pushed < NFR) ? fr[pushed] : '0;
      w_ready = (pushed > 10) ? ($urandom_range(99) < 70) : ($urandom_range(99) < 10);
      checks++;
      if (free_slots != 3'(DEPTH - occ)) begin
        failures++; $display("free_slots %0d occ %0d", free_slots, occ);
      end
      if (free_slots == 0) full_seen++;
      #1;
      if (w_valid && w_ready) begin
        int f, k0;
        f = popped_df / 64; k0 = popped_df % 64;
        for (int c = 0; c < NCOL; c++) begin
          checks++;
          if (w_data[c] !== fr[f][8*(k0+c) +: 8]) begin
            failures++;
            if (failures < 10) $display("frame %0d df %0d col %0d got %h exp %h", f, k0 + c, c, w_data[c], fr[f][8*(k0+c) +: 8]);
          end
        end
        popped_df += NCOL;
        if (popped_df % 64 == 0) occ--;
      end
      if (f_valid && f_ready) begin pushed++; occ++; end
      @(posedge clk);
    end
    checks++;
    if (full_seen == 0) begin failures++; $display("buffer never filled"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
