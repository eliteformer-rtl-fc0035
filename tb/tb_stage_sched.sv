// tb_stage_sched: drives the scheduler with stages of random duration
// (NB=3 batches, 2 of NL=3 layers) and checks the rules of the timing
// diagram: a stage never starts while busy, takes batches in order, starts
// batch b only after the previous stage finished it, and the next layer
// begins only after the last batch left FFN3. It counts how often two stages
// ran at once (pipelining) and requires it to happen, and checks done.
module tb_stage_sched;
  import eltf_pkg::*;
  localparam int NB = 3, NL = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done;
  logic st_start [4];
  logic [1:0] st_batch [4];
  logic st_done [4];
  logic [1:0] st_layer;
  logic [2:0] n_layers;

  stage_sched #(.NB(NB), .NL(NL)) dut (.*);

  int  remain [4];
  bit  act [4];
  int  next_b [4];
  int  fin_b [4][NB];           // layer+1 in which stage s finished batch b
  int  overlap = 0, layers_seen = 0, last_layer = -1, ndone = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n) begin
    int nact;
    nact = 0;
    for (int s = 0; s < 4; s++) begin
      st_done[s] = 0;
      if (act[s]) begin
        nact++;
        if (remain[s] == 0) begin
          st_done[s] = 1; act[s] = 0;
          fin_b[s][next_b[s] - 1] = st_layer + 1;
        end else remain[s]--;
      end
    end
    if (nact > 1) overlap++;
  end

  always @(posedge clk) if (rst_n) begin
    #1;
    if (done) ndone++;
  end

  always @(posedge clk) if (rst_n) begin
    for (int s = 0; s < 4; s++) if (st_start[s]) begin
      checks++;
      if (act[s]) begin failures++; $display("stage %0d started while busy", s); end
      if (int'(st_layer) != last_layer) begin
        // first start of a new layer must be QKV of batch 0 with FFN3 done for all
        if (s != 0) begin failures++; $display("layer %0d opened by stage %0d", st_layer, s); end
        if (last_layer >= 0) for (int b = 0; b < NB; b++)
          if (fin_b[3][b] != last_layer + 1) begin failures++; $display("layer barrier broken"); end
        last_layer = st_layer; layers_seen++;
        for (int t = 0; t < 4; t++) next_b[t] = 0;
      end
      if (int'(st_batch[s]) != next_b[s]) begin
        failures++; $display("stage %0d batch %0d expected %0d", s, st_batch[s], next_b[s]);
      end
      if (s > 0 && fin_b[s-1][st_batch[s]] != st_layer + 1) begin
        failures++; $display("stage %0d batch %0d started before stage %0d finished it", s, st_batch[s], s - 1);
      end
      act[s] = 1; remain[s] = $urandom_range(2, 12); next_b[s]++;
    end
  end

  initial begin
    start = 0; n_layers = 3'd2;
    for (int s = 0; s < 4; s++) begin
      st_done[s] = 0; act[s] = 0; next_b[s] = 0;
      for (int b = 0; b < NB; b++) fin_b[s][b] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    wait (ndone > 0);
    repeat (5) @(posedge clk);
    checks += 3;
    if (layers_seen != 2) begin failures++; $display("layers %0d", layers_seen); end
    if (overlap == 0) begin failures++; $display("no stage overlap"); end
    if (ndone != 1) begin failures++; $display("done %0d times", ndone); end
    $display("overlap cycles %0d", overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
