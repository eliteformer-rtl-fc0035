// stage_sched: top-level dataflow controller of one generative step.
//
// Each decoder layer runs as four stages, QKV -> attn -> FFN12 -> FFN3,
// and each stage works on one batch at a time. A stage is a synchronisation
// boundary: stage s may start batch b only after stage s-1 has finished
// batch b (normalisation needs the whole token). Different stages work on
// different batches at once, so batch b+1 runs QKV while batch b runs attn.
// Every stage takes the batches in order. A layer is a barrier: the next
// layer's QKV starts only when FFN3 has finished the last batch.
// Interface: start runs n_layers (at most NL) layers of NB batches. For each stage the
// controller pulses st_start[s] with st_batch[s] and st_layer valid, and
// waits for st_done[s]. done pulses when the last layer has finished.
// The stages and the overlap follow the paper's timing diagram; the start
// rule above and the layer barrier are how this design reads it.
module stage_sched
  import eltf_pkg::*;
#(
  parameter int unsigned NB = 2,
  parameter int unsigned NL = 32,
  localparam int unsigned BW = $clog2(NB + 1),
  localparam int unsigned LW = (NL > 1) ? $clog2(NL) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [LW:0]   n_layers,      // layers to run, 1..NL
  output logic          busy,
  output logic          done,
  output logic          st_start [N_STAGES],
  output logic [BW-1:0] st_batch [N_STAGES],
  input  logic          st_done  [N_STAGES],
  output logic [LW-1:0] st_layer
);
  logic          run;
  logic          active [N_STAGES];
  logic [BW-1:0] issued [N_STAGES];   // batches started by stage s in this layer
  logic [BW-1:0] fin    [N_STAGES];   // batches finished by stage s in this layer
  logic          go     [N_STAGES];

  always_comb begin
    for (int s = 0; s < N_STAGES; s++) begin
      go[s] = run && !active[s] && (issued[s] != BW'(NB)) &&
              ((s == 0) ? 1'b1 : (issued[s] < fin[s-1]));
      st_start[s] = go[s];
      st_batch[s] = issued[s];
    end
  end

  assign busy = run;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; done <= 1'b0; st_layer <= '0;
      for (int s = 0; s < N_STAGES; s++) begin
        active[s] <= 1'b0; issued[s] <= '0; fin[s] <= '0;
      end
    end else begin
      done <= 1'b0;
      if (!run) begin
        if (start) begin
          run <= 1'b1; st_layer <= '0;
          for (int s = 0; s < N_STAGES; s++) begin
            active[s] <= 1'b0; issued[s] <= '0; fin[s] <= '0;
          end
        end
      end else if (fin[N_STAGES-1] == BW'(NB)) begin
        // layer barrier
        for (int s = 0; s < N_STAGES; s++) begin
          issued[s] <= '0; fin[s] <= '0;
        end
        if ((LW+1)'(st_layer) + 1'b1 >= n_layers) begin
          run <= 1'b0; done <= 1'b1;
        end else st_layer <= st_layer + 1'b1;
      end else begin
        for (int s = 0; s < N_STAGES; s++) begin
          if (go[s]) begin
            active[s] <= 1'b1; issued[s] <= issued[s] + 1'b1;
          end
          if (active[s] && st_done[s]) begin
            active[s] <= 1'b0; fin[s] <= fin[s] + 1'b1;
          end
        end
      end
    end
  end

  a_done_only_active: assert property (@(posedge clk) disable iff (!rst_n)
    st_done[0] |-> active[0]);
endmodule
