// seq_div: unsigned restoring divider, one quotient bit per clock.
//
// start loads num and den; W clocks later done pulses with quot = num / den
// (den = 0 gives all ones). Used for the few scalar divisions of the
// normaliser and quantiser (one per token or per head), so a slow, small
// divider suffices. The paper names no divider; this one is this design's.
module seq_div #(
  parameter int unsigned W = 48
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] num,
  input  logic [W-1:0] den,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] quot
);
  logic [W-1:0] d, q;
  logic [W:0]   rem;
  logic [$clog2(W+1)-1:0] cnt;
  logic [W+1:0] trial;
  assign trial = {1'b0, rem[W-1:0], q[W-1]} - {2'b00, d};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d <= '0; q <= '0; rem <= '0; cnt <= '0; busy <= 1'b0; done <= 1'b0; quot <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        d <= den; q <= num; rem <= '0; cnt <= '0; busy <= 1'b1;
      end else if (busy) begin
        if (!trial[W+1]) begin
          rem <= trial[W:0];
          q   <= {q[W-2:0], 1'b1};
        end else begin
          rem <= {rem[W-1:0], q[W-1]};
          q   <= {q[W-2:0], 1'b0};
        end
        cnt <= cnt + 1'b1;
        if (cnt == $bits(cnt)'(W - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
          quot <= (!trial[W+1]) ? {q[W-2:0], 1'b1} : {q[W-2:0], 1'b0};
        end
      end
    end
  end
endmodule
