// isqrt: integer square root, one result bit per clock.
//
// start loads v; W/2 clocks later done pulses with root = floor(sqrt(v)).
// Digit-by-digit (non-restoring style) method; W must be even.
// Used for the RMS of RMSNorm; the paper does not say how the root is
// taken, so the method is this design's.
module isqrt #(
  parameter int unsigned W = 48
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [W-1:0]   v,
  output logic           busy,
  output logic           done,
  output logic [W/2-1:0] root
);
  logic [W-1:0]   x;
  logic [W/2-1:0] r;
  logic [W/2+1:0] rem;
  logic [$clog2(W)-1:0] cnt;
  logic [W/2+1:0] cur, trial;
  assign cur   = {rem[W/2-1:0], x[W-1:W-2]};
  assign trial = cur - {r, 2'b01};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x <= '0; r <= '0; rem <= '0; cnt <= '0; busy <= 1'b0; done <= 1'b0; root <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        x <= v; r <= '0; rem <= '0; cnt <= '0; busy <= 1'b1;
      end else if (busy) begin
        x <= {x[W-3:0], 2'b00};
        if (!trial[W/2+1]) begin
          rem <= trial;
          r   <= {r[W/2-2:0], 1'b1};
        end else begin
          rem <= cur;
          r   <= {r[W/2-2:0], 1'b0};
        end
        cnt <= cnt + 1'b1;
        if (cnt == $bits(cnt)'(W/2 - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
          root <= (!trial[W/2+1]) ? {r[W/2-2:0], 1'b1} : {r[W/2-2:0], 1'b0};
        end
      end
    end
  end
endmodule
