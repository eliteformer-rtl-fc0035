// tb_act_quant: feeds random tokens and scaling weights (D=64) and checks
// every INT8 output against round(127 * x*gamma / max|x*gamma|) computed in
// real arithmetic (to the nearest step, 0.52 allowed), and the dequantisation scale against
// max|x*gamma| / (127 * rms(x)) within 1 %.
module tb_act_quant;
  import eltf_pkg::*;
  localparam int D = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic x_we, g_we, start, busy, done, q_valid;
  logic [5:0] x_idx, g_idx, q_idx;
  act_t x_data, g_data;
  q8_t q_data;
  logic [31:0] s_act;

  act_quant #(.D(D)) dut (.*);

  act_t xs [D], gs [D];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real xg [D];
    real amax, ss, rms, sref, qref;
    int  nq;
    x_we = 0; g_we = 0; start = 0; x_idx = 0; g_idx = 0; x_data = 0; g_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 6; t++) begin
      int span;
      span = (t == 0) ? 100 : (t == 1) ? 30000 : $urandom_range(200, 8000);
      amax = 0; ss = 0;
      for (int i = 0; i < D; i++) begin
        xs[i] = act_t'($signed($urandom_range(2 * span)) - span);
        gs[i] = act_t'($urandom_range(128, 512));
        xg[i] = real'(xs[i]) * real'(gs[i]) / 65536.0;
        if ((xg[i] < 0 ? -xg[i] : xg[i]) > amax) amax = (xg[i] < 0 ? -xg[i] : xg[i]);
        ss += (real'(xs[i]) / 256.0) ** 2;
        @(negedge clk);
        x_we = 1; x_idx = 6'(i); x_data = xs[i]; g_we = 1; g_idx = 6'(i); g_data = gs[i];
      end
      @(negedge clk); x_we = 0; g_we = 0; start = 1;
      @(negedge clk); start = 0;
      rms = $sqrt(ss / D);
      sref = amax / (127.0 * rms);
      nq = 0;
      while (!done) begin
        @(posedge clk); #1;
        if (q_valid) begin
          qref = 127.0 * xg[q_idx] / amax;
          checks++; nq++;
          if (qref - real'(q_data) > 0.52 || real'(q_data) - qref > 0.52) begin
            failures++;
            if (failures < 10) $display("t=%0d i=%0d q=%0d ref=%f", t, q_idx, q_data, qref);
          end
        end
      end
      checks += 2;
      if (nq != D) begin failures++; $display("only %0d outputs", nq); end
      if ((real'(s_act) / 65536.0 - sref) > 0.01 * sref || (sref - real'(s_act) / 65536.0) > 0.01 * sref) begin
        failures++; $display("t=%0d s_act %f ref %f", t, real'(s_act) / 65536.0, sref);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
