// tb_eltf_pe: checks the ELTF PE against a multiply-based reference for
// random activations (including -128), every weight code and random output
// values, and checks the one-clock latency.
module tb_eltf_pe;
  import eltf_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic x_load, w_valid, out_valid;
  q8_t  x_in [4];
  wdf_t w_df;
  logic signed [31:0] acc_in, acc_out;

  eltf_pe #(.ACC_W(32)) dut (.*);

  function automatic int tern(input logic [1:0] c);
    return (c == 2'b01) ? 1 : (c == 2'b11) ? -1 : 0;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_v;
    x_load = 0; w_valid = 0; w_df = '0; acc_in = '0;
    for (int n = 0; n < 4; n++) x_in[n] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      for (int n = 0; n < 4; n++) x_in[n] = (t % 7 == 0) ? -8'sd128 : q8_t'($urandom);
      x_load = 1; w_valid = 0;
      @(negedge clk);
      x_load = 0;
      w_df = wdf_t'($urandom); acc_in = $signed($urandom_range(200000)) - 100000;
      w_valid = 1;
      exp_v = acc_in;
      for (int n = 0; n < 4; n++) exp_v += int'(x_in[n]) * tern(w_df[2*n +: 2]);
      @(negedge clk);
      w_valid = 0;
      checks++;
      if (!out_valid || acc_out !== exp_v) begin
        failures++;
        if (failures < 10) $display("mismatch t=%0d df=%b got %0d exp %0d v=%0b", t, w_df, acc_out, exp_v, out_valid);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
