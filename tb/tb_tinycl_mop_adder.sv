// tb_tinycl_mop_adder: self-checking test of the multi-operand adder.
// Random 32-bit inputs and accumulator; checks the 40-bit sum and the value
// rounded to nearest Q4.12 with saturation, computed here from the exact sum.
module tb_tinycl_mop_adder;
  import tinycl_pkg::*;

  prod_t in [9];
  logic signed [39:0] acc_in, sum;
  data_t rounded;
  int checks = 0, failures = 0;

  tinycl_mop_adder #(.N(9), .SUM_W(40)) dut (.in, .acc_in, .sum, .rounded);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint exact, q;
    data_t  exp_r;
    for (int t = 0; t < 600; t++) begin
      for (int i = 0; i < 9; i++) in[i] = (t < 300) ? prod_t'($urandom) : prod_t'($signed($urandom) >>> 12);
      acc_in = (t % 3 == 0) ? 40'(signed'($urandom)) : '0;
      if (t == 5) begin for (int i = 0; i < 9; i++) in[i] = 0; in[0] = 32'sd2048; acc_in = 0; end   // +0.5 lsb
      if (t == 6) begin for (int i = 0; i < 9; i++) in[i] = 0; in[0] = -32'sd2049; acc_in = 0; end  // below -0.5 lsb
      if (t == 7) begin for (int i = 0; i < 9; i++) in[i] = 0; in[0] = 32'sd6143; acc_in = 0; end   // 1.4997 lsb
      #1;
      exact = longint'(acc_in);
      for (int i = 0; i < 9; i++) exact += longint'(in[i]);
      q = exact + 2048;
      q = (q >= 0) ? q / 4096 : -((-q + 4095) / 4096);  // floor division
      if (q > 32767) exp_r = 16'sh7fff;
      else if (q < -32768) exp_r = 16'sh8000;
      else exp_r = data_t'(q);
      checks += 2;
      if (longint'(sum) != exact) begin failures++; $display("t=%0d sum %0d expected %0d", t, sum, exact); end
      if (rounded !== exp_r) begin failures++; $display("t=%0d rounded %0d expected %0d (sum %0d)", t, rounded, exp_r, exact); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
