// tb_tinycl_mac: self-checking test of the reconfigurable MAC.
// Drives random Q4.12 operands and partial sums in both modes and compares
// the multi-operand output (sum of the 8 products) and the 8 multi-adder
// outputs (product + partial sum) with values computed here at 32 bits.
module tb_tinycl_mac;
  import tinycl_pkg::*;

  logic  multi_adder;
  data_t data1 [LANES], data2 [LANES];
  prod_t psum_in [LANES], psum_out [LANES], mop_out;
  int    checks = 0, failures = 0;

  tinycl_mac dut (.multi_adder, .data1, .data2, .psum_in, .mop_out, .psum_out);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    prod_t exp_sum, exp_l;
    for (int t = 0; t < 400; t++) begin
      multi_adder = t[0];
      for (int l = 0; l < LANES; l++) begin
        data1[l]   = data_t'($urandom);
        data2[l]   = data_t'($urandom);
        psum_in[l] = prod_t'($urandom);
      end
      if (t == 2) begin  // extreme values
        for (int l = 0; l < LANES; l++) begin data1[l] = 16'sh8000; data2[l] = 16'sh8000; end
      end
      #1;
      exp_sum = '0;
      for (int l = 0; l < LANES; l++) exp_sum += prod_t'(int'(data1[l]) * int'(data2[l]));
      checks++;
      if (mop_out !== (multi_adder ? prod_t'(0) : exp_sum)) begin
        failures++;
        $display("t=%0d mode=%0d mop_out %0d expected %0d", t, multi_adder, mop_out, exp_sum);
      end
      for (int l = 0; l < LANES; l++) begin
        exp_l = multi_adder ? prod_t'(int'(data1[l]) * int'(data2[l]) + int'(psum_in[l])) : prod_t'(0);
        checks++;
        if (psum_out[l] !== exp_l) begin
          failures++;
          $display("t=%0d lane %0d psum_out %0d expected %0d", t, l, psum_out[l], exp_l);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
