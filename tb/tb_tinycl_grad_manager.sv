// tb_tinycl_grad_manager: self-checking test of the gradient manager.
// Loads dY vectors of several lengths from a gradient memory model, checks
// the load time, then checks gop for every index plain and negated
// (including the saturating negation of -8.0), and the lane selection used
// by the kernel gradient.
module tb_tinycl_grad_manager;
  import tinycl_pkg::*;

  logic clk = 0, rst_n = 0, load_start = 0, conv_kg = 0, neg = 0;
  addr_t g_base;
  logic [NW-1:0] n_out, sel;
  logic rd_en, ready;
  addr_t rd_addr;
  word_t rd_data, g_word;
  data_t gop;
  word_t gmem [16];
  int checks = 0, failures = 0;

  tinycl_grad_manager #(.NMAX(16)) dut (.*);

  always #5 clk = ~clk;
  always_ff @(posedge clk) if (rd_en) rd_data <= gmem[rd_addr[3:0]];

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc, nw;
    g_word = '0; sel = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 12; t++) begin
      foreach (gmem[i]) gmem[i] = {$urandom, $urandom, $urandom, $urandom};
      gmem[3][16 +: 16] = 16'h8000;
      g_base = addr_t'(t % 3 + 2);
      n_out  = NW'((t % 4 == 0) ? 2 : (t % 4 == 1) ? 8 : (t % 4 == 2) ? 10 : 16);
      nw = (int'(n_out) + 7) / 8;
      conv_kg = 0; neg = 0;
      load_start = 1; @(negedge clk); load_start = 0;
      cyc = 1;
      while (!ready) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != nw + 2) begin failures++; $display("dY load took %0d cycles, expected %0d", cyc, nw + 2); end
      for (int n = 0; n < int'(n_out); n++) begin
        data_t e;
        e = lane(gmem[int'(g_base) + n / 8], n % 8);
        sel = NW'(n);
        neg = 0; #1; checks++;
        if (gop !== e) begin failures++; $display("dY[%0d] %h expected %h", n, gop, e); end
        neg = 1; #1; checks++;
        if (gop !== ((e == 16'sh8000) ? 16'sh7fff : -e)) begin failures++; $display("-dY[%0d] %h", n, gop); end
      end
      conv_kg = 1; neg = 0;
      for (int l = 0; l < 8; l++) begin
        g_word = {$urandom, $urandom, $urandom, $urandom};
        sel = NW'(l); #1; checks++;
        if (gop !== lane(g_word, l)) begin failures++; $display("kg lane %0d wrong", l); end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
