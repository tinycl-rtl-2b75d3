// tb_tinycl_kernel_manager: self-checking test of the kernel buffer.
// A small kernel memory model (one-cycle read latency) holds random kernels
// of 8 output channels. For each channel the test loads the slice in both
// forward and transposed (180-degree turned, channels exchanged) form,
// checks the 9-cycle load time, swaps and compares all 9 x 8 buffer values
// with values picked from the memory model; it also checks that the front
// buffer keeps its contents while the next slice is being loaded.
module tb_tinycl_kernel_manager;
  import tinycl_pkg::*;

  logic clk = 0, rst_n = 0, load_start = 0, transposed = 0, swap = 0;
  addr_t k_base;
  logic [NW-1:0] kidx;
  logic [LANES-1:0] rd_en;
  addr_t rd_addr [LANES];
  word_t rd_data [LANES];
  word_t front [9];
  logic back_ready;
  word_t kmem [256];
  int checks = 0, failures = 0;

  tinycl_kernel_manager dut (.*);

  always #5 clk = ~clk;
  always_ff @(posedge clk)
    for (int i = 0; i < LANES; i++) if (rd_en[i]) rd_data[i] <= kmem[rd_addr[i][7:0]];

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic data_t kval(input int co, input int ci, input int p);
    return lane(kmem[int'(k_base) + 9*co + p], ci);
  endfunction

  initial begin
    word_t saved [9];
    int cyc;
    foreach (kmem[i]) kmem[i] = {$urandom, $urandom, $urandom, $urandom};
    k_base = 24'd17; kidx = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int tr = 0; tr < 2; tr++) begin
      for (int k = 0; k < 8; k++) begin
        transposed = tr[0]; kidx = NW'(k);
        load_start = 1; @(negedge clk); load_start = 0;
        saved = front;
        cyc = 1;
        while (!back_ready) begin @(negedge clk); cyc++; end
        checks++;
        if (cyc != 11) begin failures++; $display("load took %0d cycles, expected 11", cyc); end
        checks++;
        if (front != saved) begin failures++; $display("front changed during load"); end
        swap = 1; @(negedge clk); swap = 0;
        for (int p = 0; p < 9; p++)
          for (int l = 0; l < 8; l++) begin
            data_t e;
            e = tr ? kval(l, k, 8 - p) : kval(k, l, p);
            checks++;
            if (lane(front[p], l) !== e) begin
              failures++;
              $display("tr=%0d k=%0d p=%0d lane %0d: %h expected %h", tr, k, p, l, lane(front[p], l), e);
            end
          end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
