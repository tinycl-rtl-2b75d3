// tb_tinycl_mem: self-checking test of the multi-ported SRAM model.
// Writes random words with random lane enables through two write ports,
// reads them back through three read ports one cycle later and compares
// with a shadow copy; also checks that read data hold while rd_en is low.
module tb_tinycl_mem;
  import tinycl_pkg::*;

  localparam int DEPTH = 64;
  logic clk = 0;
  logic [2:0] rd_en;
  logic [5:0] rd_addr [3];
  word_t      rd_data [3];
  logic [1:0][7:0] wr_be;
  logic [5:0] wr_addr [2];
  word_t      wr_data [2];
  word_t      shadow [DEPTH];
  int checks = 0, failures = 0;

  tinycl_mem #(.LANES_N(8), .DEPTH(DEPTH), .NRD(3), .NWR(2)) dut (
    .clk, .rd_en, .rd_addr, .rd_data, .wr_be, .wr_addr, .wr_data);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_word(input int p, input int a, input word_t d, input logic [7:0] be);
    wr_be[p] = be; wr_addr[p] = 6'(a); wr_data[p] = d;
    for (int l = 0; l < 8; l++) if (be[l]) shadow[a][l*16 +: 16] = d[l*16 +: 16];
  endtask

  initial begin
    word_t hold;
    rd_en = '0; wr_be = '0;
    for (int i = 0; i < 3; i++) rd_addr[i] = '0;
    for (int i = 0; i < 2; i++) begin wr_addr[i] = '0; wr_data[i] = '0; end
    // initialise every word through port 0 and 1
    for (int a = 0; a < DEPTH; a += 2) begin
      @(negedge clk);
      write_word(0, a,   {4{$urandom}}, 8'hff);
      write_word(1, a+1, {4{$urandom}}, 8'hff);
    end
    @(negedge clk); wr_be = '0;
    for (int t = 0; t < 500; t++) begin
      int a0, a1;
      @(negedge clk);
      a0 = $urandom_range(0, DEPTH/2-1);
      a1 = $urandom_range(DEPTH/2, DEPTH-1);
      write_word(0, a0, {4{$urandom}}, 8'($urandom));
      write_word(1, a1, {4{$urandom}}, 8'($urandom));
      @(negedge clk);
      wr_be = '0;
      rd_en = 3'b111;
      rd_addr[0] = 6'(a0); rd_addr[1] = 6'(a1); rd_addr[2] = 6'($urandom_range(0, DEPTH-1));
      @(negedge clk);
      rd_en = '0;
      for (int i = 0; i < 3; i++) begin
        checks++;
        if (rd_data[i] !== shadow[rd_addr[i]]) begin
          failures++;
          $display("t=%0d port %0d addr %0d read %h expected %h", t, i, rd_addr[i], rd_data[i], shadow[rd_addr[i]]);
        end
      end
      hold = rd_data[0];
      @(negedge clk);
      checks++;
      if (rd_data[0] !== hold) begin failures++; $display("read data did not hold"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
