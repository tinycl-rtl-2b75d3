// tb_tinycl_gdumb: self-checking test of the class-balanced slot manager.
// A memory of 20 slots and 4 classes receives a stream of samples whose
// classes arrive in task order (2 classes per task, as in class-incremental
// learning). A reference model of the same greedy rule predicts grant,
// slot and per-class counts for every offered sample; at the end the classes
// must be balanced to within one sample.
module tb_tinycl_gdumb;
  localparam int NSLOT = 20, NCLS = 4;
  localparam int SLW = $clog2(NSLOT + 1);
  logic clk = 0, rst_n = 0, req = 0;
  logic [1:0] cls;
  logic busy, done, grant;
  logic [SLW-1:0] slot, total;
  logic [SLW-1:0] count [NCLS];
  int ref_label [NSLOT];
  int ref_count [NCLS];
  int ref_total = 0;
  int checks = 0, failures = 0, replaced = 0, rejected = 0;

  tinycl_gdumb #(.NSLOT(NSLOT), .NCLS(NCLS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (ref_count[i]) ref_count[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 120; t++) begin
      int c, kmax, eslot;
      bit egrant;
      c = (t / 30) * 2 + $urandom_range(0, 1);  // tasks of 2 classes
      if (c >= NCLS) c = NCLS - 1;
      // reference
      kmax = 0;
      for (int i = 1; i < NCLS; i++) if (ref_count[i] > ref_count[kmax]) kmax = i;
      if (ref_total < NSLOT) begin
        egrant = 1; eslot = ref_total; ref_label[ref_total] = c; ref_total++; ref_count[c]++;
      end else if (ref_count[c] < ref_count[kmax]) begin
        egrant = 1; eslot = -1;
        for (int s = 0; s < NSLOT; s++) if (eslot < 0 && ref_label[s] == kmax) eslot = s;
        ref_label[eslot] = c; ref_count[kmax]--; ref_count[c]++; replaced++;
      end else begin
        egrant = 0; eslot = -1; rejected++;
      end
      cls = 2'(c); req = 1; @(negedge clk); req = 0;
      while (!done) @(negedge clk);
      checks++;
      if (grant !== egrant || (egrant && int'(slot) != eslot)) begin
        failures++;
        $display("t=%0d class %0d: grant %0d slot %0d expected %0d %0d", t, c, grant, slot, egrant, eslot);
      end
      for (int i = 0; i < NCLS; i++) begin
        checks++;
        if (int'(count[i]) != ref_count[i]) begin failures++; $display("count[%0d] %0d expected %0d", i, count[i], ref_count[i]); end
      end
      @(negedge clk);
    end
    for (int i = 0; i < NCLS; i++) begin
      checks++;
      if (int'(count[i]) < NSLOT / NCLS - 1 || int'(count[i]) > NSLOT / NCLS + 1) begin
        failures++; $display("class %0d not balanced: %0d", i, count[i]);
      end
    end
    checks++;
    if (replaced == 0 || rejected == 0) begin failures++; $display("replacement/rejection never exercised"); end
    $display("replaced=%0d rejected=%0d", replaced, rejected);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
