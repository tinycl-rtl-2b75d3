// tb_tinycl_cu: self-checking test of the control unit.
// A stand-in for the processing unit answers every command with done a few
// cycles later and records it. For a conv-conv-dense network the test checks
// the whole command sequence (operation, sizes, sources, bases, gradient
// memory selection, ReLU / mask flags) of a training step, the loss
// handshake, and the shorter sequence of inference (train = 0).
module tb_tinycl_cu;
  import tinycl_pkg::*;

  logic clk = 0, rst_n = 0, start = 0, train = 0, loss_ack = 0, pu_done = 0;
  logic [3:0] nl;
  layer_t layers [3];
  addr_t sample_base, logits_base;
  logic busy, done, loss_req, pu_start;
  pu_cmd_t pu_cmd;
  pu_cmd_t log_q [$];
  int checks = 0, failures = 0;

  tinycl_cu #(.NL_MAX(3)) dut (.*);

  always #5 clk = ~clk;

  // processing unit stand-in
  initial begin
    pu_done = 0;
    forever begin
      @(posedge clk);
      if (pu_start) begin
        log_q.push_back(pu_cmd);
        repeat (3) @(posedge clk);
        #1 pu_done = 1;
        @(posedge clk);
        #1 pu_done = 0;
      end
    end
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_cmd(input int i, input op_e op, input bit ftrain, input int fbase,
                            input int fout, input int kbase, input bit gsel, input bit relu, input bit mask);
    pu_cmd_t c;
    checks++;
    if (i >= log_q.size()) begin failures++; $display("command %0d missing", i); return; end
    c = log_q[i];
    if (c.op != op || c.fsrc_train != ftrain || int'(c.f_base) != fbase || c.k_base != addr_t'(kbase)
        || c.g_sel != gsel || c.relu != relu || c.mask != mask
        || (op inside {OP_CONV_FWD, OP_DENSE_FWD} && int'(c.f_out_base) != fout)) begin
      failures++;
      $display("command %0d: op %s ftrain %0d fbase %0d fout %0d kbase %0d gsel %0d relu %0d mask %0d",
               i, c.op.name(), c.fsrc_train, c.f_base, c.f_out_base, c.k_base, c.g_sel, c.relu, c.mask);
    end
  endtask

  initial begin
    nl = 3;
    layers[0] = '{dense: 0, h: 32, w: 32, n_out: 8,  relu: 1, k_base: 0,   in_base: 0};
    layers[1] = '{dense: 0, h: 32, w: 32, n_out: 8,  relu: 1, k_base: 72,  in_base: 1024};
    layers[2] = '{dense: 1, h: 32, w: 32, n_out: 10, relu: 0, k_base: 144, in_base: 2048};
    sample_base = 24'd5120; logits_base = 24'd4000;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // training step
    train = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!loss_req) @(negedge clk);
    checks++;
    if (log_q.size() != 3) begin failures++; $display("%0d commands before loss", log_q.size()); end
    repeat (5) @(negedge clk);
    checks++;
    if (log_q.size() != 3 || !loss_req) begin failures++; $display("did not wait for loss_ack"); end
    loss_ack = 1; @(negedge clk); loss_ack = 0;
    while (!done) @(negedge clk);
    expect_cmd(0, OP_CONV_FWD,  1, 5120, 1024, 0,   0, 1, 0);
    expect_cmd(1, OP_CONV_FWD,  0, 1024, 2048, 72,  0, 1, 0);
    expect_cmd(2, OP_DENSE_FWD, 0, 2048, 4000, 144, 0, 0, 0);
    expect_cmd(3, OP_DENSE_GP,  0, 2048, 0,    144, 0, 0, 1);
    expect_cmd(4, OP_DENSE_WD,  0, 2048, 0,    144, 0, 0, 0);
    expect_cmd(5, OP_CONV_GP,   0, 1024, 0,    72,  1, 0, 1);
    expect_cmd(6, OP_CONV_KG,   0, 1024, 0,    72,  1, 0, 0);
    expect_cmd(7, OP_CONV_KG,   1, 5120, 0,    0,   0, 0, 0);
    checks++;
    if (log_q.size() != 8) begin failures++; $display("%0d commands in a training step", log_q.size()); end
    // inference only
    log_q.delete();
    train = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) begin
      checks++;
      if (loss_req) begin failures++; $display("loss_req in inference"); break; end
      @(negedge clk);
    end
    checks++;
    if (log_q.size() != 3) begin failures++; $display("%0d commands in inference", log_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
