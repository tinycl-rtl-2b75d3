// tb_tinycl_feature_agu: self-checking test of the feature address manager.
// Convolution mode: checks the two fill steps, that every sweep visits every
// pixel of the map exactly once, that each step moves the window by exactly
// one pixel in the direction its move code says (STAY only at a new sweep),
// the first/last flags, and the step count 2 + nsweep*h*w. Dense modes:
// checks the loop order and the first/last flags against nested loops.
module tb_tinycl_feature_agu;
  import tinycl_pkg::*;

  logic clk = 0, rst_n = 0, start = 0, dense = 0, gp_order = 0;
  logic [SW-1:0] h, w;
  logic [NW-1:0] nsweep;
  logic [AW-1:0] npb;
  logic busy, step_valid, fill, first, last, done;
  move_e move;
  logic signed [SW+1:0] r, c;
  logic [NW-1:0] k;
  logic [AW-1:0] pb;
  int checks = 0, failures = 0;

  tinycl_feature_agu dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s (r=%0d c=%0d k=%0d)", msg, r, c, k); end
  endtask

  task automatic run_conv(input int hh, input int ww, input int ns);
    int visits [32][32];
    int steps, pr, pc, pk, nfill;
    bit have_prev;
    h = SW'(hh); w = SW'(ww); nsweep = NW'(ns); dense = 0; npb = '0;
    for (int s = 0; s < ns; s++) begin
      foreach (visits[i, j]) visits[i][j] = 0;
      if (s == 0) begin
        @(negedge clk); start = 1; @(negedge clk); start = 0;
        steps = 0; nfill = 0; have_prev = 0;
      end
      for (int n = 0; ; ) begin
        check(step_valid, "step_valid low during run");
        steps++;
        if (fill) begin
          nfill++;
          check(move == MV_RIGHT && r == 0 && c == -3 + nfill, "fill step");
        end else begin
          check(r >= 0 && r < hh && c >= 0 && c < ww, "position in map");
          visits[r][c]++;
          if (have_prev) begin
            unique case (move)
              MV_RIGHT: check(r == pr && c == pc + 1, "RIGHT");
              MV_LEFT:  check(r == pr && c == pc - 1, "LEFT");
              MV_DOWN:  check(r == pr + 1 && c == pc, "DOWN");
              MV_UP:    check(r == pr - 1 && c == pc, "UP");
              MV_STAY:  check(r == pr && c == pc && k == pk + 1 && first, "STAY at new sweep");
              default:  check(0, "bad move");
            endcase
          end else begin
            check(r == 0 && c == 0 && first && k == 0, "first pixel");
          end
          check(first == (n == 0), "first flag");
          check(k == NW'(s), "channel counter");
          pr = r; pc = c; pk = k; have_prev = 1;
          n++;
        end
        if (last) begin
          check(!fill, "last on fill");
          check(done == (s == ns - 1), "done flag");
          @(negedge clk);
          break;
        end
        @(negedge clk);
      end
      for (int i = 0; i < hh; i++)
        for (int j = 0; j < ww; j++) check(visits[i][j] == 1, "each pixel once per sweep");
    end
    check(steps == 2 + ns * hh * ww, "step count");
    check(!step_valid, "idle after done");
  endtask

  task automatic run_dense(input int hw, input int nout, input bit gpo);
    int np;
    np = hw / 8;
    h = SW'(hw / 8); w = SW'(8); nsweep = NW'(nout); npb = AW'(np); dense = 1; gp_order = gpo;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    for (int a = 0; a < (gpo ? np : nout); a++)
      for (int b = 0; b < (gpo ? nout : np); b++) begin
        check(step_valid && !fill, "dense step valid");
        check(gpo ? (pb == AW'(a) && k == NW'(b)) : (k == NW'(a) && pb == AW'(b)), "dense order");
        check(first == (b == 0) && last == (b == (gpo ? nout : np) - 1), "dense first/last");
        check(done == ((a == (gpo ? np : nout) - 1) && (b == (gpo ? nout : np) - 1)), "dense done");
        @(negedge clk);
      end
    check(!step_valid, "dense idle after done");
  endtask

  initial begin
    h = 0; w = 0; nsweep = 0; npb = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_conv(3, 4, 3);
    run_conv(4, 4, 2);
    run_conv(5, 3, 1);
    run_conv(6, 5, 4);
    run_dense(32, 3, 0);
    run_dense(24, 5, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
