// tb_tinycl_feature_manager: self-checking test of the sliding-window buffer.
// A random 7x9 map (8 channels per pixel) is walked by a random sequence of
// single-pixel moves (and STAY); each step feeds the three pixels that enter
// the window, zero outside the map, and the whole 3x3 window is compared
// with the pixels around the tracked centre after every step.
module tb_tinycl_feature_manager;
  import tinycl_pkg::*;

  localparam int H = 7, W = 9;
  logic  clk = 0, load = 0;
  move_e move;
  word_t new_pix [3];
  word_t win [9];
  word_t map [H][W];
  int checks = 0, failures = 0;

  tinycl_feature_manager dut (.clk, .load, .move, .new_pix, .win);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic word_t px(input int y, input int x);
    return (y >= 0 && y < H && x >= 0 && x < W) ? map[y][x] : '0;
  endfunction

  task automatic step(input move_e m, input int r, input int c);
    // (r, c) is the centre after the move
    move = m;
    for (int i = 0; i < 3; i++) begin
      unique case (m)
        MV_RIGHT: new_pix[i] = px(r - 1 + i, c + 1);
        MV_LEFT:  new_pix[i] = px(r - 1 + i, c - 1);
        MV_DOWN:  new_pix[i] = px(r + 1, c - 1 + i);
        MV_UP:    new_pix[i] = px(r - 1, c - 1 + i);
        default:  new_pix[i] = {4{$urandom}};  // must be ignored
      endcase
    end
    load = 1;
    @(negedge clk);
    load = 0;
  endtask

  initial begin
    int r, c;
    move = MV_STAY;
    for (int i = 0; i < 3; i++) new_pix[i] = '0;
    foreach (map[y, x]) map[y][x] = {$urandom, $urandom, $urandom, $urandom};
    @(negedge clk);
    // fill: centre (0,-2) -> (0,-1) -> (0,0), each a RIGHT move
    step(MV_RIGHT, 0, -2);
    step(MV_RIGHT, 0, -1);
    step(MV_RIGHT, 0, 0);
    r = 0; c = 0;
    for (int t = 0; t < 600; t++) begin
      move_e m;
      int nr, nc;
      // hold load low for a cycle now and then: the window must not change
      if (t % 17 == 0) @(negedge clk);
      do begin
        m = move_e'($urandom_range(0, 4));
        nr = r; nc = c;
        unique case (m)
          MV_RIGHT: nc = c + 1;
          MV_LEFT:  nc = c - 1;
          MV_DOWN:  nr = r + 1;
          MV_UP:    nr = r - 1;
          default: ;
        endcase
      end while (nr < 0 || nr >= H || nc < 0 || nc >= W);
      r = nr; c = nc;
      step(m, r, c);
      for (int i = 0; i < 3; i++)
        for (int j = 0; j < 3; j++) begin
          checks++;
          if (win[3*i+j] !== px(r - 1 + i, c - 1 + j)) begin
            failures++;
            $display("t=%0d centre (%0d,%0d) window[%0d][%0d] wrong", t, r, c, i, j);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
