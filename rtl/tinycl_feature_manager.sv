// tinycl_feature_manager: the sliding-window buffer in front of the MACs.
//
// Holds the 3x3 window of 128-bit pixels (8 channels each) that the nine
// MACs read, win[3*row + col] with row/col 0..2 meaning offsets -1..+1 from
// the window centre. On each cycle with load = 1 it applies one snake step:
// six pixels move one place and the three pixels in new_pix enter from the
// side given by move (RIGHT: new right column, LEFT: new left column, DOWN:
// new bottom row, UP: new top row, each listed top-to-bottom or
// left-to-right). STAY keeps the window. The caller puts zeros in new_pix
// for pixels outside the map, which gives the zero padding.
// Reusing 6 of 9 pixels per step follows the architecture; the register
// layout is this design's. The window is not reset: the address manager
// always fills it before it is used.
module tinycl_feature_manager
  import tinycl_pkg::*;
(
  input  logic  clk,
  input  logic  load,
  input  move_e move,
  input  word_t new_pix [3],
  output word_t win     [9]
);

  word_t win_q [9];

  always_ff @(posedge clk) begin
    if (load) begin
      unique case (move)
        MV_RIGHT: for (int i = 0; i < 3; i++) begin
          win_q[3*i+0] <= win_q[3*i+1];
          win_q[3*i+1] <= win_q[3*i+2];
          win_q[3*i+2] <= new_pix[i];
        end
        MV_LEFT: for (int i = 0; i < 3; i++) begin
          win_q[3*i+2] <= win_q[3*i+1];
          win_q[3*i+1] <= win_q[3*i+0];
          win_q[3*i+0] <= new_pix[i];
        end
        MV_DOWN: for (int j = 0; j < 3; j++) begin
          win_q[j]     <= win_q[3+j];
          win_q[3+j]   <= win_q[6+j];
          win_q[6+j]   <= new_pix[j];
        end
        MV_UP: for (int j = 0; j < 3; j++) begin
          win_q[6+j]   <= win_q[3+j];
          win_q[3+j]   <= win_q[j];
          win_q[j]     <= new_pix[j];
        end
        default: ;
      endcase
    end
  end

  assign win = win_q;

endmodule
