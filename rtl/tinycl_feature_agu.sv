// tinycl_feature_agu: feature address manager, the counter engine that
// walks the processing unit through a layer computation, one step per cycle.
//
// Convolution modes (dense = 0): the 3x3 window centre visits every pixel of
// an h x w map in a snake-like order. Row 0 is walked left to right, then the
// window moves down one row and the column counter runs backwards instead of
// restarting at column 0, and so on. Every step therefore shares 6 of its 9
// window pixels with the previous one and only 3 new pixels are fetched; the
// move output says from which side they enter. When the map is finished the
// channel counter k advances. This implementation then walks the next sweep
// back the way it came (rows in the opposite direction) starting from the
// pixel where the last one ended, so the window already in the buffer is
// reused (move = STAY) and a new channel costs no refill. Before the first
// sweep two fill steps (fill = 1, centre columns -2 and -1) load the left
// and centre window columns. A conv computation takes 2 + nsweep*h*w steps.
//
// Dense modes (dense = 1): k counts the outputs (n_out) and pb the 8-pixel
// blocks of the flattened input (npb). gp_order = 0 runs k outer / pb inner
// (forward and weight update), gp_order = 1 runs pb outer / k inner (gradient
// propagation). first / last mark the first and last step of each inner run.
//
// Interface: pulse start for one cycle while idle; step_valid is then high
// for one step per cycle and done pulses with the final step. The snake and
// the channel counter follow the architecture; the fill steps, the reversed
// walk between channels and the dense loop orders are this design's choices.
module tinycl_feature_agu
  import tinycl_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          dense,
  input  logic          gp_order,
  input  logic [SW-1:0] h,
  input  logic [SW-1:0] w,
  input  logic [NW-1:0] nsweep,   // conv: channel sweeps; dense: outputs
  input  logic [AW-1:0] npb,      // dense: number of 8-pixel blocks
  output logic          busy,
  output logic          step_valid,
  output logic          fill,
  output move_e         move,
  output logic signed [SW+1:0] r,
  output logic signed [SW+1:0] c,
  output logic [NW-1:0] k,
  output logic [AW-1:0] pb,
  output logic          first,
  output logic          last,
  output logic          done
);

  typedef logic signed [SW+1:0] pos_t;

  logic          run_q;
  logic [1:0]    fill_q;       // fill steps still to go
  logic          hdir_q;       // 1: moving right
  logic          vdir_q;       // 1: moving down
  logic          first_q;
  move_e         move_q;
  pos_t          r_q, c_q;
  logic [NW-1:0] k_q;
  logic [AW-1:0] pb_q;

  pos_t hs, ws;
  logic row_end, last_row, sweep_end, last_sweep;
  logic inner_last, outer_last;

  always_comb begin
    hs = pos_t'({2'b00, h});
    ws = pos_t'({2'b00, w});
    row_end    = hdir_q ? (c_q == ws - 1) : (c_q == 0);
    last_row   = vdir_q ? (r_q == hs - 1) : (r_q == 0);
    sweep_end  = row_end && last_row;
    last_sweep = (k_q == nsweep - 1'b1);
    inner_last = gp_order ? (k_q == nsweep - 1'b1) : (pb_q == npb - 1'b1);
    outer_last = gp_order ? (pb_q == npb - 1'b1) : (k_q == nsweep - 1'b1);
  end

  assign busy       = run_q;
  assign step_valid = run_q;
  assign fill       = run_q && !dense && (fill_q != 2'd0);
  assign move       = move_q;
  assign r          = r_q;
  assign c          = c_q;
  assign k          = k_q;
  assign pb         = pb_q;
  assign first      = run_q && (dense ? (gp_order ? (k_q == '0) : (pb_q == '0)) : (fill_q == 2'd0 && first_q));
  assign last       = run_q && (dense ? inner_last : (fill_q == 2'd0 && sweep_end));
  assign done       = run_q && (dense ? (inner_last && outer_last) : (fill_q == 2'd0 && sweep_end && last_sweep));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run_q   <= 1'b0;
      fill_q  <= 2'd0;
      hdir_q  <= 1'b1;
      vdir_q  <= 1'b1;
      first_q <= 1'b0;
      move_q  <= MV_RIGHT;
      r_q     <= '0;
      c_q     <= '0;
      k_q     <= '0;
      pb_q    <= '0;
    end else if (!run_q) begin
      if (start) begin
        run_q   <= 1'b1;
        fill_q  <= dense ? 2'd0 : 2'd2;
        hdir_q  <= 1'b1;
        vdir_q  <= 1'b1;
        first_q <= 1'b1;
        move_q  <= MV_RIGHT;
        r_q     <= '0;
        c_q     <= dense ? pos_t'(0) : pos_t'(-2);
        k_q     <= '0;
        pb_q    <= '0;
      end
    end else if (done) begin
      run_q <= 1'b0;
    end else if (dense) begin
      if (gp_order) begin
        if (inner_last) begin k_q <= '0; pb_q <= pb_q + 1'b1; end
        else k_q <= k_q + 1'b1;
      end else begin
        if (inner_last) begin pb_q <= '0; k_q <= k_q + 1'b1; end
        else pb_q <= pb_q + 1'b1;
      end
    end else if (fill_q != 2'd0) begin
      fill_q <= fill_q - 2'd1;
      c_q    <= c_q + 1;
      move_q <= MV_RIGHT;
    end else begin
      first_q <= 1'b0;
      if (!row_end) begin
        c_q    <= hdir_q ? c_q + 1 : c_q - 1;
        move_q <= hdir_q ? MV_RIGHT : MV_LEFT;
      end else if (!last_row) begin
        r_q    <= vdir_q ? r_q + 1 : r_q - 1;
        move_q <= vdir_q ? MV_DOWN : MV_UP;
        hdir_q <= !hdir_q;
      end else begin
        // end of the map: next channel, walked back from where we are
        k_q     <= k_q + 1'b1;
        move_q  <= MV_STAY;
        first_q <= 1'b1;
        hdir_q  <= !hdir_q;
        vdir_q  <= !vdir_q;
      end
    end
  end

endmodule
