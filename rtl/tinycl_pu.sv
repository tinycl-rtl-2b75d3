// tinycl_pu: TinyCL processing unit.
//
// Runs one layer computation per command: convolution forward (CONV_FWD),
// kernel gradient with update (CONV_KG), gradient propagation (CONV_GP),
// dense forward (DENSE_FWD), dense gradient propagation (DENSE_GP) and dense
// weight derivative with update (DENSE_WD). Inside: the feature address
// manager (tinycl_feature_agu), the feature, kernel and gradient managers,
// nine reconfigurable MACs and the multi-operand adder.
//
// Pipeline, one step per cycle, no stalls once running:
//   A  the address manager emits a step; read addresses go to the memories
//   B  read data arrive; the sliding window shifts in 3 new pixels (conv) or
//      the 8+8 dense operand words are registered
//   C  the MACs and the adder tree compute; results are rounded to Q4.12 and
//      the write is registered
//   D  the memory write takes place
//
// Data layouts (word = 8 lanes of 16 bits, lane = channel):
//   feature / gradient map, h x w x 8:  word base + r*w + c, lane = channel
//   conv output channel k:               word base + (k/8)*h*w + r*w + c, lane k%8
//   conv kernel K[co][ci][p]:            word k_base + 9*co + p, lane ci
//   dense weight W[(pix,ci), n]:         word k_base + n*h*w + pix, lane ci
//   dense outputs y[n] / loss gradient dY[n]:  word base + n/8, lane n%8
//
// How each computation maps onto the MACs:
//   CONV_FWD  MAC p (p = window position) multiplies window pixel p by the
//             kernel entry p over 8 input channels (multi-operand mode); the
//             adder sums the 9 MACs: one output value per cycle, snake order,
//             one output channel per sweep, optional ReLU.
//   CONV_GP   the same with the gradient map in the window and the kernel
//             turned by 180 degrees and transposed; one input-channel
//             gradient per cycle, multiplied by ReLU'(input) when mask = 1.
//   CONV_KG   MAC p multiplies window pixel p (8 input channels) by the
//             output gradient of the centre pixel, channel k (multi-adder
//             mode) and accumulates into its 8 partial sums, so after a sweep
//             MAC p holds dK[k][0..7][p]. The 72 results are then subtracted
//             from the kernel (learning rate 1) in 9 read-modify-write
//             cycles that overlap the next sweep.
//   DENSE_FWD 8 MACs take 8 pixels x 8 channels of input and weights per
//             cycle; all 64 products and the partial-sum register are added.
//             h*w/8 cycles per output.
//   DENSE_GP  MAC j holds the gradients of pixel j of the current 8-pixel
//             block in its partial sums and adds W x dY[n] for one n per
//             cycle: n_out cycles per block, then 8 words are written.
//   DENSE_WD  MAC j adds I x (-dY[n]) to the weights just read (multi-adder
//             mode, partial sum = weight) and the 64 updated weights are
//             written back: h*w/8 cycles per output.
// Which memory each computation reads and writes and the mapping of the
// convolutions onto the 9 MACs follow the architecture. The dense gradient
// propagation uses 8 pixels per MAC row (h*w/8*n_out cycles, which matches
// the 1,280 cycles reported for it) rather than the one-value-per-MAC scheme
// also described; the read-modify-write update and the ReLU masking are
// this design's choices. A conv sweep must be at least 12 pixels (h*w >= 12)
// so that kernel prefetch and kernel update finish within one sweep.
//
// Interface: pulse start with cmd while busy = 0; done pulses when the last
// write has been issued. Memory read data are expected one cycle after the
// address (tinycl_mem). Gradient reads go to memory g_sel, gradient writes to
// the other one; features come from the training data memory when
// cmd.fsrc_train (ports 0..2 only), otherwise from the partial feature memory.
// Lint note: Verilator reports rst_n as used both asynchronously and
// synchronously; the synchronous use is only the disable condition of the
// assertions at the end of this file, so the reset stays purely asynchronous
// in the circuit.
module tinycl_pu
  import tinycl_pkg::*;
#(
  parameter int unsigned NMAX_OUT = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  pu_cmd_t       cmd,
  output logic          busy,
  output logic          done,
  // feature reads (training data or partial feature memory)
  output logic [LANES-1:0] f_rd_en,
  output addr_t         f_rd_addr [LANES],
  input  word_t         f_rd_data [LANES],
  // partial feature memory write
  output logic [LANES-1:0] pf_wr_be,
  output addr_t         pf_wr_addr,
  output word_t         pf_wr_data,
  // kernel memory
  output logic [LANES-1:0] k_rd_en,
  output addr_t         k_rd_addr [LANES],
  input  word_t         k_rd_data [LANES],
  output logic [LANES-1:0][LANES-1:0] k_wr_be,
  output addr_t         k_wr_addr [LANES],
  output word_t         k_wr_data [LANES],
  // gradient memories (read one, write the other)
  output logic [2:0]    g_rd_en,
  output addr_t         g_rd_addr [3],
  input  word_t         g_rd_data [3],
  output logic [LANES-1:0][LANES-1:0] g_wr_be,
  output addr_t         g_wr_addr [LANES],
  output word_t         g_wr_data [LANES]
);

  typedef enum logic [1:0] {S_IDLE, S_PRE, S_RUN, S_DRAIN} state_e;

  typedef struct packed {
    logic          valid;
    logic          fill;
    move_e         move;
    logic [NW-1:0] k;
    addr_t         pb;
    logic          first;
    logic          last;
    logic signed [SW+1:0] r;
    logic signed [SW+1:0] c;
    logic [2:0]    inb;
  } step_t;

  state_e  state_q;
  pu_cmd_t cmd_q;
  logic    is_dense, is_fwd_like, is_kg, is_gp, is_dfwd, is_dgp, is_dwd;
  int      hw_i;
  logic [NW-1:0] nsweep;
  addr_t   npb;

  always_comb begin
    is_dense    = cmd_q.op inside {OP_DENSE_FWD, OP_DENSE_GP, OP_DENSE_WD};
    is_kg       = cmd_q.op == OP_CONV_KG;
    is_gp       = cmd_q.op == OP_CONV_GP;
    is_fwd_like = cmd_q.op inside {OP_CONV_FWD, OP_CONV_GP};
    is_dfwd     = cmd_q.op == OP_DENSE_FWD;
    is_dgp      = cmd_q.op == OP_DENSE_GP;
    is_dwd      = cmd_q.op == OP_DENSE_WD;
    hw_i        = int'(cmd_q.h) * int'(cmd_q.w);
    nsweep      = is_gp ? NW'(LANES) : cmd_q.n_out;
    npb         = addr_t'(hw_i / LANES);
  end

  // ---------------------------------------------------------------- stage A
  logic          agu_start, agu_busy, agu_valid, agu_fill, agu_first, agu_last, agu_done;
  move_e         agu_move;
  logic signed [SW+1:0] agu_r, agu_c;
  logic [NW-1:0] agu_k;
  addr_t         agu_pb;

  tinycl_feature_agu u_agu (
    .clk, .rst_n, .start(agu_start), .dense(is_dense), .gp_order(is_dgp),
    .h(cmd_q.h), .w(cmd_q.w), .nsweep, .npb,
    .busy(agu_busy), .step_valid(agu_valid), .fill(agu_fill), .move(agu_move),
    .r(agu_r), .c(agu_c), .k(agu_k), .pb(agu_pb), .first(agu_first),
    .last(agu_last), .done(agu_done)
  );

  // three new window pixels of the current step
  int   py [3], px [3];
  logic [2:0] inb;
  addr_t pix_addr [3];

  always_comb begin
    for (int i = 0; i < 3; i++) begin
      unique case (agu_move)
        MV_RIGHT: begin py[i] = int'(agu_r) - 1 + i; px[i] = int'(agu_c) + 1; end
        MV_LEFT:  begin py[i] = int'(agu_r) - 1 + i; px[i] = int'(agu_c) - 1; end
        MV_DOWN:  begin py[i] = int'(agu_r) + 1;     px[i] = int'(agu_c) - 1 + i; end
        MV_UP:    begin py[i] = int'(agu_r) - 1;     px[i] = int'(agu_c) - 1 + i; end
        default:  begin py[i] = -1;                  px[i] = -1; end
      endcase
      inb[i]      = (py[i] >= 0) && (py[i] < int'(cmd_q.h)) && (px[i] >= 0) && (px[i] < int'(cmd_q.w));
      pix_addr[i] = addr_t'(py[i] * int'(cmd_q.w) + px[i]);
    end
  end

  // kernel manager (conv forward / gradient propagation)
  logic          km_load, km_swap, km_ready, km_load_all, pre_kick_q;
  logic [NW-1:0] km_kidx;
  logic [LANES-1:0] km_rd_en;
  addr_t         km_rd_addr [LANES];
  word_t         kfront [9];

  tinycl_kernel_manager u_km (
    .clk, .rst_n, .load_start(km_load_all), .transposed(is_gp), .k_base(cmd_q.k_base),
    .kidx(km_kidx), .swap(km_swap), .rd_en(km_rd_en), .rd_addr(km_rd_addr),
    .rd_data(k_rd_data), .front(kfront), .back_ready(km_ready)
  );

  // gradient manager
  logic  gm_load, gm_ready, gm_rd_en;
  addr_t gm_rd_addr;
  step_t sB, sC;
  word_t gword_q;
  data_t gop;

  tinycl_grad_manager #(.NMAX(NMAX_OUT)) u_gm (
    .clk, .rst_n, .load_start(gm_load), .g_base(cmd_q.g_base), .n_out(cmd_q.n_out),
    .rd_en(gm_rd_en), .rd_addr(gm_rd_addr), .rd_data(g_rd_data[0]), .ready(gm_ready),
    .conv_kg(is_kg), .neg(is_dwd), .sel(sC.k), .g_word(gword_q), .gop
  );

  // kernel update (CONV_KG) read-modify-write
  logic          rmw_busy_q, rmw_cap_q;
  logic [3:0]    rmw_p_q, rmw_pcap_q;
  logic [NW-1:0] rmw_k_q;
  data_t         wb_q [9][LANES];

  // read ports
  always_comb begin
    f_rd_en = '0;
    k_rd_en = '0;
    g_rd_en = '0;
    for (int i = 0; i < LANES; i++) begin
      f_rd_addr[i] = '0;
      k_rd_addr[i] = '0;
    end
    for (int i = 0; i < 3; i++) g_rd_addr[i] = '0;

    if (is_dense) begin
      for (int j = 0; j < LANES; j++) begin
        f_rd_en[j]   = agu_valid;
        f_rd_addr[j] = cmd_q.f_base + addr_t'(agu_pb) * addr_t'(LANES) + addr_t'(j);
        k_rd_en[j]   = agu_valid;
        k_rd_addr[j] = cmd_q.k_base + addr_t'(agu_k) * addr_t'(hw_i) + addr_t'(agu_pb) * addr_t'(LANES) + addr_t'(j);
      end
      g_rd_en[0]   = gm_rd_en;
      g_rd_addr[0] = gm_rd_addr;
    end else begin
      for (int i = 0; i < 3; i++) begin
        if (is_gp) begin
          g_rd_en[i]   = agu_valid && inb[i];
          g_rd_addr[i] = cmd_q.g_base + pix_addr[i];
        end else begin
          f_rd_en[i]   = agu_valid && inb[i];
          f_rd_addr[i] = cmd_q.f_base + pix_addr[i];
        end
      end
      if (is_kg) begin
        g_rd_en[0]   = agu_valid && !agu_fill;
        g_rd_addr[0] = cmd_q.g_base + addr_t'(int'(agu_r) * int'(cmd_q.w) + int'(agu_c));
        k_rd_en[0]   = rmw_busy_q;
        k_rd_addr[0] = cmd_q.k_base + addr_t'(rmw_k_q) * 9 + addr_t'(rmw_p_q);
      end else begin
        if (is_gp) begin  // input feature of the centre pixel, for ReLU'
          f_rd_en[3]   = agu_valid && !agu_fill;
          f_rd_addr[3] = cmd_q.f_base + addr_t'(int'(agu_r) * int'(cmd_q.w) + int'(agu_c));
        end
        k_rd_en   = km_rd_en;
        k_rd_addr = km_rd_addr;
      end
    end
  end

  // ---------------------------------------------------------------- control
  always_comb begin
    agu_start = 1'b0;
    km_load   = 1'b0;
    km_swap   = 1'b0;
    km_kidx   = '0;
    if (state_q == S_PRE && !pre_kick_q) begin
      if (is_fwd_like) begin
        if (km_ready) begin
          km_swap   = 1'b1;
          agu_start = 1'b1;
          if (nsweep > 1) begin km_load = 1'b1; km_kidx = 1; end
        end
      end else if (is_dgp || is_dwd) begin
        agu_start = gm_ready;
      end else begin
        agu_start = 1'b1;
      end
    end
    // next output channel enters stage C: front <= back, prefetch the next
    if (sB.valid && sB.first && !is_dense && is_fwd_like && sB.k != '0) begin
      km_swap = 1'b1;
      if (sB.k + 1'b1 < nsweep) begin km_load = 1'b1; km_kidx = sB.k + 1'b1; end
    end
  end


  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q    <= S_IDLE;
      cmd_q      <= '0;
      pre_kick_q <= 1'b0;
      done       <= 1'b0;
    end else begin
      done       <= 1'b0;
      pre_kick_q <= 1'b0;
      unique case (state_q)
        S_IDLE:  if (start) begin cmd_q <= cmd; state_q <= S_PRE; pre_kick_q <= 1'b1; end
        S_PRE:   if (agu_start) state_q <= S_RUN;
        S_RUN:   if (agu_done) state_q <= S_DRAIN;
        S_DRAIN: if (!sB.valid && !sC.valid && !rmw_busy_q && !rmw_cap_q) begin
                   state_q <= S_IDLE;
                   done    <= 1'b1;
                 end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assign busy = (state_q != S_IDLE);

  // the kick is folded into the load strobes one cycle into S_PRE
  assign km_load_all = km_load || (pre_kick_q && is_fwd_like);
  assign gm_load     = pre_kick_q && (is_dgp || is_dwd);

  // ---------------------------------------------------------------- stage B
  word_t win [9];
  word_t new_pix [3];
  word_t opF_q [LANES], opW_q [LANES];
  word_t maskw_q;

  always_comb begin
    for (int i = 0; i < 3; i++) begin
      if (!sB.inb[i])  new_pix[i] = '0;
      else if (is_gp)  new_pix[i] = g_rd_data[i];
      else             new_pix[i] = f_rd_data[i];
    end
  end

  tinycl_feature_manager u_fm (
    .clk, .load(sB.valid && !is_dense), .move(sB.move), .new_pix, .win
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sB <= '0;
      sC <= '0;
    end else begin
      sB.valid <= agu_valid;
      sB.fill  <= agu_fill;
      sB.move  <= agu_move;
      sB.k     <= agu_k;
      sB.pb    <= agu_pb;
      sB.first <= agu_first;
      sB.last  <= agu_last;
      sB.r     <= agu_r;
      sB.c     <= agu_c;
      sB.inb   <= inb;
      sC       <= sB;
    end
  end

  always_ff @(posedge clk) begin
    if (sB.valid) begin
      gword_q <= g_rd_data[0];
      maskw_q <= f_rd_data[3];
      for (int j = 0; j < LANES; j++) begin
        opF_q[j] <= f_rd_data[j];
        opW_q[j] <= k_rd_data[j];
      end
    end
  end

  // ---------------------------------------------------------------- stage C
  data_t d1 [NMAC][LANES];
  data_t d2 [NMAC][LANES];
  prod_t psin  [NMAC][LANES];
  prod_t psout [NMAC][LANES];
  prod_t psum_q [NMAC][LANES];
  prod_t mop [NMAC];
  logic  madd;
  logic signed [39:0] acc_q, acc_in, sum;
  data_t rounded, res;

  always_comb begin
    madd = is_kg || is_dgp || is_dwd;
    for (int m = 0; m < NMAC; m++) begin
      for (int l = 0; l < LANES; l++) begin
        d1[m][l]   = '0;
        d2[m][l]   = '0;
        psin[m][l] = '0;
        if (!is_dense) begin
          d1[m][l] = lane(win[m], l);
          d2[m][l] = is_kg ? gop : lane(kfront[m], l);
          if (is_kg && !sC.first) psin[m][l] = psum_q[m][l];
        end else if (m < LANES) begin
          if (is_dfwd) begin
            d1[m][l] = lane(opF_q[m], l);
            d2[m][l] = lane(opW_q[m], l);
          end else if (is_dgp) begin
            d1[m][l] = lane(opW_q[m], l);
            d2[m][l] = gop;
            if (!sC.first) psin[m][l] = psum_q[m][l];
          end else begin
            d1[m][l]   = lane(opF_q[m], l);
            d2[m][l]   = gop;
            psin[m][l] = prod_t'(lane(opW_q[m], l)) <<< FRAC;
          end
        end
      end
    end
  end

  for (genvar m = 0; m < NMAC; m++) begin : g_mac
    tinycl_mac u_mac (
      .multi_adder(madd), .data1(d1[m]), .data2(d2[m]), .psum_in(psin[m]),
      .mop_out(mop[m]), .psum_out(psout[m])
    );
  end

  assign acc_in = (is_dfwd && !sC.first) ? acc_q : '0;

  tinycl_mop_adder #(.N(NMAC), .SUM_W(40)) u_adder (
    .in(mop), .acc_in, .sum, .rounded
  );

  // ReLU (forward) / ReLU' masking (gradient propagation)
  always_comb begin
    res = rounded;
    if (cmd_q.op == OP_CONV_FWD && cmd_q.relu && rounded < 0) res = '0;
    if (is_gp && cmd_q.mask && lane(maskw_q, 32'(sC.k % NW'(LANES))) <= 0) res = '0;
  end

  logic cvalid;
  int   cpix;
  assign cvalid = sC.valid && !sC.fill;
  assign cpix   = int'(sC.r) * int'(cmd_q.w) + int'(sC.c);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pf_wr_be   <= '0;
      g_wr_be    <= '0;
      rmw_busy_q <= 1'b0;
      rmw_cap_q  <= 1'b0;
      rmw_p_q    <= '0;
      rmw_pcap_q <= '0;
      rmw_k_q    <= '0;
      acc_q      <= '0;
    end else begin
      pf_wr_be <= '0;
      g_wr_be  <= '0;
      if (cvalid && is_dfwd) acc_q <= sum;
      // conv forward: one output value
      if (cvalid && cmd_q.op == OP_CONV_FWD) begin
        pf_wr_be[sC.k % NW'(LANES)] <= 1'b1;
        pf_wr_addr <= cmd_q.f_out_base + addr_t'(sC.k / NW'(LANES)) * addr_t'(hw_i) + addr_t'(cpix);
        pf_wr_data <= {LANES{res}};
      end
      // dense forward: one output after the last block
      if (cvalid && is_dfwd && sC.last) begin
        pf_wr_be[sC.k % NW'(LANES)] <= 1'b1;
        pf_wr_addr <= cmd_q.f_out_base + addr_t'(sC.k / NW'(LANES));
        pf_wr_data <= {LANES{rounded}};
      end
      // conv gradient propagation: one gradient value
      if (cvalid && is_gp) begin
        g_wr_be[0][sC.k % NW'(LANES)] <= 1'b1;
        g_wr_addr[0] <= cmd_q.g_wr_base + addr_t'(cpix);
        g_wr_data[0] <= {LANES{res}};
      end
      // dense gradient propagation: 8 words after the last output
      if (cvalid && is_dgp && sC.last) begin
        for (int j = 0; j < LANES; j++) begin
          g_wr_be[j]   <= '1;
          g_wr_addr[j] <= cmd_q.g_wr_base + addr_t'(sC.pb) * addr_t'(LANES) + addr_t'(j);
          for (int l = 0; l < LANES; l++)
            g_wr_data[j][l*DW +: DW] <= (cmd_q.mask && lane(opF_q[j], l) <= 0)
                                        ? '0 : round_sat(48'(psout[j][l]));
        end
      end
      // kernel update: start of the read-modify-write after a sweep
      rmw_cap_q  <= rmw_busy_q;
      rmw_pcap_q <= rmw_p_q;
      if (cvalid && is_kg && sC.last) begin
        rmw_busy_q <= 1'b1;
        rmw_p_q    <= '0;
        rmw_k_q    <= sC.k;
      end else if (rmw_busy_q) begin
        if (rmw_p_q == 4'd8) rmw_busy_q <= 1'b0;
        rmw_p_q <= rmw_p_q + 4'd1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (cvalid && (is_kg || is_dgp)) psum_q <= psout;
    if (cvalid && is_kg && sC.last) begin
      for (int m = 0; m < NMAC; m++)
        for (int l = 0; l < LANES; l++) wb_q[m][l] <= round_sat(48'(psout[m][l]));
    end
  end

  // kernel memory writes: dense weight update (8 words per cycle) or the
  // kernel update read-modify-write (port 0)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      k_wr_be <= '0;
    end else begin
      k_wr_be <= '0;
      if (cvalid && is_dwd) begin
        for (int j = 0; j < LANES; j++) begin
          k_wr_be[j]   <= '1;
          k_wr_addr[j] <= cmd_q.k_base + addr_t'(sC.k) * addr_t'(hw_i) + addr_t'(sC.pb) * addr_t'(LANES) + addr_t'(j);
          for (int l = 0; l < LANES; l++)
            k_wr_data[j][l*DW +: DW] <= round_sat(48'(psout[j][l]));
        end
      end
      if (rmw_cap_q) begin
        k_wr_be[0]   <= '1;
        k_wr_addr[0] <= cmd_q.k_base + addr_t'(rmw_k_q) * 9 + addr_t'(rmw_pcap_q);
        for (int l = 0; l < LANES; l++)
          k_wr_data[0][l*DW +: DW] <= round_sat((48'(lane(k_rd_data[0], l)) - 48'(wb_q[rmw_pcap_q][l])) <<< FRAC);
      end
    end
  end

  // a conv sweep must outlast the kernel prefetch and the kernel update
  a_sweep_len: assert property (@(posedge clk) disable iff (!rst_n)
    (start && !busy && !(cmd.op inside {OP_DENSE_FWD, OP_DENSE_GP, OP_DENSE_WD}))
      |-> (int'(cmd.h) * int'(cmd.w) >= 12));
  a_dense_blocks: assert property (@(posedge clk) disable iff (!rst_n)
    (start && !busy && (cmd.op inside {OP_DENSE_FWD, OP_DENSE_GP, OP_DENSE_WD}))
      |-> ((int'(cmd.h) * int'(cmd.w)) % LANES == 0));
  a_kernel_ready: assert property (@(posedge clk) disable iff (!rst_n)
    km_swap |-> km_ready);

endmodule
