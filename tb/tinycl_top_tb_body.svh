// Body shared by the end-to-end testbenches of tinycl_top. The including
// module defines H, W (sample size), NSLOT, NC_MAX, SWORDS, PFD, KD, GD and
// instantiates tinycl_top as dut with the signals declared below.
//
// What it does: fills the training data memory through the GDumb slot
// manager (offering more samples than slots, so that class balancing
// replaces samples), loads random kernels and dense weights, then runs two
// training steps of a conv(3->8)+ReLU, conv(8->8)+ReLU, dense network with
// 2 and then NC2 classes (the class count grows as in class-incremental
// learning), and one inference pass. The host side computes dY from the
// logits between loss_req and loss_ack. An integer reference model of the
// same network (exact sums, one rounding per value, learning rate 1) runs
// alongside; logits and every word of the feature, kernel and both gradient
// memories are compared after each step. It also counts how often each
// mechanism of the design occurred and fails if one never did.

  import tinycl_pkg::*;

  localparam int HW = H * W;
  localparam int K0 = 0, K1 = 72, KD0 = 144;      // kernel memory bases
  localparam int P1 = 0, P2 = HW, PLOG = 2 * HW;  // feature memory bases

  logic clk = 0, rst_n = 0, start = 0, train = 0, loss_ack = 0;
  logic [3:0] nl;
  layer_t layers [3];
  logic [$clog2(NSLOT + 1)-1:0] sample_slot;
  addr_t logits_base;
  logic busy, done, loss_req;
  logic host_we = 0, host_re = 0;
  logic [2:0] host_sel;
  addr_t host_addr;
  logic [LANES-1:0] host_be;
  word_t host_wdata, host_rdata;
  logic gd_req = 0;
  logic [$clog2(NC_MAX)-1:0] gd_cls;
  logic gd_busy, gd_done, gd_grant;
  logic [$clog2(NSLOT + 1)-1:0] gd_slot;

  // reference copies of the memories
  word_t r_tr [NSLOT * SWORDS];
  word_t r_pf [PFD];
  word_t r_k  [KD];
  word_t r_g  [2][GD];
  int    slot_class [NSLOT];

  int checks = 0, failures = 0;
  int n_turn = 0, n_stay = 0, n_swap = 0, n_madd = 0, n_mop = 0, n_relu = 0, n_mask = 0;
  int n_gsel1 = 0, n_rmw = 0, n_replace = 0, n_infer = 0, n_classchg = 0;

  always #5 clk = ~clk;

  // cycles of every processing-unit command, from start to done. Conv ops
  // take one step per output pixel per filter/channel sweep, 8*h*w (8192 at
  // 32x32), plus a fixed pipeline overhead; dense ops n_out*h*w/8 (1280 for
  // 10 outputs at 32x32x8).
  localparam int OVH = 30;
  longint cyc_now = 0, cmd_t0 = 0;
  op_e    cmd_op;
  int     cmd_nc;
  int     n_cyc_checked = 0;
  always @(posedge clk) begin
    cyc_now++;
    if (rst_n && dut.pu_start) begin cmd_t0 = cyc_now; cmd_op = dut.pu_cmd.op; cmd_nc = int'(dut.pu_cmd.n_out); end
    if (rst_n && dut.pu_done) begin
      longint d, ideal;
      d = cyc_now - cmd_t0;
      ideal = (cmd_op inside {OP_CONV_FWD, OP_CONV_GP, OP_CONV_KG}) ? 8 * HW : cmd_nc * HW / 8;
      checks++; n_cyc_checked++;
      if (d < ideal || d > ideal + OVH) begin
        failures++;
        $display("command %s took %0d cycles, expected %0d..%0d", cmd_op.name(), d, ideal, ideal + OVH);
      end
      if (VERBOSE_CYC) $display("command %-12s %0d cycles (compute %0d)", cmd_op.name(), d, ideal);
    end
  end

  // mechanism counters
  always @(posedge clk) if (rst_n) begin
    if (dut.u_pu.agu_valid && dut.u_pu.agu_move inside {MV_DOWN, MV_UP} && !dut.u_pu.is_dense) n_turn++;
    if (dut.u_pu.agu_valid && dut.u_pu.agu_move == MV_STAY && !dut.u_pu.is_dense) n_stay++;
    if (dut.u_pu.km_swap) n_swap++;
    if (dut.u_pu.cvalid && dut.u_pu.madd) n_madd++;
    if (dut.u_pu.cvalid && !dut.u_pu.madd) n_mop++;
    if (dut.u_pu.cvalid && dut.u_pu.cmd_q.op == OP_CONV_FWD && dut.u_pu.rounded < 0) n_relu++;
    if (dut.u_pu.cvalid && dut.u_pu.is_gp && dut.u_pu.res == 0 && dut.u_pu.rounded != 0) n_mask++;
    if (dut.u_pu.busy && dut.u_pu.cmd_q.g_sel) n_gsel1++;
    if (dut.u_pu.rmw_cap_q) n_rmw++;
  end

  function automatic word_t rnd_word(input int mag, input int nl_used);
    word_t v;
    v = '0;
    for (int l = 0; l < nl_used; l++) v[l*DW +: DW] = 16'($signed($urandom_range(0, 2*mag)) - mag);
    return v;
  endfunction

  function automatic void setl(ref word_t wd, input int l, input data_t v);
    wd[l*DW +: DW] = v;
  endfunction

  // ------------------------------------------------------------ host port
  task automatic hwrite(input int sel, input int a, input word_t d, input logic [7:0] be);
    host_sel = 3'(sel); host_addr = addr_t'(a); host_wdata = d; host_be = be; host_we = 1;
    @(negedge clk);
    host_we = 0;
  endtask

  task automatic hread(input int sel, input int a, output word_t d);
    host_sel = 3'(sel); host_addr = addr_t'(a); host_re = 1;
    @(negedge clk);
    host_re = 0;
    d = host_rdata;
  endtask

  // ------------------------------------------------------ reference model
  // feature pixel: source 0 = training memory at base, 1 = feature memory
  function automatic data_t fpx(input bit pf, input int base, input int y, input int x, input int ch);
    if (y < 0 || y >= H || x < 0 || x >= W) return '0;
    return pf ? lane(r_pf[base + y*W + x], ch) : lane(r_tr[base + y*W + x], ch);
  endfunction
  function automatic data_t gpx(input int m, input int y, input int x, input int ch);
    if (y < 0 || y >= H || x < 0 || x >= W) return '0;
    return lane(r_g[m][y*W + x], ch);
  endfunction

  task automatic ref_conv_fwd(input bit pf, input int fb, input int ob, input int kb);
    word_t outw [HW];
    for (int p = 0; p < HW; p++) outw[p] = r_pf[ob + p];
    for (int k = 0; k < 8; k++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          longint s; data_t v;
          s = 0;
          for (int ci = 0; ci < 8; ci++)
            for (int m = 0; m < 3; m++)
              for (int n = 0; n < 3; n++)
                s += longint'(fpx(pf, fb, y+m-1, x+n-1, ci)) * longint'(lane(r_k[kb + 9*k + 3*m + n], ci));
          v = round_sat(48'(s));
          if (v < 0) v = 0;
          setl(outw[y*W + x], k, v);
        end
    for (int p = 0; p < HW; p++) r_pf[ob + p] = outw[p];
  endtask

  task automatic ref_conv_gp(input int gs, input int fb, input int kb);
    for (int ci = 0; ci < 8; ci++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          longint s; data_t v;
          s = 0;
          for (int co = 0; co < 8; co++)
            for (int m = 0; m < 3; m++)
              for (int n = 0; n < 3; n++)
                s += longint'(gpx(gs, y+m-1, x+n-1, co)) * longint'(lane(r_k[kb + 9*co + 8 - (3*m + n)], ci));
          v = round_sat(48'(s));
          if (fpx(1, fb, y, x, ci) <= 0) v = 0;
          setl(r_g[!gs][y*W + x], ci, v);
        end
  endtask

  task automatic ref_conv_kg(input int gs, input bit pf, input int fb, input int kb);
    for (int co = 0; co < 8; co++)
      for (int ci = 0; ci < 8; ci++)
        for (int m = 0; m < 3; m++)
          for (int n = 0; n < 3; n++) begin
            longint s; data_t d, kold;
            s = 0;
            for (int y = 0; y < H; y++)
              for (int x = 0; x < W; x++)
                s += longint'(gpx(gs, y, x, co)) * longint'(fpx(pf, fb, y+m-1, x+n-1, ci));
            d = round_sat(48'(s));
            kold = lane(r_k[kb + 9*co + 3*m + n], ci);
            setl(r_k[kb + 9*co + 3*m + n], ci, round_sat(48'(longint'(kold) - longint'(d)) <<< 12));
          end
  endtask

  task automatic ref_dense_fwd(input int nc);
    for (int n = 0; n < nc; n++) begin
      longint s;
      s = 0;
      for (int p = 0; p < HW; p++)
        for (int ci = 0; ci < 8; ci++)
          s += longint'(lane(r_pf[P2 + p], ci)) * longint'(lane(r_k[KD0 + n*HW + p], ci));
      setl(r_pf[PLOG + n/8], n%8, round_sat(48'(s)));
    end
  endtask

  task automatic ref_dense_gp(input int nc);
    for (int p = 0; p < HW; p++)
      for (int ci = 0; ci < 8; ci++) begin
        longint s; data_t v;
        s = 0;
        for (int n = 0; n < nc; n++)
          s += longint'(lane(r_k[KD0 + n*HW + p], ci)) * longint'(lane(r_g[0][n/8], n%8));
        v = round_sat(48'(s));
        if (lane(r_pf[P2 + p], ci) <= 0) v = 0;
        setl(r_g[1][p], ci, v);
      end
  endtask

  task automatic ref_dense_wd(input int nc);
    for (int n = 0; n < nc; n++)
      for (int p = 0; p < HW; p++)
        for (int ci = 0; ci < 8; ci++) begin
          longint s;
          s = (longint'(lane(r_k[KD0 + n*HW + p], ci)) <<< 12)
              - longint'(lane(r_pf[P2 + p], ci)) * longint'(lane(r_g[0][n/8], n%8));
          setl(r_k[KD0 + n*HW + p], ci, round_sat(48'(s)));
        end
  endtask

  // ---------------------------------------------------------- comparisons
  task automatic compare_all(input string tag);
    word_t d;
    int bad;
    bad = 0;
    for (int a = 0; a < 2 * HW + 2; a++) begin
      hread(1, a, d); checks++;
      if (d !== r_pf[a]) begin bad++; if (bad < 5) $display("%s: feature word %0d %h expected %h", tag, a, d, r_pf[a]); end
    end
    for (int a = 0; a < KD0 + NC_MAX * HW; a++) begin
      hread(2, a, d); checks++;
      if (d !== r_k[a]) begin bad++; if (bad < 5) $display("%s: kernel word %0d %h expected %h", tag, a, d, r_k[a]); end
    end
    for (int m = 0; m < 2; m++)
      for (int a = 0; a < HW; a++) begin
        hread(3 + m, a, d); checks++;
        if (d !== r_g[m][a]) begin bad++; if (bad < 5) $display("%s: grad%0d word %0d %h expected %h", tag, m, a, d, r_g[m][a]); end
      end
    failures += bad;
    $display("%s: memories compared, %0d mismatches", tag, bad);
  endtask

  // one training step (or inference when tr = 0) on the sample in slot s
  task automatic step(input int s, input int nc, input bit tr);
    int base, cyc;
    bit done_seen;
    word_t d;
    base = s * SWORDS;
    layers[2].n_out = NW'(nc);
    sample_slot = $bits(sample_slot)'(s);
    train = tr;
    // reference forward
    ref_conv_fwd(0, base, P1, K0);
    ref_conv_fwd(1, P1, P2, K1);
    ref_dense_fwd(nc);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cyc = 1;
    done_seen = 0;
    while (!(loss_req || done)) begin @(negedge clk); cyc++; end
    done_seen = done;
    $display("forward pass: %0d cycles", cyc);
    // logits
    hread(1, PLOG, d);
    if (nc > 8) begin word_t d2; hread(1, PLOG + 1, d2); end
    for (int n = 0; n < nc && n < 8; n++) begin
      checks++;
      if (lane(d, n) !== lane(r_pf[PLOG], n)) begin failures++; $display("logit %0d %h expected %h", n, lane(d, n), lane(r_pf[PLOG], n)); end
    end
    if (!tr) begin
      // done has already pulsed at the end of the forward pass
      checks++;
      if (!done_seen) begin failures++; $display("inference did not finish"); end
      n_infer++;
      return;
    end
    // host: dY = (y - onehot(label)) / 2^DY_SHIFT. The shift keeps the
    // weights, after a learning-rate-1 update, within the range where the
    // 32-bit MAC sums do not wrap.
    begin
      word_t dyw [2];
      dyw[0] = '0; dyw[1] = '0;
      for (int n = 0; n < nc; n++) begin
        data_t yv;
        yv = lane(r_pf[PLOG + n/8], n%8);
        setl(dyw[n/8], n%8, data_t'((int'(yv) - ((n == slot_class[s]) ? 4096 : 0)) >>> DY_SHIFT));
      end
      for (int wi = 0; wi < 2; wi++) begin hwrite(3, wi, dyw[wi], 8'hff); r_g[0][wi] = dyw[wi]; end
    end
    loss_ack = 1; @(negedge clk); loss_ack = 0;
    cyc = 0;
    while (!done) begin @(negedge clk); cyc++; end
    $display("backward pass: %0d cycles", cyc);
    // reference backward, in the control unit's order
    ref_dense_gp(nc);
    ref_dense_wd(nc);
    ref_conv_gp(1, P1, K1);
    ref_conv_kg(1, 1, P1, K1);
    ref_conv_kg(0, 0, base, K0);
  endtask

  initial begin
    #(TB_WATCHDOG);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nsamp, prev_nc;
    nl = 3;
    layers[0] = '{dense: 0, h: SW'(H), w: SW'(W), n_out: 8, relu: 1, k_base: K0, in_base: 0};
    layers[1] = '{dense: 0, h: SW'(H), w: SW'(W), n_out: 8, relu: 1, k_base: K1, in_base: P1};
    layers[2] = '{dense: 1, h: SW'(H), w: SW'(W), n_out: 2, relu: 0, k_base: KD0, in_base: P2};
    logits_base = PLOG;
    sample_slot = '0;
    host_sel = '0; host_addr = '0; host_be = '0; host_wdata = '0; gd_cls = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // zero the memory regions the reference reads, load weights
    for (int a = 0; a < PFD; a++) begin r_pf[a] = '0; end
    for (int a = 0; a < 2 * HW + 2; a++) hwrite(1, a, '0, 8'hff);
    for (int m = 0; m < 2; m++) for (int a = 0; a < GD; a++) r_g[m][a] = '0;
    for (int m = 0; m < 2; m++) for (int a = 0; a < HW; a++) hwrite(3 + m, a, '0, 8'hff);
    for (int a = 0; a < KD; a++) r_k[a] = '0;
    for (int a = 0; a < KD0 + NC_MAX * HW; a++) begin
      r_k[a] = rnd_word(a < K1 ? 1200 : (a < KD0 ? 700 : 300), 8);
      hwrite(2, a, r_k[a], 8'hff);
    end
    // samples through the GDumb slot manager: classes 0,1 first, then 2
    nsamp = NSLOT + 3;
    for (int i = 0; i < nsamp; i++) begin
      int cls;
      bit full;
      cls = (i < NSLOT) ? (i % 2) : 2;
      full = (dut.u_gdumb.total == NSLOT);
      gd_cls = $bits(gd_cls)'(cls);
      gd_req = 1; @(negedge clk); gd_req = 0;
      while (!gd_done) @(negedge clk);
      if (gd_grant) begin
        if (full) n_replace++;
        slot_class[gd_slot] = cls;
        for (int p = 0; p < SWORDS; p++) begin
          word_t v;
          v = rnd_word(4000, 3);
          r_tr[int'(gd_slot) * SWORDS + p] = v;
          hwrite(0, int'(gd_slot) * SWORDS + p, v, 8'h07);
        end
      end
    end
    checks++;
    if (dut.u_gdumb.count[2] == 0) begin failures++; $display("class 2 never stored"); end
    // training: 2 classes on a class-0/1 sample, then 3 classes on a class-2 sample
    prev_nc = 2;
    step(0, 2, 1);
    compare_all("step 1");
    begin
      int s2;
      s2 = 0;
      for (int s = 0; s < NSLOT; s++) if (slot_class[s] == 2) s2 = s;
      step(s2, NC2, 1);
      n_classchg++;
      compare_all("step 2");
      step(s2, NC2, 0);
      compare_all("inference");
    end
    // every mechanism must have happened
    begin
      string names [12];
      int    cnt   [12];
      names = '{"snake row turn", "channel change without refill", "kernel prefetch swap",
                "multi-adder mode", "multi-operand mode", "ReLU clamp", "ReLU' mask",
                "gradient memory ping-pong", "kernel read-modify-write", "GDumb replacement",
                "inference mode", "class count change"};
      cnt   = '{n_turn, n_stay, n_swap, n_madd, n_mop, n_relu, n_mask, n_gsel1, n_rmw,
                n_replace, n_infer, n_classchg};
      for (int i = 0; i < 12; i++) begin
        checks++;
        $display("mechanism %-32s %0d", names[i], cnt[i]);
        if (cnt[i] == 0) begin failures++; $display("mechanism never exercised: %s", names[i]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
