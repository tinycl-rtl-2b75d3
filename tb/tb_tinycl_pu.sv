// tb_tinycl_pu: self-checking test of the processing unit, one command of
// each of the six kinds on a 4x6 map (8 channels), with memory models of
// one-cycle read latency around it. Before each command the test copies the
// memories, computes the expected result of the command in plain integer
// arithmetic (exact Q8.24 sums, rounded once), and afterwards compares every
// word of every memory, so wrong values and stray writes both count.
// Also checks the rate: a conv command may take at most nsweep*h*w + 20
// cycles, a dense one at most (h*w/8)*n_out + 8.
module tb_tinycl_pu;
  import tinycl_pkg::*;

  localparam int H = 4, W = 6, HW = H * W, NK = 3, ND = 3;
  localparam int FD = 256, KD = 512, GD = 64;

  logic clk = 0, rst_n = 0, start = 0;
  pu_cmd_t cmd;
  logic busy, done;
  logic [LANES-1:0] f_rd_en, pf_wr_be, k_rd_en;
  addr_t f_rd_addr [LANES], k_rd_addr [LANES], k_wr_addr [LANES], g_wr_addr [LANES];
  word_t f_rd_data [LANES], k_rd_data [LANES], k_wr_data [LANES], g_wr_data [LANES];
  addr_t pf_wr_addr;
  word_t pf_wr_data;
  logic [LANES-1:0][LANES-1:0] k_wr_be, g_wr_be;
  logic [2:0] g_rd_en;
  addr_t g_rd_addr [3];
  word_t g_rd_data [3];

  word_t fmem [FD], kmem [KD], gmem [2][GD];
  word_t ef [FD], ek [KD], eg [2][GD];
  int checks = 0, failures = 0;

  tinycl_pu dut (.*);

  always #5 clk = ~clk;

  // memory models
  always_ff @(posedge clk) begin
    for (int i = 0; i < LANES; i++) begin
      if (f_rd_en[i]) f_rd_data[i] <= fmem[f_rd_addr[i] % FD];
      if (k_rd_en[i]) k_rd_data[i] <= kmem[k_rd_addr[i] % KD];
    end
    for (int i = 0; i < 3; i++) if (g_rd_en[i]) g_rd_data[i] <= gmem[cmd.g_sel][g_rd_addr[i] % GD];
    for (int l = 0; l < LANES; l++) if (pf_wr_be[l]) fmem[pf_wr_addr % FD][l*DW +: DW] <= pf_wr_data[l*DW +: DW];
    for (int p = 0; p < LANES; p++)
      for (int l = 0; l < LANES; l++) begin
        if (k_wr_be[p][l]) kmem[k_wr_addr[p] % KD][l*DW +: DW] <= k_wr_data[p][l*DW +: DW];
        if (g_wr_be[p][l]) gmem[!cmd.g_sel][g_wr_addr[p] % GD][l*DW +: DW] <= g_wr_data[p][l*DW +: DW];
      end
  end

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic word_t rnd_word(input int mag);
    word_t v;
    for (int l = 0; l < LANES; l++) v[l*DW +: DW] = 16'($signed($urandom_range(0, 2*mag)) - mag);
    return v;
  endfunction

  function automatic void setl(ref word_t wd, input int l, input data_t v);
    wd[l*DW +: DW] = v;
  endfunction

  // pixel of a map at base with zero padding
  function automatic data_t fpx(input int base, input int y, input int x, input int ch);
    if (y < 0 || y >= H || x < 0 || x >= W) return '0;
    return lane(fmem[base + y*W + x], ch);
  endfunction
  function automatic data_t gpx(input int sel, input int base, input int y, input int x, input int ch);
    if (y < 0 || y >= H || x < 0 || x >= W) return '0;
    return lane(gmem[sel][base + y*W + x], ch);
  endfunction

  task automatic run(input pu_cmd_t c, input int max_cycles, input string name);
    int cyc;
    cmd = c;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    @(negedge clk);
    checks++;
    if (cyc > max_cycles) begin failures++; $display("%s took %0d cycles, limit %0d", name, cyc, max_cycles); end
    $display("%s: %0d cycles", name, cyc);
    for (int a = 0; a < FD; a++) begin checks++; if (fmem[a] !== ef[a]) begin failures++; if (failures < 20) $display("%s: feature word %0d %h expected %h", name, a, fmem[a], ef[a]); end end
    for (int a = 0; a < KD; a++) begin checks++; if (kmem[a] !== ek[a]) begin failures++; if (failures < 20) $display("%s: kernel word %0d %h expected %h", name, a, kmem[a], ek[a]); end end
    for (int m = 0; m < 2; m++)
      for (int a = 0; a < GD; a++) begin checks++; if (gmem[m][a] !== eg[m][a]) begin failures++; if (failures < 20) $display("%s: grad%0d word %0d %h expected %h", name, m, a, gmem[m][a], eg[m][a]); end end
  endtask

  task automatic snapshot();
    ef = fmem; ek = kmem; eg = gmem;
  endtask

  initial begin
    pu_cmd_t c;
    longint s;
    localparam int FB = 0, FO = 64, KB = 0, DB = 100, GB = 0, GWB = 8;
    cmd = '0;
    foreach (fmem[i]) fmem[i] = rnd_word(1000);
    foreach (kmem[i]) kmem[i] = rnd_word(1000);
    foreach (gmem[m, i]) gmem[m][i] = rnd_word(1000);
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---------------- CONV_FWD with ReLU
    snapshot();
    for (int k = 0; k < NK; k++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          data_t v;
          s = 0;
          for (int ci = 0; ci < 8; ci++)
            for (int m = 0; m < 3; m++)
              for (int n = 0; n < 3; n++)
                s += longint'(fpx(FB, y+m-1, x+n-1, ci)) * longint'(lane(kmem[KB + 9*k + 3*m + n], ci));
          v = round_sat(48'(s));
          if (v < 0) v = 0;
          setl(ef[FO + y*W + x], k, v);
        end
    c = '0; c.op = OP_CONV_FWD; c.h = H; c.w = W; c.n_out = NK; c.f_base = FB; c.f_out_base = FO;
    c.k_base = KB; c.relu = 1;
    run(c, NK*HW + 20, "CONV_FWD");

    // ---------------- CONV_GP with ReLU' mask, read grad 0 write grad 1
    snapshot();
    for (int ci = 0; ci < 8; ci++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          data_t v;
          s = 0;
          for (int co = 0; co < 8; co++)
            for (int m = 0; m < 3; m++)
              for (int n = 0; n < 3; n++)
                s += longint'(gpx(0, GB, y+m-1, x+n-1, co)) * longint'(lane(kmem[KB + 9*co + 8 - (3*m + n)], ci));
          v = round_sat(48'(s));
          if (fpx(FB, y, x, ci) <= 0) v = 0;
          setl(eg[1][GWB + y*W + x], ci, v);
        end
    c = '0; c.op = OP_CONV_GP; c.h = H; c.w = W; c.n_out = NK; c.f_base = FB; c.k_base = KB;
    c.g_base = GB; c.g_wr_base = GWB; c.g_sel = 0; c.mask = 1;
    run(c, 8*HW + 20, "CONV_GP");

    // ---------------- CONV_KG, gradient from grad 1
    snapshot();
    for (int co = 0; co < NK; co++)
      for (int ci = 0; ci < 8; ci++)
        for (int m = 0; m < 3; m++)
          for (int n = 0; n < 3; n++) begin
            data_t d, kold;
            s = 0;
            for (int y = 0; y < H; y++)
              for (int x = 0; x < W; x++)
                s += longint'(gpx(1, GWB, y, x, co)) * longint'(fpx(FB, y+m-1, x+n-1, ci));
            d = round_sat(48'(s));
            kold = lane(kmem[KB + 9*co + 3*m + n], ci);
            setl(ek[KB + 9*co + 3*m + n], ci, round_sat(48'(longint'(kold) - longint'(d)) <<< 12));
          end
    c = '0; c.op = OP_CONV_KG; c.h = H; c.w = W; c.n_out = NK; c.f_base = FB; c.k_base = KB;
    c.g_base = GWB; c.g_sel = 1;
    run(c, NK*HW + 20, "CONV_KG");

    // ---------------- DENSE_FWD (input = conv output at FO)
    snapshot();
    for (int n = 0; n < ND; n++) begin
      s = 0;
      for (int p = 0; p < HW; p++)
        for (int ci = 0; ci < 8; ci++)
          s += longint'(lane(fmem[FO + p], ci)) * longint'(lane(kmem[DB + n*HW + p], ci));
      setl(ef[200 + n/8], n%8, round_sat(48'(s)));
    end
    c = '0; c.op = OP_DENSE_FWD; c.h = H; c.w = W; c.n_out = ND; c.f_base = FO; c.f_out_base = 200;
    c.k_base = DB;
    run(c, (HW/8)*ND + 8, "DENSE_FWD");

    // ---------------- DENSE_GP, dY in grad 0 at 40, dX to grad 1 at 16
    snapshot();
    for (int p = 0; p < HW; p++)
      for (int ci = 0; ci < 8; ci++) begin
        data_t v;
        s = 0;
        for (int n = 0; n < ND; n++)
          s += longint'(lane(kmem[DB + n*HW + p], ci)) * longint'(lane(gmem[0][40 + n/8], n%8));
        v = round_sat(48'(s));
        if (lane(fmem[FO + p], ci) <= 0) v = 0;
        setl(eg[1][16 + p], ci, v);
      end
    c = '0; c.op = OP_DENSE_GP; c.h = H; c.w = W; c.n_out = ND; c.f_base = FO; c.k_base = DB;
    c.g_base = 40; c.g_wr_base = 16; c.g_sel = 0; c.mask = 1;
    run(c, (HW/8)*ND + 8 + 4, "DENSE_GP");

    // ---------------- DENSE_WD
    snapshot();
    for (int n = 0; n < ND; n++)
      for (int p = 0; p < HW; p++)
        for (int ci = 0; ci < 8; ci++) begin
          longint w0, dy;
          w0 = longint'(lane(kmem[DB + n*HW + p], ci));
          dy = longint'(lane(gmem[0][40 + n/8], n%8));
          s = (w0 <<< 12) - longint'(lane(fmem[FO + p], ci)) * dy;
          setl(ek[DB + n*HW + p], ci, round_sat(48'(s)));
        end
    c = '0; c.op = OP_DENSE_WD; c.h = H; c.w = W; c.n_out = ND; c.f_base = FO; c.k_base = DB;
    c.g_base = 40; c.g_sel = 0;
    run(c, (HW/8)*ND + 8 + 4, "DENSE_WD");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
