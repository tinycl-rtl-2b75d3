// tinycl_top: TinyCL continual-learning accelerator, top level.
//
// Connects the control unit, the processing unit, the GDumb slot manager and
// the five data memories:
//   training data memory  NSLOT samples of 32x32 RGB pixels, 3 lanes per word
//                         (48 bits), read by the first layer (3 ports)
//   partial feature memory  inputs of the hidden layers and the logits
//                         (8 read ports, 1 write port)
//   kernel memory         conv kernels and dense weights (8 read, 8 write ports)
//   gradient memories 0/1 ping-pong pair for the propagated gradients
//                         (3 read, 8 write ports each)
// Data flow as in the architecture's top-level view: training data -> PU
// (forward), PU <-> partial feature memory (forward, backward), PU <->
// kernel memory (forward read, backward update), PU <-> gradient memory
// (backward). Everything runs on one clock with an asynchronous active-low
// reset.
//
// Host side: a simple word port (host_sel picks the memory) loads samples,
// weights and the loss gradient and reads results. It shares read port 0 and
// write port 0 of each memory with the processing unit and may only be used
// while the processing unit is idle (before start, while loss_req is high,
// after done); read data come one cycle after host_re. The loss (softmax and
// its derivative) is computed by the host between loss_req and loss_ack.
// The memory sizes default to the configuration evaluated with the
// architecture: 1000 training samples (6.144 MB), a 32x32x8 feature per
// saved layer input, two 32x32x8 gradient memories, kernels for two 8->8
// 3x3 conv layers and a 8192 x 10 dense layer. Port counts and the host port
// are this design's choices.
// Lint note: Verilator reports rst_n as used both asynchronously and
// synchronously; the synchronous use is only the disable condition of the
// assertions in the processing unit, control unit and GDumb manager, so
// the reset stays purely asynchronous in the circuit.
module tinycl_top
  import tinycl_pkg::*;
#(
  parameter int unsigned NSLOT        = 1000,
  parameter int unsigned NCLS         = 10,
  parameter int unsigned SAMPLE_WORDS = 1024,
  parameter int unsigned PF_DEPTH     = 4096,
  parameter int unsigned K_DEPTH      = 10384,
  parameter int unsigned G_DEPTH      = 1024,
  parameter int unsigned NL_MAX       = 3,
  parameter int unsigned NMAX_OUT     = 16,
  localparam int unsigned TR_DEPTH    = NSLOT * SAMPLE_WORDS,
  localparam int unsigned SLW         = $clog2(NSLOT + 1),
  localparam int unsigned CLW         = (NCLS > 1) ? $clog2(NCLS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // control
  input  logic          start,
  input  logic          train,
  input  logic [3:0]    nl,
  input  layer_t        layers [NL_MAX],
  input  logic [SLW-1:0] sample_slot,
  input  addr_t         logits_base,
  output logic          busy,
  output logic          done,
  output logic          loss_req,
  input  logic          loss_ack,
  // host memory port
  input  logic          host_we,
  input  logic          host_re,
  input  logic [2:0]    host_sel,    // 0 train, 1 feature, 2 kernel, 3 grad0, 4 grad1
  input  addr_t         host_addr,
  input  logic [LANES-1:0] host_be,
  input  word_t         host_wdata,
  output word_t         host_rdata,
  // GDumb sample slot manager
  input  logic          gd_req,
  input  logic [CLW-1:0] gd_cls,
  output logic          gd_busy,
  output logic          gd_done,
  output logic          gd_grant,
  output logic [SLW-1:0] gd_slot
);

  localparam int unsigned TRW = $clog2(TR_DEPTH);
  localparam int unsigned PFW = $clog2(PF_DEPTH);
  localparam int unsigned KW  = $clog2(K_DEPTH);
  localparam int unsigned GW  = $clog2(G_DEPTH);
  localparam logic [2:0] SEL_TR = 3'd0, SEL_PF = 3'd1, SEL_K = 3'd2, SEL_G0 = 3'd3, SEL_G1 = 3'd4;

  // ------------------------------------------------------------ CU and PU
  logic    pu_start, pu_done, pu_busy, cu_busy;
  pu_cmd_t pu_cmd;
  addr_t   sample_base;

  assign sample_base = addr_t'(32'(sample_slot) * SAMPLE_WORDS);

  tinycl_cu #(.NL_MAX(NL_MAX)) u_cu (
    .clk, .rst_n, .start, .train, .nl, .layers, .sample_base, .logits_base,
    .busy(cu_busy), .done, .loss_req, .loss_ack, .pu_start, .pu_cmd, .pu_done
  );
  assign busy = cu_busy;

  logic [LANES-1:0] f_rd_en, k_rd_en, pf_wr_be;
  addr_t f_rd_addr [LANES], k_rd_addr [LANES], k_wr_addr [LANES], g_wr_addr [LANES];
  word_t f_rd_data [LANES], k_rd_data [LANES], k_wr_data [LANES], g_wr_data [LANES];
  addr_t pf_wr_addr;
  word_t pf_wr_data;
  logic [LANES-1:0][LANES-1:0] k_wr_be, g_wr_be;
  logic [2:0] g_rd_en;
  addr_t g_rd_addr [3];
  word_t g_rd_data [3];

  tinycl_pu #(.NMAX_OUT(NMAX_OUT)) u_pu (
    .clk, .rst_n, .start(pu_start), .cmd(pu_cmd), .busy(pu_busy), .done(pu_done),
    .f_rd_en, .f_rd_addr, .f_rd_data, .pf_wr_be, .pf_wr_addr, .pf_wr_data,
    .k_rd_en, .k_rd_addr, .k_rd_data, .k_wr_be, .k_wr_addr, .k_wr_data,
    .g_rd_en, .g_rd_addr, .g_rd_data, .g_wr_be, .g_wr_addr, .g_wr_data
  );

  logic host_ok;
  assign host_ok = !pu_busy;
  logic fsrc, gsel;
  assign fsrc = pu_cmd.fsrc_train;
  assign gsel = pu_cmd.g_sel;

  // ------------------------------------------------------ training memory
  logic [2:0]      tr_rd_en;
  logic [TRW-1:0]  tr_rd_addr [3];
  logic [3*DW-1:0] tr_rd_data [3];
  logic [0:0][2:0] tr_wr_be;
  logic [TRW-1:0]  tr_wr_addr [1];
  logic [3*DW-1:0] tr_wr_data [1];

  always_comb begin
    for (int i = 0; i < 3; i++) begin
      tr_rd_en[i]   = fsrc && f_rd_en[i];
      tr_rd_addr[i] = TRW'(f_rd_addr[i]);
    end
    tr_wr_be[0]   = '0;
    tr_wr_addr[0] = TRW'(host_addr);
    tr_wr_data[0] = host_wdata[3*DW-1:0];
    if (host_ok) begin
      if (host_re && host_sel == SEL_TR) begin tr_rd_en[0] = 1'b1; tr_rd_addr[0] = TRW'(host_addr); end
      if (host_we && host_sel == SEL_TR) tr_wr_be[0] = host_be[2:0];
    end
  end

  tinycl_mem #(.LANES_N(3), .DEPTH(TR_DEPTH), .NRD(3), .NWR(1)) u_train_mem (
    .clk, .rd_en(tr_rd_en), .rd_addr(tr_rd_addr), .rd_data(tr_rd_data),
    .wr_be(tr_wr_be), .wr_addr(tr_wr_addr), .wr_data(tr_wr_data)
  );

  // ------------------------------------------------ partial feature memory
  logic [LANES-1:0]  pf_rd_en;
  logic [PFW-1:0]    pf_rd_addr [LANES];
  word_t             pf_rd_data [LANES];
  logic [0:0][LANES-1:0] pf_be;
  logic [PFW-1:0]    pf_addr [1];
  word_t             pf_data [1];

  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      pf_rd_en[i]   = !fsrc && f_rd_en[i];
      pf_rd_addr[i] = PFW'(f_rd_addr[i]);
    end
    pf_be[0]   = pf_wr_be;
    pf_addr[0] = PFW'(pf_wr_addr);
    pf_data[0] = pf_wr_data;
    if (host_ok) begin
      if (host_re && host_sel == SEL_PF) begin pf_rd_en[0] = 1'b1; pf_rd_addr[0] = PFW'(host_addr); end
      if (host_we && host_sel == SEL_PF) begin pf_be[0] = host_be; pf_addr[0] = PFW'(host_addr); pf_data[0] = host_wdata; end
    end
  end

  tinycl_mem #(.LANES_N(LANES), .DEPTH(PF_DEPTH), .NRD(LANES), .NWR(1)) u_feat_mem (
    .clk, .rd_en(pf_rd_en), .rd_addr(pf_rd_addr), .rd_data(pf_rd_data),
    .wr_be(pf_be), .wr_addr(pf_addr), .wr_data(pf_data)
  );

  logic fsrc_d;
  always_ff @(posedge clk) fsrc_d <= fsrc;

  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      if (!fsrc_d)    f_rd_data[i] = pf_rd_data[i];
      else if (i < 3) f_rd_data[i] = word_t'(tr_rd_data[i]);
      else            f_rd_data[i] = '0;
    end
  end

  // --------------------------------------------------------- kernel memory
  logic [LANES-1:0]  km_rd_en;
  logic [KW-1:0]     km_rd_addr [LANES];
  logic [LANES-1:0][LANES-1:0] km_be;
  logic [KW-1:0]     km_wr_addr [LANES];
  word_t             km_wr_data [LANES];

  always_comb begin
    km_rd_en = k_rd_en;
    km_be    = k_wr_be;
    for (int i = 0; i < LANES; i++) begin
      km_rd_addr[i] = KW'(k_rd_addr[i]);
      km_wr_addr[i] = KW'(k_wr_addr[i]);
      km_wr_data[i] = k_wr_data[i];
    end
    if (host_ok) begin
      if (host_re && host_sel == SEL_K) begin km_rd_en[0] = 1'b1; km_rd_addr[0] = KW'(host_addr); end
      if (host_we && host_sel == SEL_K) begin km_be[0] = host_be; km_wr_addr[0] = KW'(host_addr); km_wr_data[0] = host_wdata; end
    end
  end

  tinycl_mem #(.LANES_N(LANES), .DEPTH(K_DEPTH), .NRD(LANES), .NWR(LANES)) u_kernel_mem (
    .clk, .rd_en(km_rd_en), .rd_addr(km_rd_addr), .rd_data(k_rd_data),
    .wr_be(km_be), .wr_addr(km_wr_addr), .wr_data(km_wr_data)
  );

  // ----------------------------------------------------- gradient memories
  logic [2:0]        gm_rd_en   [2];
  logic [GW-1:0]     gm_rd_addr [2][3];
  word_t             gm_rd_data [2][3];
  logic [LANES-1:0][LANES-1:0] gm_be [2];
  logic [GW-1:0]     gm_wr_addr [2][LANES];
  word_t             gm_wr_data [2][LANES];
  logic              gsel_d;

  always_ff @(posedge clk) gsel_d <= gsel;

  always_comb begin
    for (int m = 0; m < 2; m++) begin
      gm_rd_en[m] = (gsel == m[0]) ? g_rd_en : '0;
      gm_be[m]    = (gsel != m[0]) ? g_wr_be : '0;
      for (int i = 0; i < 3; i++) gm_rd_addr[m][i] = GW'(g_rd_addr[i]);
      for (int i = 0; i < LANES; i++) begin
        gm_wr_addr[m][i] = GW'(g_wr_addr[i]);
        gm_wr_data[m][i] = g_wr_data[i];
      end
      if (host_ok) begin
        if (host_re && host_sel == SEL_G0 + 3'(m)) begin gm_rd_en[m][0] = 1'b1; gm_rd_addr[m][0] = GW'(host_addr); end
        if (host_we && host_sel == SEL_G0 + 3'(m)) begin
          gm_be[m][0] = host_be; gm_wr_addr[m][0] = GW'(host_addr); gm_wr_data[m][0] = host_wdata;
        end
      end
    end
    for (int i = 0; i < 3; i++) g_rd_data[i] = gm_rd_data[gsel_d][i];
  end

  for (genvar m = 0; m < 2; m++) begin : g_grad
    tinycl_mem #(.LANES_N(LANES), .DEPTH(G_DEPTH), .NRD(3), .NWR(LANES)) u_grad_mem (
      .clk, .rd_en(gm_rd_en[m]), .rd_addr(gm_rd_addr[m]), .rd_data(gm_rd_data[m]),
      .wr_be(gm_be[m]), .wr_addr(gm_wr_addr[m]), .wr_data(gm_wr_data[m])
    );
  end

  // ------------------------------------------------------- host read data
  logic [2:0] host_sel_d;
  always_ff @(posedge clk) host_sel_d <= host_sel;

  always_comb begin
    unique case (host_sel_d)
      SEL_TR:  host_rdata = word_t'(tr_rd_data[0]);
      SEL_PF:  host_rdata = pf_rd_data[0];
      SEL_K:   host_rdata = k_rd_data[0];
      SEL_G0:  host_rdata = gm_rd_data[0][0];
      default: host_rdata = gm_rd_data[1][0];
    endcase
  end

  // --------------------------------------------------------- GDumb manager
  logic [SLW-1:0] gd_count [NCLS];
  logic [SLW-1:0] gd_total;

  tinycl_gdumb #(.NSLOT(NSLOT), .NCLS(NCLS)) u_gdumb (
    .clk, .rst_n, .req(gd_req), .cls(gd_cls), .busy(gd_busy), .done(gd_done),
    .grant(gd_grant), .slot(gd_slot), .count(gd_count), .total(gd_total)
  );

endmodule
