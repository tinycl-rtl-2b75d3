// tinycl_grad_manager: gradient manager, the source of the single gradient
// value that is broadcast to all MAC lanes in the multi-adder modes.
//
// For the dense layer it buffers the loss gradient dY (up to NMAX values,
// packed 8 per word in the gradient memory from address g_base). load_start
// reads ceil(n_out/8) words through its read port, one per cycle, and ready
// rises once they are in. For the convolution kernel gradient it instead
// picks lane sel of the gradient word g_word that the processing unit has
// just read for the current pixel.
//   conv_kg = 1: gop = lane sel of g_word
//   conv_kg = 0: gop = dY[sel], or -dY[sel] (saturating) when neg = 1
// (negation lets the weight update W - I*dY run on the MAC's adders).
// The architecture only names this manager; its contents are this design's.
module tinycl_grad_manager
  import tinycl_pkg::*;
#(
  parameter int unsigned NMAX = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          load_start,
  input  addr_t         g_base,
  input  logic [NW-1:0] n_out,
  output logic          rd_en,
  output addr_t         rd_addr,
  input  word_t         rd_data,
  output logic          ready,
  input  logic          conv_kg,
  input  logic          neg,
  input  logic [NW-1:0] sel,
  input  word_t         g_word,
  output data_t         gop
);

  localparam int unsigned NWORDS = (NMAX + LANES - 1) / LANES;

  data_t       dy_q [NWORDS*LANES];
  logic        busy_q, cap_q;
  logic [NW-1:0] w_q, wcap_q, nwords;
  addr_t       base_q;

  assign nwords  = NW'((32'(n_out) + LANES - 1) / LANES);
  assign rd_en   = busy_q;
  assign rd_addr = base_q + addr_t'(w_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q <= 1'b0;
      cap_q  <= 1'b0;
      w_q    <= '0;
      wcap_q <= '0;
      base_q <= '0;
      ready  <= 1'b0;
    end else begin
      cap_q  <= busy_q;
      wcap_q <= w_q;
      if (load_start) begin
        busy_q <= 1'b1;
        base_q <= g_base;
        w_q    <= '0;
        ready  <= 1'b0;
      end else if (busy_q) begin
        if (w_q == nwords - 1'b1) busy_q <= 1'b0;
        w_q <= w_q + 1'b1;
      end
      if (cap_q && !busy_q && !load_start) ready <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (cap_q) begin
      for (int l = 0; l < LANES; l++) begin
        if (32'(wcap_q) * LANES + l < NWORDS * LANES)
          dy_q[32'(wcap_q) * LANES + l] <= lane(rd_data, l);
      end
    end
  end

  always_comb begin
    data_t d;
    d = dy_q[sel];
    if (conv_kg)  gop = lane(g_word, 32'(sel % LANES));
    else if (neg) gop = neg_sat(d);
    else          gop = d;
  end

endmodule
