// tinycl_kernel_manager: kernel buffer and kernel address manager for the
// convolution modes.
//
// Holds the 3x3x8 kernel slice the nine MACs use (front[p], p = 3*row+col,
// 8 lanes = 8 channels) and a second buffer (back) into which the slice of
// the next output channel is prefetched while the current one is in use, so
// changing channel costs no cycles. swap copies back into front.
//
// Kernel memory layout (one 128-bit word per output channel and position):
//   word k_base + 9*co + p, lane ci  =  K[co][ci][p]
// load_start begins fetching the slice for channel kidx, one position per
// cycle (9 cycles, data one cycle after the address):
//   transposed = 0 (forward):  entry p = word k_base + 9*kidx + p
//   transposed = 1 (gradient propagation): entry p lane co =
//       lane kidx of word k_base + 9*co + (8-p), read on port co,
//   i.e. the kernel turned by 180 degrees with input and output channels
//   exchanged, which turns gradient propagation into a forward convolution.
// back_ready rises when the 9 entries are in. Prefetching follows the
// architecture's "dedicated buffers prefetch data from memory"; the layout
// and the transposed fetch are this design's choices.
module tinycl_kernel_manager
  import tinycl_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          load_start,
  input  logic          transposed,
  input  addr_t         k_base,
  input  logic [NW-1:0] kidx,
  input  logic          swap,
  output logic [LANES-1:0] rd_en,
  output addr_t         rd_addr [LANES],
  input  word_t         rd_data [LANES],
  output word_t         front   [9],
  output logic          back_ready
);

  word_t       front_q [9];
  word_t       back_q  [9];
  logic        busy_q, cap_q, tr_q;
  logic [3:0]  p_q, pcap_q;
  logic [NW-1:0] kidx_q;
  addr_t       base_q;

  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      rd_en[i]   = busy_q && (tr_q || i == 0);
      rd_addr[i] = tr_q ? base_q + addr_t'(9*i) + addr_t'(8 - p_q)
                        : base_q + addr_t'(kidx_q) * 9 + addr_t'(p_q);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q     <= 1'b0;
      cap_q      <= 1'b0;
      tr_q       <= 1'b0;
      p_q        <= '0;
      pcap_q     <= '0;
      kidx_q     <= '0;
      base_q     <= '0;
      back_ready <= 1'b0;
    end else begin
      cap_q  <= busy_q;
      pcap_q <= p_q;
      if (load_start) begin
        busy_q     <= 1'b1;
        tr_q       <= transposed;
        base_q     <= k_base;
        kidx_q     <= kidx;
        p_q        <= '0;
        back_ready <= 1'b0;
      end else if (busy_q) begin
        if (p_q == 4'd8) busy_q <= 1'b0;
        p_q <= p_q + 4'd1;
      end
      if (cap_q && pcap_q == 4'd8) back_ready <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (cap_q) begin
      if (tr_q) begin
        for (int co = 0; co < LANES; co++)
          back_q[pcap_q][co*DW +: DW] <= rd_data[co][kidx_q*DW +: DW];
      end else begin
        back_q[pcap_q] <= rd_data[0];
      end
    end
    if (swap) front_q <= back_q;
  end

  assign front = front_q;

endmodule
