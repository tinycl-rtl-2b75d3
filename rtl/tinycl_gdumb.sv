// tinycl_gdumb: class-balanced slot manager for the training data memory.
//
// Memory-based continual learning keeps old samples in the training data
// memory and, as new classes arrive, replaces some samples of old classes so
// that every class keeps the same share of the memory. This block decides,
// for each offered sample of class cls, whether it is stored and in which of
// the NSLOT sample slots (GDumb's greedy class-balancing rule):
//   - while the memory has free slots, the sample takes the next free slot;
//   - when full, if its class holds fewer samples than the largest class,
//     it replaces one sample of that largest class (the lowest slot holding
//     it, found by a scan of one slot per cycle);
//   - otherwise it is rejected.
// It keeps the class label of every slot and a sample count per class.
// Interface: pulse req with cls while busy = 0; done pulses with grant
// (store the sample) and slot. The host or a DMA then writes the sample at
// word slot*words_per_sample of the training data memory.
// The balancing goal follows the architecture and its GDumb setting; the
// scan and the tie rule (lowest class index among equals) are this design's.
// Lint note: Verilator reports rst_n as used both asynchronously and
// synchronously; the synchronous use is only the disable condition of the
// assertions at the end of this file, so the reset stays purely asynchronous
// in the circuit.
module tinycl_gdumb #(
  parameter int unsigned NSLOT = 1000,
  parameter int unsigned NCLS  = 10,
  localparam int unsigned SLW  = $clog2(NSLOT + 1),
  localparam int unsigned CLW  = (NCLS > 1) ? $clog2(NCLS) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            req,
  input  logic [CLW-1:0]  cls,
  output logic            busy,
  output logic            done,
  output logic            grant,
  output logic [SLW-1:0]  slot,
  output logic [SLW-1:0]  count [NCLS],
  output logic [SLW-1:0]  total
);

  typedef enum logic [1:0] {S_IDLE, S_SCAN} state_e;

  state_e         state_q;
  logic [CLW-1:0] label_q [NSLOT];
  logic [CLW-1:0] cls_q, kmax;
  logic [SLW-1:0] scan_q;

  // largest class (lowest index among equals)
  always_comb begin
    kmax = '0;
    for (int i = 1; i < NCLS; i++)
      if (count[i] > count[kmax]) kmax = CLW'(i);
  end

  assign busy = (state_q != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      cls_q   <= '0;
      scan_q  <= '0;
      done    <= 1'b0;
      grant   <= 1'b0;
      slot    <= '0;
      total   <= '0;
      for (int i = 0; i < NCLS; i++) count[i] <= '0;
    end else begin
      done <= 1'b0;
      unique case (state_q)
        S_IDLE: if (req) begin
          if (32'(total) < NSLOT) begin
            slot         <= total;
            grant        <= 1'b1;
            done         <= 1'b1;
            total        <= total + 1'b1;
            count[cls]   <= count[cls] + 1'b1;
          end else if (count[cls] < count[kmax]) begin
            cls_q   <= cls;
            scan_q  <= '0;
            state_q <= S_SCAN;
          end else begin
            grant <= 1'b0;
            done  <= 1'b1;
          end
        end
        S_SCAN: begin
          if (label_q[scan_q] == kmax) begin
            slot         <= scan_q;
            grant        <= 1'b1;
            done         <= 1'b1;
            count[kmax]  <= count[kmax] - 1'b1;
            count[cls_q] <= count[cls_q] + 1'b1;
            state_q      <= S_IDLE;
          end else begin
            scan_q <= scan_q + 1'b1;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // slot labels (a small memory, not reset: only slots below total are read)
  always_ff @(posedge clk) begin
    if (state_q == S_IDLE && req && 32'(total) < NSLOT) label_q[total] <= cls;
    if (state_q == S_SCAN && label_q[scan_q] == kmax)   label_q[scan_q] <= cls_q;
  end

  a_scan_bound: assert property (@(posedge clk) disable iff (!rst_n)
    state_q == S_SCAN |-> 32'(scan_q) < NSLOT);

endmodule
