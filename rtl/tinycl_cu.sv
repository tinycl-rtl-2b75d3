// tinycl_cu: TinyCL control unit.
//
// Runs a multi-layer network, one training sample at a time, by issuing one
// command per layer computation to the processing unit and waiting for its
// done pulse. The network is described by a table of layer descriptors
// (kind, input height/width, number of outputs, ReLU, kernel base, input
// base), which is how the dynamic sizes reach the processing unit; the last
// layer's output count is simply the current number of classes.
//
// Sequence for one sample (train = 1):
//   forward   layer 0..nl-1 (layer 0 reads the sample in the training data
//             memory, the others the partial feature memory; each writes the
//             next layer's input, the last one the logits at logits_base)
//   loss      loss_req is raised; the host reads the logits, writes dY into
//             gradient memory 0 at address 0, and pulses loss_ack
//   backward  layer nl-1..0: gradient propagation (skipped for layer 0,
//             masked by ReLU' of the layer input), then the kernel gradient /
//             weight derivative with the update. The two gradient memories
//             alternate: propagation reads one and writes the other.
// With train = 0 only the forward pass runs (inference).
// Passing sizes per layer and the six computations follow the architecture;
// the descriptor table, the order of the backward steps, the loss handshake
// and the ping-pong of the gradient memories are this design's choices.
// Interface: pulse start while busy = 0; done pulses at the end.
// Lint note: Verilator reports rst_n as used both asynchronously and
// synchronously; the synchronous use is only the disable condition of the
// assertions at the end of this file, so the reset stays purely asynchronous
// in the circuit.
module tinycl_cu
  import tinycl_pkg::*;
#(
  parameter int unsigned NL_MAX = 3
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          train,
  input  logic [3:0]    nl,
  input  layer_t        layers [NL_MAX],
  input  addr_t         sample_base,
  input  addr_t         logits_base,
  output logic          busy,
  output logic          done,
  output logic          loss_req,
  input  logic          loss_ack,
  output logic          pu_start,
  output pu_cmd_t       pu_cmd,
  input  logic          pu_done
);

  typedef enum logic [2:0] {S_IDLE, S_FWD, S_LOSS, S_GP, S_UPD, S_WAIT} state_e;

  state_e     state_q, ret_q;
  logic [3:0] l_q;
  logic       gsel_q;
  layer_t     cur, prev, next;

  always_comb begin
    cur  = layers[l_q];
    prev = layers[(l_q == 0) ? 4'd0 : l_q - 4'd1];
    next = layers[(32'(l_q) + 1 < NL_MAX) ? l_q + 4'd1 : l_q];
  end

  // command of the current state and layer
  always_comb begin
    pu_cmd            = '0;
    pu_cmd.h          = cur.h;
    pu_cmd.w          = cur.w;
    pu_cmd.n_out      = cur.n_out;
    pu_cmd.k_base     = cur.k_base;
    pu_cmd.fsrc_train = (l_q == 0);
    pu_cmd.f_base     = (l_q == 0) ? sample_base : cur.in_base;
    pu_cmd.g_sel      = gsel_q;
    pu_cmd.g_base     = '0;
    pu_cmd.g_wr_base  = '0;
    unique case (state_q)
      S_FWD: begin
        pu_cmd.op         = cur.dense ? OP_DENSE_FWD : OP_CONV_FWD;
        pu_cmd.relu       = cur.relu;
        pu_cmd.f_out_base = (l_q == nl - 4'd1) ? logits_base : next.in_base;
      end
      S_GP: begin
        pu_cmd.op   = cur.dense ? OP_DENSE_GP : OP_CONV_GP;
        pu_cmd.mask = prev.relu;
      end
      default: pu_cmd.op = cur.dense ? OP_DENSE_WD : OP_CONV_KG;
    endcase
  end

  assign busy     = (state_q != S_IDLE);
  assign loss_req = (state_q == S_LOSS);
  assign pu_start = (state_q inside {S_FWD, S_GP, S_UPD});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      ret_q   <= S_IDLE;
      l_q     <= '0;
      gsel_q  <= 1'b0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state_q)
        S_IDLE: if (start) begin
          state_q <= S_FWD;
          l_q     <= '0;
          gsel_q  <= 1'b0;
        end
        S_FWD, S_GP, S_UPD: begin
          ret_q   <= state_q;
          state_q <= S_WAIT;
        end
        S_WAIT: if (pu_done) begin
          unique case (ret_q)
            S_FWD:
              if (l_q != nl - 4'd1) begin l_q <= l_q + 4'd1; state_q <= S_FWD; end
              else if (train)       state_q <= S_LOSS;
              else begin            state_q <= S_IDLE; done <= 1'b1; end
            S_GP: state_q <= S_UPD;
            default:
              if (l_q == 0) begin state_q <= S_IDLE; done <= 1'b1; end
              else begin
                l_q     <= l_q - 4'd1;
                gsel_q  <= !gsel_q;
                state_q <= (l_q == 4'd1) ? S_UPD : S_GP;
              end
          endcase
        end
        S_LOSS: if (loss_ack) state_q <= (l_q == 0) ? S_UPD : S_GP;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  a_pu_idle: assert property (@(posedge clk) disable iff (!rst_n)
    pu_start |-> ##1 !pu_start);

endmodule
