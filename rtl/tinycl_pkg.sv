// tinycl_pkg: types and constants shared by the TinyCL accelerator.
//
// Numbers are 16-bit two's-complement fixed point with 4 integer and 12
// fractional bits (Q4.12), as the architecture specifies. A product of two
// such numbers is kept at full precision (Q8.24, 32 bits); sums are reduced
// back to Q4.12 by round-to-nearest (ties toward +inf) followed by
// saturation, which doubles as the value clipping the format relies on.
// Memory words are 128 bits: 8 lanes of 16 bits, one lane per channel.
//
// The operation codes are the six layer computations the processing unit
// runs. The command struct is what the control unit hands the processing
// unit for each of them; its field widths are this implementation's choice.
package tinycl_pkg;

  localparam int unsigned DW    = 16;          // data width (Q4.12)
  localparam int unsigned FRAC  = 12;          // fractional bits
  localparam int unsigned PW    = 32;          // product / MAC adder width
  localparam int unsigned LANES = 8;           // channels per memory word
  localparam int unsigned WW    = DW * LANES;  // memory word width (128)
  localparam int unsigned NMAC  = 9;           // MAC instances in the PU
  localparam int unsigned AW    = 24;          // address width in commands
  localparam int unsigned SW    = 6;           // spatial size field width
  localparam int unsigned NW    = 5;           // output-count field width

  typedef logic signed [DW-1:0] data_t;
  typedef logic signed [PW-1:0] prod_t;
  typedef logic [WW-1:0]        word_t;
  typedef logic [AW-1:0]        addr_t;

  typedef enum logic [2:0] {
    OP_CONV_FWD  = 3'd0,  // convolution, forward
    OP_CONV_KG   = 3'd1,  // convolution kernel gradient (and update)
    OP_CONV_GP   = 3'd2,  // convolution gradient propagation
    OP_DENSE_FWD = 3'd3,  // dense, forward
    OP_DENSE_GP  = 3'd4,  // dense, gradient propagation
    OP_DENSE_WD  = 3'd5   // dense, weight derivative (and update)
  } op_e;

  // Step of the snake-shaped sliding window (which side the 3 new pixels
  // enter from). STAY starts a new channel sweep on the same window.
  typedef enum logic [2:0] {
    MV_STAY  = 3'd0,
    MV_RIGHT = 3'd1,
    MV_LEFT  = 3'd2,
    MV_DOWN  = 3'd3,
    MV_UP    = 3'd4
  } move_e;

  typedef struct packed {
    op_e          op;
    logic [SW-1:0] h;          // feature height (conv) / rows of dense input
    logic [SW-1:0] w;          // feature width
    logic [NW-1:0] n_out;      // output channels (conv) or outputs (dense)
    logic         fsrc_train;  // features come from the training data memory
    addr_t        f_base;      // input feature base (word address)
    addr_t        f_out_base;  // forward output base in partial feature memory
    addr_t        k_base;      // kernel / weight base in kernel memory
    addr_t        g_base;      // gradient read base
    addr_t        g_wr_base;   // gradient write base
    logic         g_sel;       // gradient memory read (the other one is written)
    logic         relu;        // forward: apply ReLU to the output
    logic         mask;        // backward: multiply by ReLU'(input feature)
  } pu_cmd_t;

  // Layer descriptor written into the control unit by the host.
  typedef struct packed {
    logic          dense;
    logic [SW-1:0] h;
    logic [SW-1:0] w;
    logic [NW-1:0] n_out;
    logic          relu;
    addr_t         k_base;
    addr_t         in_base;    // where the layer input lives in the partial feature memory
  } layer_t;

  // Round a full-precision Q8.24 (or wider) sum to Q4.12 and saturate.
  function automatic data_t round_sat(input logic signed [47:0] v);
    logic signed [47:0] r;
    r = (v + 48'sd2048) >>> FRAC;
    if (r > 48'sd32767)       return 16'sh7fff;
    else if (r < -48'sd32768) return 16'sh8000;
    else                      return r[DW-1:0];
  endfunction

  // Saturating negation (so that -(-8.0) stays representable).
  function automatic data_t neg_sat(input data_t v);
    return (v == 16'sh8000) ? 16'sh7fff : -v;
  endfunction

  function automatic data_t lane(input word_t w, input int unsigned i);
    return data_t'(w[i*DW +: DW]);
  endfunction

endpackage
