// edgedrnn_pkg: types, sizes and arithmetic shared by the EdgeDRNN blocks.
//
// Number formats. Activations, deltas and hidden states are 16-bit signed
// fixed point with 8 fractional bits (Q8.8); the delta thresholds are
// quoted as k/2^8, which is where the 8 fractional bits come from. Weights
// are 8-bit signed with W_FRAC fractional bits (this design's choice: Q2.6,
// range -2..+1.98). A product has 8+W_FRAC fractional bits and is summed,
// unshifted, in ACC_W-bit accumulators, the "memory terms" of DeltaGRU.
//
// Non-linearities. The sigmoid is the classic four-segment piecewise-linear
// approximation (slopes 1/4, 1/8, 1/32, saturating at |x| >= 5), and
// tanh(x) = 2*sigmoid(2x) - 1. Only shifts and adds are needed. The choice of
// approximation is this design's own; the paper does not give one.
package edgedrnn_pkg;

  // Fixed-point formats
  localparam int unsigned ACT_W  = 16;  // activation / delta width (paper: 16 bit)
  localparam int unsigned ACT_FRAC = 8; // fractional bits of activations
  localparam int unsigned W_W    = 8;   // weight width (paper: 8 bit)
  localparam int unsigned W_FRAC = 6;   // fractional bits of weights
  localparam int unsigned ACC_W  = 32;  // memory-term accumulator width
  localparam int unsigned NUM_PE = 8;   // MAC units (paper: 8)
  localparam int unsigned BUS_W  = NUM_PE * W_W; // one DRAM beat = one weight per MAC
  localparam int unsigned BEAT_BYTES = BUS_W / 8;
  localparam int unsigned ADDR_W = 32;

  // Network layers of the RNN controller (Fig. 3): two DeltaGRU layers and an FC layer
  localparam int unsigned NUM_LAYERS = 3;
  localparam int unsigned LAYER_FC = 2;

  localparam logic signed [ACT_W-1:0] ONE_Q = 16'sd1 <<< ACT_FRAC; // 1.0 in Q8.8

  typedef logic signed [ACT_W-1:0] act_t;
  typedef logic signed [W_W-1:0]   wgt_t;
  typedef logic signed [ACC_W-1:0] acc_t;

  // One non-zero delta: which column of the weight matrix it selects, and its value
  typedef struct packed {
    logic [15:0] col;
    act_t        delta;
  } delta_item_t;

  // Saturate a wide signed value to an activation
  function automatic act_t sat_act(input logic signed [ACC_W-1:0] v);
    if (v > 32767)       return 16'sh7fff;
    else if (v < -32768) return 16'sh8000;
    else                 return act_t'(v);
  endfunction

  // Memory term (8+W_FRAC fractional bits) -> Q8.8 with saturation
  function automatic act_t acc_to_act(input acc_t a);
    return sat_act(a >>> W_FRAC);
  endfunction

  // Piecewise-linear sigmoid, Q8.8 in, Q8.8 out (0..256)
  function automatic act_t sigmoid_q(input logic signed [ACT_W:0] x);
    logic [ACT_W:0] a;
    logic [ACT_W:0] y;
    a = x[ACT_W] ? (ACT_W+1)'(-x) : (ACT_W+1)'(x);
    if (a >= 17'd1280)      y = 17'd256;             // |x| >= 5
    else if (a >= 17'd608)  y = (a >> 5) + 17'd216;  // 2.375 <= |x| < 5
    else if (a >= 17'd256)  y = (a >> 3) + 17'd160;  // 1 <= |x| < 2.375
    else                    y = (a >> 2) + 17'd128;  // |x| < 1
    if (x[ACT_W]) y = 17'd256 - y;
    return act_t'(y);
  endfunction

  // tanh(x) = 2*sigmoid(2x) - 1, Q8.8 in, Q8.8 out (-256..256)
  function automatic act_t tanh_q(input act_t x);
    logic signed [ACT_W:0] x2;
    act_t s;
    x2 = {x, 1'b0};
    s  = sigmoid_q(x2);
    return act_t'((s <<< 1) - ONE_Q);
  endfunction

endpackage
