// gru_act_unit: from memory terms to the new hidden state of one neuron.
//
// With the memory terms of neuron k (see mac_array) the GRU equations are
//   r  = sigmoid(M_r)                    reset gate
//   u  = sigmoid(M_u)                    update gate
//   c  = tanh(M_cx + r * M_ch)           candidate state
//   h' = (1 - u) * c + u * h             new hidden state
// Memory terms are first brought to Q8.8 (arithmetic shift by W_FRAC,
// saturated); products of two Q8.8 numbers are shifted right by 8
// (rounding toward minus infinity). Sigmoid and tanh are the piecewise-linear
// functions of edgedrnn_pkg.
// For the FC layer (is_fc) the output is just M_r in Q8.8: the FC layer is a
// plain matrix-vector product plus bias, which the delta scheme already
// accumulates.
// Purely combinational; the controller presents one neuron per cycle and
// registers the result.
// The GRU form follows the cited GRU and DeltaGRU definitions (the paper only
// names them); the arithmetic is this design's choice.
module gru_act_unit
  import edgedrnn_pkg::*;
(
  input  logic is_fc,
  input  acc_t m_r,
  input  acc_t m_u,
  input  acc_t m_cx,
  input  acc_t m_ch,
  input  act_t h_prev,
  output act_t h_new,
  output act_t gate_r,
  output act_t gate_u,
  output act_t cand
);

  act_t  pre_r, pre_u, pre_cx, pre_ch, pre_c;
  logic signed [2*ACT_W-1:0] rch, mix;

  always_comb begin
    pre_r  = acc_to_act(m_r);
    pre_u  = acc_to_act(m_u);
    pre_cx = acc_to_act(m_cx);
    pre_ch = acc_to_act(m_ch);
    gate_r = sigmoid_q((ACT_W+1)'(pre_r));
    gate_u = sigmoid_q((ACT_W+1)'(pre_u));
    rch    = (2*ACT_W)'(gate_r) * (2*ACT_W)'(pre_ch);
    pre_c  = sat_act(ACC_W'(pre_cx) + ACC_W'(rch >>> 8));
    cand   = tanh_q(pre_c);
    mix    = (2*ACT_W)'(ONE_Q - gate_u) * (2*ACT_W)'(cand)
           + (2*ACT_W)'(gate_u) * (2*ACT_W)'(h_prev);
    h_new  = is_fc ? pre_r : act_t'(mix >>> 8);
  end

endmodule
