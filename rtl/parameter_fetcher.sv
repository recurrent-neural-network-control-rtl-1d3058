// parameter_fetcher: streams weight columns from off-chip DRAM to the MAC array.
//
// Weights live in DRAM, column-major: column c of a layer (the weights that a
// delta of input c multiplies) is 'beats' consecutive BUS_W-bit words at
//   layer_base + c * beats * BEAT_BYTES,
// one weight per MAC unit in each word. For every non-zero delta taken from
// the delta list the fetcher issues one burst read (AXI4-style AR channel,
// len = beats-1) and remembers the delta in a small in-order queue, so that
// up to OUTSTANDING bursts are in flight and the DRAM latency is hidden.
// Returning beats (R channel) are paired with the delta at the head of the
// queue and passed to the MAC array together with their beat number; the
// last beat retires the delta.
//
// Timing: an AR is presented from the cycle after the delta is accepted and
// is held until ar_ready. Each R beat is forwarded in the cycle it arrives
// (r_ready = w_ready while a burst is expected).
// The paper names this block and says weights come from DRAM; the burst
// format, layout and queue are this design's choices.
module parameter_fetcher
  import edgedrnn_pkg::*;
#(
  parameter int unsigned OUTSTANDING = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  // layer context (stable while a layer is being processed)
  input  logic [ADDR_W-1:0] layer_base,
  input  logic [7:0]        beats,
  // non-zero deltas in
  input  logic              d_valid,
  output logic              d_ready,
  input  delta_item_t       d_item,
  // DRAM read port (AXI4-like)
  output logic              ar_valid,
  input  logic              ar_ready,
  output logic [ADDR_W-1:0] ar_addr,
  output logic [7:0]        ar_len,
  input  logic              r_valid,
  output logic              r_ready,
  input  logic [BUS_W-1:0]  r_data,
  input  logic              r_last,
  // weight beats out to the MAC array
  output logic              w_valid,
  input  logic              w_ready,
  output logic [BUS_W-1:0]  w_data,
  output delta_item_t       w_item,
  output logic [7:0]        w_beat,
  output logic              idle
);

  logic        pend_wr_ready, pend_valid;
  delta_item_t pend_head;
  logic [7:0]  beat_q;

  // Accept a delta when the AR register is free (or being freed) and the queue has room
  assign d_ready = (!ar_valid || ar_ready) && pend_wr_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ar_valid <= 1'b0;
      ar_addr  <= '0;
      ar_len   <= '0;
    end else if (clear) begin
      ar_valid <= 1'b0;
    end else begin
      if (ar_valid && ar_ready) ar_valid <= 1'b0;
      if (d_valid && d_ready) begin
        ar_valid <= 1'b1;
        ar_addr  <= layer_base + ADDR_W'(d_item.col) * ADDR_W'(beats) * ADDR_W'(BEAT_BYTES);
        ar_len   <= beats - 8'd1;
      end
    end
  end

  sync_fifo #(.T(delta_item_t), .DEPTH(OUTSTANDING)) u_pending (
    .clk, .rst_n, .clear,
    .wr_valid (d_valid && d_ready),
    .wr_ready (pend_wr_ready),
    .wr_data  (d_item),
    .rd_valid (pend_valid),
    .rd_ready (r_valid && r_ready && r_last),
    .rd_data  (pend_head),
    .count    ()
  );

  assign r_ready = pend_valid && w_ready;
  assign w_valid = r_valid && pend_valid;
  assign w_data  = r_data;
  assign w_item  = pend_head;
  assign w_beat  = beat_q;

  always_ff @(posedge clk) begin
    if (!rst_n)                      beat_q <= '0;
    else if (clear)                  beat_q <= '0;
    else if (r_valid && r_ready)     beat_q <= r_last ? 8'd0 : beat_q + 8'd1;
  end

  assign idle = !ar_valid && !pend_valid;

  // AXI rules: AR held until accepted; burst length as requested
  a_ar_stable: assert property (@(posedge clk) disable iff (!rst_n || clear)
    ar_valid && !ar_ready |=> ar_valid && $stable(ar_addr) && $stable(ar_len));
  a_r_len: assert property (@(posedge clk) disable iff (!rst_n || clear)
    r_valid && r_ready |-> (r_last == (beat_q == beats - 8'd1)));
  a_r_expected: assert property (@(posedge clk) disable iff (!rst_n || clear)
    r_valid |-> pend_valid);

endmodule
