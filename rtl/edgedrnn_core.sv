// edgedrnn_core: the EdgeDRNN accelerator running the RNN controller network.
//
// Network (fixed by the controller it runs): a DeltaGRU layer with N_IN inputs
// and M neurons, a second DeltaGRU layer with M neurons, and a fully connected
// layer with Q outputs. One input frame x_t gives one output frame y_t; the
// hidden states and memory terms persist between frames until 'seq_reset'.
//
// Per layer the controller runs three phases:
//   SCAN   walk the input columns of the layer: the layer input (x_t for layer
//          0, the new hidden state of the layer below otherwise), a bias
//          column that holds 1.0, and for GRU layers the layer's own previous
//          hidden state. Each value goes through the delta encoder; the deltas
//          that fire are queued in the delta FIFO. At the same time the
//          parameter fetcher turns queued deltas into DRAM bursts and the MAC
//          array accumulates the returning weight columns.
//   DRAIN  wait until the FIFO is empty and no burst is outstanding.
//   ACT    one neuron per cycle: read its memory terms, compute gates and the
//          new hidden state (or the FC output) in gru_act_unit, store it.
// After the FC layer the output frame is offered on y_valid/y_ready.
//
// Thresholds: thx applies to the network input, thh to every hidden-state
// vector (recurrent inputs and inputs of the next layer); the bias column uses
// threshold 0. Weight layout in DRAM per layer: see parameter_fetcher; a GRU
// column has 3M rows (r, u, c stacked), an FC column Q rows padded to one beat.
//
// Timing: SCAN takes one cycle per column plus stalls when the delta FIFO is
// full; each fired delta costs ceil(rows/8) beats of the DRAM port, which is
// the bottleneck; ACT takes one cycle per neuron. 'latency' reports the cycles
// from accepting a frame to offering its output; 'nz_deltas' the deltas that
// fired in that frame.
// Layer sizes, the 8 MACs, 16-bit activations and 8-bit weights follow the
// paper; the phase structure and all control details are this design's choices.
module edgedrnn_core
  import edgedrnn_pkg::*;
#(
  parameter int unsigned N_IN        = 5,    // network inputs (paper: N = 5)
  parameter int unsigned M           = 128,  // neurons per GRU layer (paper: M = 128)
  parameter int unsigned Q           = 2,    // network outputs (paper: Q = 2)
  parameter int unsigned FIFO_DEPTH  = 16,
  parameter int unsigned OUTSTANDING = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration
  input  logic              seq_reset,
  input  act_t              thx,
  input  act_t              thh,
  input  logic [ADDR_W-1:0] w_base [NUM_LAYERS],
  // input frame
  input  logic              x_valid,
  output logic              x_ready,
  input  act_t              x_data [N_IN],
  // output frame
  output logic              y_valid,
  input  logic              y_ready,
  output act_t              y_data [Q],
  // DRAM read port
  output logic              ar_valid,
  input  logic              ar_ready,
  output logic [ADDR_W-1:0] ar_addr,
  output logic [7:0]        ar_len,
  input  logic              r_valid,
  output logic              r_ready,
  input  logic [BUS_W-1:0]  r_data,
  input  logic              r_last,
  // status
  output logic              busy,
  output logic [31:0]       latency,
  output logic [31:0]       nz_deltas,
  output logic [31:0]       steps,
  output logic              fifo_full_stall
);

  localparam int unsigned MAX_COLS = (N_IN > M ? N_IN : M) + 1 + M;
  localparam int unsigned GRU_BEATS = (3 * M + NUM_PE - 1) / NUM_PE;
  localparam int unsigned FC_BEATS  = (Q + NUM_PE - 1) / NUM_PE;
  localparam int unsigned NI = (N_IN > 1) ? $clog2(N_IN) : 1;
  localparam int unsigned MI = (M > 1) ? $clog2(M) : 1;
  localparam int unsigned QI = (Q > 1) ? $clog2(Q) : 1;

  typedef enum logic [2:0] {S_IDLE, S_SCAN, S_DRAIN, S_ACT, S_OUT} state_t;
  state_t state;

  logic [1:0]  layer;
  logic [15:0] col, k;
  act_t        x_buf [N_IN];
  act_t        h_mem [2][M];
  act_t        y_buf [Q];

  // ---------------- layer context ----------------
  logic        is_fc;
  logic [15:0] in_size, hid, rows, ncols;
  logic [7:0]  beats;
  always_comb begin
    is_fc   = (layer == 2'(LAYER_FC));
    in_size = (layer == 2'd0) ? 16'(N_IN) : 16'(M);
    hid     = is_fc ? 16'(Q) : 16'(M);
    rows    = is_fc ? 16'(Q) : 16'(3 * M);
    beats   = is_fc ? 8'(FC_BEATS) : 8'(GRU_BEATS);
    ncols   = is_fc ? 16'(M + 1) : in_size + 16'd1 + 16'(M);
  end

  // ---------------- column value for the delta encoder ----------------
  act_t enc_val, enc_thr;
  logic [15:0] rec_col;
  assign rec_col = col - in_size - 16'd1;
  always_comb begin
    if (col < in_size) begin
      enc_val = (layer == 2'd0) ? x_buf[col[NI-1:0]] : h_mem[!layer[0]][col[MI-1:0]];
      enc_thr = (layer == 2'd0) ? thx : thh;
    end else if (col == in_size) begin
      enc_val = ONE_Q;
      enc_thr = '0;
    end else begin
      enc_val = h_mem[layer[0]][rec_col[MI-1:0]];
      enc_thr = thh;
    end
  end

  // ---------------- datapath ----------------
  logic        enc_valid, enc_ready;
  logic        d_valid, d_ready, q_valid, q_ready;
  delta_item_t d_item, q_item;
  logic [$clog2(FIFO_DEPTH+1)-1:0] q_count;
  logic        w_valid, w_ready;
  logic [BUS_W-1:0] w_data;
  delta_item_t w_item;
  logic [7:0]  w_beat;
  logic        fetch_idle;

  assign enc_valid = (state == S_SCAN);

  logic enc_clearing;
  delta_encoder #(.MAX_COLS(MAX_COLS)) u_enc (
    .clk, .rst_n, .clear(seq_reset), .clearing(enc_clearing),
    .in_valid(enc_valid), .in_ready(enc_ready),
    .in_layer(layer), .in_col(col), .in_val(enc_val), .in_thr(enc_thr),
    .out_valid(d_valid), .out_ready(d_ready), .out_item(d_item)
  );

  sync_fifo #(.T(delta_item_t), .DEPTH(FIFO_DEPTH)) u_delta_fifo (
    .clk, .rst_n, .clear(seq_reset),
    .wr_valid(d_valid), .wr_ready(d_ready), .wr_data(d_item),
    .rd_valid(q_valid), .rd_ready(q_ready), .rd_data(q_item),
    .count(q_count)
  );

  parameter_fetcher #(.OUTSTANDING(OUTSTANDING)) u_fetch (
    .clk, .rst_n, .clear(seq_reset),
    .layer_base(w_base[layer]), .beats,
    .d_valid(q_valid), .d_ready(q_ready), .d_item(q_item),
    .ar_valid, .ar_ready, .ar_addr, .ar_len,
    .r_valid, .r_ready, .r_data, .r_last,
    .w_valid, .w_ready, .w_data, .w_item, .w_beat,
    .idle(fetch_idle)
  );

  acc_t m_r, m_u, m_cx, m_ch;
  logic mac_clearing;
  mac_array #(.M_MAX(M > Q ? M : Q)) u_mac (
    .clk, .rst_n, .clear(seq_reset), .clearing(mac_clearing),
    .layer, .is_fc, .in_size, .hid, .rows,
    .w_valid, .w_ready, .w_data, .w_item, .w_beat,
    .rd_layer(layer), .rd_idx(k),
    .rd_r(m_r), .rd_u(m_u), .rd_cx(m_cx), .rd_ch(m_ch)
  );

  act_t h_prev, h_new;
  assign h_prev = is_fc ? act_t'(0) : h_mem[layer[0]][k[MI-1:0]];

  gru_act_unit u_act (
    .is_fc, .m_r, .m_u, .m_cx, .m_ch, .h_prev,
    .h_new, .gate_r(), .gate_u(), .cand()
  );

  assign fifo_full_stall = d_valid && !d_ready;

  // ---------------- controller ----------------
  logic [31:0] lat_cnt, nz_cnt;

  assign x_ready = (state == S_IDLE) && !seq_reset && !mac_clearing && !enc_clearing;
  assign y_valid = (state == S_OUT);
  assign y_data  = y_buf;
  assign busy    = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n || seq_reset) begin
      state <= S_IDLE;
      layer <= '0;
      col   <= '0;
      k     <= '0;
      for (int l = 0; l < 2; l++)
        for (int i = 0; i < M; i++) h_mem[l][i] <= '0;
      for (int i = 0; i < Q; i++) y_buf[i] <= '0;
      for (int i = 0; i < N_IN; i++) x_buf[i] <= '0;
      lat_cnt <= '0;
      nz_cnt  <= '0;
      if (!rst_n) begin
        latency   <= '0;
        nz_deltas <= '0;
        steps     <= '0;
      end
    end else begin
      if (state != S_IDLE && state != S_OUT) lat_cnt <= lat_cnt + 1;
      if (d_valid && d_ready) nz_cnt <= nz_cnt + 1;
      unique case (state)
        S_IDLE: if (x_valid && x_ready) begin
          x_buf   <= x_data;
          layer   <= '0;
          col     <= '0;
          lat_cnt <= 32'd1;
          nz_cnt  <= '0;
          state   <= S_SCAN;
        end
        S_SCAN: if (enc_ready) begin
          if (col == ncols - 16'd1) begin
            col   <= '0;
            state <= S_DRAIN;
          end else begin
            col <= col + 16'd1;
          end
        end
        S_DRAIN: if (q_count == '0 && !q_valid && !d_valid && fetch_idle) begin
          k     <= '0;
          state <= S_ACT;
        end
        S_ACT: begin
          if (is_fc) y_buf[k[QI-1:0]] <= h_new;
          else       h_mem[layer[0]][k[MI-1:0]] <= h_new;
          if (k == hid - 16'd1) begin
            k <= '0;
            if (is_fc) begin
              state     <= S_OUT;
              latency   <= lat_cnt;
              nz_deltas <= nz_cnt;
            end else begin
              layer <= layer + 2'd1;
              state <= S_SCAN;
            end
          end else begin
            k <= k + 16'd1;
          end
        end
        S_OUT: if (y_ready) begin
          steps <= steps + 1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_m_mult8: assert property (@(posedge clk) M % NUM_PE == 0);
  a_seq_reset_idle: assert property (@(posedge clk) disable iff (!rst_n) seq_reset |-> state == S_IDLE || state == S_OUT);

  a_no_fetch_outside_scan: assert property (@(posedge clk) disable iff (!rst_n || seq_reset)
    (state == S_ACT || state == S_OUT || state == S_IDLE) |-> fetch_idle && !q_valid);

endmodule
