// io_manager: moves network inputs and outputs between the CPU and EdgeDRNN.
//
// Input side: the CPU streams 16-bit words (s_valid/s_ready/s_data). N_IN
// consecutive words form one input frame x_t; when complete, the frame is
// offered to the accelerator (x_valid) and handed over on x_ready, after which
// the next frame can already be collected while the accelerator computes.
// Words are taken only while 'enable' is set.
// Output side: a finished output frame y_t (Q words) is taken from the
// accelerator (y_valid/y_ready) into an output buffer and streamed to the CPU
// word by word (m_valid/m_ready/m_data), with m_last on the Q-th word.
// 'clear' (new sequence) drops partly collected and unsent frames.
// The paper names the block and its place between CPU and EdgeDRNN; the
// stream protocol and buffering are this design's choices.
module io_manager
  import edgedrnn_pkg::*;
#(
  parameter int unsigned N_IN = 5,
  parameter int unsigned Q    = 2
) (
  input  logic clk,
  input  logic rst_n,
  input  logic clear,
  input  logic enable,
  // from the CPU
  input  logic s_valid,
  output logic s_ready,
  input  act_t s_data,
  // to the accelerator
  output logic x_valid,
  input  logic x_ready,
  output act_t x_data [N_IN],
  // from the accelerator
  input  logic y_valid,
  output logic y_ready,
  input  act_t y_data [Q],
  // to the CPU
  output logic m_valid,
  input  logic m_ready,
  output act_t m_data,
  output logic m_last
);

  localparam int unsigned NW = $clog2(N_IN + 1);
  localparam int unsigned QW = $clog2(Q + 1);

  logic [NW-1:0] in_cnt;
  logic          in_full;
  logic [QW-1:0] out_cnt;
  logic          out_busy;
  act_t          out_buf [Q];

  assign s_ready = enable && !in_full;
  assign x_valid = in_full;
  assign y_ready = !out_busy;
  assign m_valid = out_busy;
  always_comb begin
    m_data = out_buf[0];
    for (int i = 1; i < Q; i++)
      if (out_cnt == QW'(i)) m_data = out_buf[i];
  end
  assign m_last  = (out_cnt == QW'(Q - 1));

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      in_cnt   <= '0;
      in_full  <= 1'b0;
      out_cnt  <= '0;
      out_busy <= 1'b0;
      for (int i = 0; i < N_IN; i++) x_data[i] <= '0;
      for (int i = 0; i < Q; i++) out_buf[i] <= '0;
    end else begin
      if (s_valid && s_ready) begin
        x_data[in_cnt % NW'(N_IN)] <= s_data;
        if (in_cnt == NW'(N_IN - 1)) begin
          in_cnt  <= '0;
          in_full <= 1'b1;
        end else begin
          in_cnt <= in_cnt + 1'b1;
        end
      end
      if (x_valid && x_ready) in_full <= 1'b0;
      if (y_valid && y_ready) begin
        out_buf  <= y_data;
        out_busy <= 1'b1;
        out_cnt  <= '0;
      end
      if (m_valid && m_ready) begin
        if (m_last) out_busy <= 1'b0;
        else        out_cnt  <= out_cnt + 1'b1;
      end
    end
  end

  a_stream_hold: assert property (@(posedge clk) disable iff (!rst_n || clear)
    m_valid && !m_ready |=> m_valid && $stable(m_data));

endmodule
