// edgedrnn_pl: the programmable-logic side of the prosthesis RNN controller.
//
// The RNN controller of the AMPRO3 prosthesis runs on a Zynq system-on-chip:
// the ARM CPU of the processing system talks to the prosthesis computer over
// SPI, and passes each 200 Hz sample to this logic. Here three blocks work
// together:
//   ctrl_regs      registers written by the CPU (sequence reset, enable,
//                  delta thresholds, DRAM addresses of the weights) and status
//                  read back (latency, fired deltas, frames done)
//   io_manager     collects the N_IN = 5 input words of a sample
//                  [e_pk, e_pa, de_pk, de_pa, s] into a frame and returns the
//                  Q = 2 outputs [tau_pk, tau_pa] as a 2-word stream
//   edgedrnn_core  the DeltaGRU accelerator (2 x 128-neuron DeltaGRU + FC),
//                  whose weights come from DDR memory through the AXI-style
//                  read port brought out here
// The CPU, the SPI link and the DDR memory and its controller are outside
// this module; their signals are ports.
// All blocks run on one clock (100 MHz in the described system) with a
// synchronous active-low reset.
module edgedrnn_pl
  import edgedrnn_pkg::*;
#(
  parameter int unsigned N_IN        = 5,
  parameter int unsigned M           = 128,
  parameter int unsigned Q           = 2,
  parameter int unsigned FIFO_DEPTH  = 16,
  parameter int unsigned OUTSTANDING = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  // CPU register bus
  input  logic              reg_we,
  input  logic [3:0]        reg_addr,
  input  logic [31:0]       reg_wdata,
  output logic [31:0]       reg_rdata,
  // CPU input word stream
  input  logic              s_valid,
  output logic              s_ready,
  input  act_t              s_data,
  // CPU output word stream
  output logic              m_valid,
  input  logic              m_ready,
  output act_t              m_data,
  output logic              m_last,
  // DRAM read port (to the DDR controller of the processing system)
  output logic              ar_valid,
  input  logic              ar_ready,
  output logic [ADDR_W-1:0] ar_addr,
  output logic [7:0]        ar_len,
  input  logic              r_valid,
  output logic              r_ready,
  input  logic [BUS_W-1:0]  r_data,
  input  logic              r_last
);

  logic              seq_reset, enable, busy;
  act_t              thx, thh;
  logic [ADDR_W-1:0] w_base [NUM_LAYERS];
  logic [31:0]       latency, nz_deltas, steps;
  logic              x_valid, x_ready, y_valid, y_ready, core_x_ready;
  act_t              x_data [N_IN];
  act_t              y_data [Q];
  logic              fifo_full_stall;

  ctrl_regs u_regs (
    .clk, .rst_n,
    .reg_we, .reg_addr, .reg_wdata, .reg_rdata,
    .seq_reset, .enable, .thx, .thh, .w_base,
    .busy, .latency, .nz_deltas, .steps
  );

  io_manager #(.N_IN(N_IN), .Q(Q)) u_io (
    .clk, .rst_n, .clear(seq_reset), .enable,
    .s_valid, .s_ready, .s_data,
    .x_valid, .x_ready, .x_data,
    .y_valid, .y_ready, .y_data,
    .m_valid, .m_ready, .m_data, .m_last
  );

  assign x_ready = core_x_ready && enable;

  edgedrnn_core #(.N_IN(N_IN), .M(M), .Q(Q), .FIFO_DEPTH(FIFO_DEPTH), .OUTSTANDING(OUTSTANDING)) u_core (
    .clk, .rst_n,
    .seq_reset, .thx, .thh, .w_base,
    .x_valid(x_valid && enable), .x_ready(core_x_ready), .x_data,
    .y_valid, .y_ready, .y_data,
    .ar_valid, .ar_ready, .ar_addr, .ar_len,
    .r_valid, .r_ready, .r_data, .r_last,
    .busy, .latency, .nz_deltas, .steps, .fifo_full_stall
  );

endmodule
