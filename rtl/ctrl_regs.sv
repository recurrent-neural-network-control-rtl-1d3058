// ctrl_regs: the register file through which the CPU controls EdgeDRNN.
//
// A simple synchronous register bus (write strobe, word address, 32-bit
// data; read data is combinational from the address). Map, word addresses:
//   0x0 CTRL      W: bit0 = 1 starts a new sequence (one-cycle seq_reset
//                    pulse: hidden states, references and memory terms are
//                    cleared), bit1 = enable (frames are accepted only when
//                    set). R: bit1 = enable, bit2 = busy.
//   0x1 THX       delta threshold of the network input, Q8.8 (reset 4 = 2^2/2^8)
//   0x2 THH       delta threshold of hidden states, Q8.8 (reset 128 = 2^7/2^8)
//   0x3..0x5 WBASE0..2  DRAM byte address of the weights of layer 0, 1 (GRU), 2 (FC)
//   0x6 LATENCY   R: cycles from frame accepted to output ready, last frame
//   0x7 NZDELTA   R: deltas that fired in the last frame
//   0x8 STEPS     R: frames completed since reset
// Writes to unmapped or read-only addresses are ignored; reads of unmapped
// addresses return 0. The reset thresholds are the paper's values; the map
// and the bus are this design's choices.
module ctrl_regs
  import edgedrnn_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // register bus
  input  logic              reg_we,
  input  logic [3:0]        reg_addr,
  input  logic [31:0]       reg_wdata,
  output logic [31:0]       reg_rdata,
  // to the accelerator
  output logic              seq_reset,
  output logic              enable,
  output act_t              thx,
  output act_t              thh,
  output logic [ADDR_W-1:0] w_base [NUM_LAYERS],
  // status from the accelerator
  input  logic              busy,
  input  logic [31:0]       latency,
  input  logic [31:0]       nz_deltas,
  input  logic [31:0]       steps
);

  localparam act_t THX_RESET = 16'sd4;    // 2^2 / 2^8
  localparam act_t THH_RESET = 16'sd128;  // 2^7 / 2^8

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      seq_reset <= 1'b0;
      enable    <= 1'b0;
      thx       <= THX_RESET;
      thh       <= THH_RESET;
      for (int l = 0; l < NUM_LAYERS; l++) w_base[l] <= '0;
    end else begin
      seq_reset <= 1'b0;
      if (reg_we) begin
        unique case (reg_addr)
          4'h0: begin seq_reset <= reg_wdata[0]; enable <= reg_wdata[1]; end
          4'h1: thx <= act_t'(reg_wdata[15:0]);
          4'h2: thh <= act_t'(reg_wdata[15:0]);
          4'h3: w_base[0] <= reg_wdata;
          4'h4: w_base[1] <= reg_wdata;
          4'h5: w_base[2] <= reg_wdata;
          default: ;
        endcase
      end
    end
  end

  always_comb begin
    unique case (reg_addr)
      4'h0: reg_rdata = {29'd0, busy, enable, 1'b0};
      4'h1: reg_rdata = 32'(unsigned'(thx));
      4'h2: reg_rdata = 32'(unsigned'(thh));
      4'h3: reg_rdata = w_base[0];
      4'h4: reg_rdata = w_base[1];
      4'h5: reg_rdata = w_base[2];
      4'h6: reg_rdata = latency;
      4'h7: reg_rdata = nz_deltas;
      4'h8: reg_rdata = steps;
      default: reg_rdata = '0;
    endcase
  end

endmodule
