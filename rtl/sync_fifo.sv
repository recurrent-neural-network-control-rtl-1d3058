// sync_fifo: single-clock first-in first-out buffer.
//
// Holds DEPTH words of type T in a circular array with read and write
// pointers and an occupancy counter. Write when wr_valid && wr_ready (not
// full); read when rd_valid && rd_ready (not empty). The head word is shown
// on rd_data without a read delay (first-word fall-through). A write and a
// read in the same cycle are both allowed, except that
// a full FIFO refuses the write even when it is read in that cycle.
// In EdgeDRNN it holds the list of non-zero deltas waiting for their weight
// columns; the buffer is this design's choice, the paper does not describe one.
module sync_fifo #(
  parameter type         T     = logic [31:0],
  parameter int unsigned DEPTH = 16
) (
  input  logic clk,
  input  logic rst_n,
  input  logic clear,
  input  logic wr_valid,
  output logic wr_ready,
  input  T     wr_data,
  output logic rd_valid,
  input  logic rd_ready,
  output T     rd_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T mem [DEPTH];
  logic [PW-1:0] wp, rp;

  assign wr_ready = (count != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign rd_valid = (count != '0);
  assign rd_data  = mem[rp];

  wire do_wr = wr_valid && wr_ready;
  wire do_rd = rd_valid && rd_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else if (clear) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (do_wr) wp <= (wp == PW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (do_rd) rp <= (rp == PW'(DEPTH-1)) ? '0 : rp + 1'b1;
      if (do_wr && !do_rd)      count <= count + 1'b1;
      else if (do_rd && !do_wr) count <= count - 1'b1;
    end
  end

  always_ff @(posedge clk) if (do_wr) mem[wp] <= wr_data;

  a_no_ovf: assert property (@(posedge clk) disable iff (!rst_n) 32'(count) <= DEPTH);

endmodule
