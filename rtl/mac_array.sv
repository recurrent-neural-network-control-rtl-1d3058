// mac_array: the NUM_PE (8) multiply-accumulate units and the memory terms.
//
// DeltaGRU does not multiply weights with activations but with their
// changes, and keeps the running sums ("memory terms") from step to step:
//   M += W[:, c] * delta_c      for every non-zero delta c.
// Each beat from the parameter fetcher carries NUM_PE 8-bit weights of one
// column (rows beat*NUM_PE .. beat*NUM_PE+NUM_PE-1) together with the delta
// they multiply. MAC unit p forms weight[p] * delta (8 x 16 bit) and adds it,
// at full precision, to the memory term of its row, all in one cycle.
//
// Memory terms of a GRU layer with H neurons, per neuron k:
//   M_r (reset gate), M_u (update gate), M_cx (candidate, input part) and
//   M_ch (candidate, recurrent part).
// Weight rows [0,3H) are stacked r, u, c. A candidate row goes to M_cx when
// the column is an input or the bias (col <= in_size) and to M_ch when it is a
// hidden state (col > in_size), because the reset gate scales only the
// recurrent part. For the FC layer (is_fc) row k goes to M_r of output k;
// rows at or beyond 'rows' are padding and are not written.
//
// Storage: since H is a multiple of 8, row k of every term is always handled
// by MAC unit k mod 8. Each MAC unit therefore owns four small memories (one
// per term), NUM_LAYERS*M_MAX/8 words deep, addressed by layer and k/8, each
// with one write port and two read ports (accumulate and read-out). These map
// onto block RAM rather than a large register file.
//
// Read port: the four terms of neuron rd_idx of layer rd_layer, combinational.
// Clearing (reset or 'clear') sweeps all addresses, one per cycle, taking
// NUM_LAYERS*M_MAX/8 cycles; 'clearing' is high meanwhile and no beat may be
// sent. w_ready is 1 otherwise: a beat is absorbed every cycle.
// The 8 MACs and the 16/8-bit operand widths are the paper's; the accumulator
// width, the split candidate term and the banking are this design's choices.
module mac_array
  import edgedrnn_pkg::*;
#(
  parameter int unsigned M_MAX = 128   // largest layer (paper: M = 128)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  output logic              clearing,
  // layer context
  input  logic [1:0]        layer,
  input  logic              is_fc,
  input  logic [15:0]       in_size,   // number of input columns before the bias column
  input  logic [15:0]       hid,       // neurons of the layer (H)
  input  logic [15:0]       rows,      // weight rows: 3H for GRU, Q for FC
  // weight beats
  input  logic              w_valid,
  output logic              w_ready,
  input  logic [BUS_W-1:0]  w_data,
  input  delta_item_t       w_item,
  input  logic [7:0]        w_beat,
  // memory-term read port
  input  logic [1:0]        rd_layer,
  input  logic [15:0]       rd_idx,
  output acc_t              rd_r,
  output acc_t              rd_u,
  output acc_t              rd_cx,
  output acc_t              rd_ch
);

  localparam int unsigned MB    = (M_MAX + NUM_PE - 1) / NUM_PE;  // words per layer per bank
  localparam int unsigned BD    = NUM_LAYERS * MB;                // bank depth
  localparam int unsigned AW    = (BD > 1) ? $clog2(BD) : 1;
  localparam int unsigned PSH   = $clog2(NUM_PE);

  logic          hcol;
  logic [AW-1:0] clr_addr;
  logic [AW-1:0] wr_addr [NUM_PE];
  logic [1:0]    wr_term [NUM_PE];
  logic          wen     [NUM_PE];
  acc_t          prod    [NUM_PE];
  acc_t          rd_bank [NUM_PE][4];
  logic [AW-1:0] rd_addr;

  assign w_ready = !clearing;
  assign hcol    = (w_item.col > in_size);

  // row -> (term, address) for each MAC unit
  always_comb begin
    for (int p = 0; p < NUM_PE; p++) begin
      logic [15:0] row, local_row;
      row = 16'(w_beat) * 16'(NUM_PE) + 16'(p);
      wen[p] = w_valid && !clearing && (row < rows);
      if (is_fc || row < hid) begin
        wr_term[p] = 2'd0; local_row = row;
      end else if (row < 16'(2 * hid)) begin
        wr_term[p] = 2'd1; local_row = row - hid;
      end else begin
        wr_term[p] = hcol ? 2'd3 : 2'd2; local_row = row - 16'(2 * hid);
      end
      wr_addr[p] = AW'(32'(layer) * MB + 32'(local_row >> PSH));
      prod[p]    = ACC_W'($signed(w_data[p*W_W +: W_W])) * ACC_W'(w_item.delta);
    end
  end

  // clear sweep
  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      clearing <= 1'b1;
      clr_addr <= '0;
    end else if (clearing) begin
      if (clr_addr == AW'(BD - 1)) clearing <= 1'b0;
      else                         clr_addr <= clr_addr + 1'b1;
    end
  end

  assign rd_addr = AW'(32'(rd_layer) * MB + 32'(rd_idx >> PSH));

  for (genvar p = 0; p < NUM_PE; p++) begin : g_pe
    for (genvar t = 0; t < 4; t++) begin : g_term
      acc_t mem [BD];
      always_ff @(posedge clk) begin
        if (clearing)                      mem[clr_addr]   <= '0;
        else if (wen[p] && wr_term[p] == 2'(t)) mem[wr_addr[p]] <= mem[wr_addr[p]] + prod[p];
      end
      assign rd_bank[p][t] = mem[rd_addr];
    end
  end

  wire [PSH-1:0] rb = rd_idx[PSH-1:0];
  assign rd_r  = rd_bank[rb][0];
  assign rd_u  = rd_bank[rb][1];
  assign rd_cx = rd_bank[rb][2];
  assign rd_ch = rd_bank[rb][3];

  a_hid_mult8: assert property (@(posedge clk) disable iff (!rst_n)
    w_valid && !is_fc |-> hid[PSH-1:0] == '0 && 32'(hid) <= M_MAX);
  a_no_beat_while_clearing: assert property (@(posedge clk) disable iff (!rst_n) clearing |-> !w_valid);

endmodule
