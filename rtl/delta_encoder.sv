// delta_encoder: the temporal-sparsity front end of DeltaGRU.
//
// For every activation that is presented (one per cycle) it forms the change
// against the value that last fired in the same position,
//   d = x - x_ref,
// and passes (column, d) on only when |d| >= threshold and d != 0. When a
// delta fires, the reference moves by d; when it does not fire, the reference
// is kept, so small changes add up until they cross the threshold. Elements
// that do not fire cost no weight fetch and no MAC downstream.
//
// References are kept per layer and per weight-matrix column in NUM_LAYERS
// memories of MAX_COLS Q8.8 words (one write, one read port each). Reset and
// 'clear' (start of a new sequence) zero them with a sweep of MAX_COLS cycles,
// during which 'clearing' is high and no input is accepted. The bias of a layer is treated as an extra input column
// that holds 1.0: it fires once after a clear, and so loads the bias into the
// memory terms.
//
// Interface: valid/ready in, valid/ready out. The datapath is combinational:
// an input that does not fire is consumed at once, an input that fires waits
// for out_ready. References update on the accepting clock edge.
// The delta rule follows the paper; widths, the saturation of d to 16 bits and
// the bias-as-column trick are this design's choices.
module delta_encoder
  import edgedrnn_pkg::*;
#(
  parameter int unsigned MAX_COLS = 257
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  output logic        clearing,
  // activation in
  input  logic        in_valid,
  output logic        in_ready,
  input  logic [1:0]  in_layer,
  input  logic [15:0] in_col,
  input  act_t        in_val,
  input  act_t        in_thr,
  // fired delta out
  output logic        out_valid,
  input  logic        out_ready,
  output delta_item_t out_item
);

  localparam int unsigned CW = $clog2(MAX_COLS);
  wire [CW-1:0]          col_i = in_col[CW-1:0];
  act_t                  ref_q;
  act_t                  ref_rd [NUM_LAYERS];
  logic [CW-1:0]         clr_addr;
  logic signed [ACT_W:0] diff;
  act_t                  dsat;
  logic [ACT_W:0]        dabs;
  logic                  fire;

  always_comb begin
    ref_q = ref_rd[in_layer];
    diff  = (ACT_W+1)'(in_val) - (ACT_W+1)'(ref_q);
    dsat  = sat_act(ACC_W'(diff));
    dabs  = dsat[ACT_W-1] ? (ACT_W+1)'(-(ACT_W+1)'(dsat)) : (ACT_W+1)'(dsat);
    fire  = (dsat != '0) && (dabs >= (ACT_W+1)'(in_thr));
  end

  assign out_valid      = in_valid && !clearing && fire;
  assign in_ready       = !clearing && (!fire || out_ready);
  assign out_item.col   = in_col;
  assign out_item.delta = dsat;

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      clearing <= 1'b1;
      clr_addr <= '0;
    end else if (clearing) begin
      if (clr_addr == CW'(MAX_COLS - 1)) clearing <= 1'b0;
      else                               clr_addr <= clr_addr + 1'b1;
    end
  end

  for (genvar l = 0; l < NUM_LAYERS; l++) begin : g_layer
    act_t ref_mem [MAX_COLS];
    always_ff @(posedge clk) begin
      if (clearing)
        ref_mem[clr_addr] <= '0;
      else if (in_valid && in_ready && fire && in_layer == 2'(l))
        ref_mem[col_i] <= act_t'(ref_q + dsat);
    end
    assign ref_rd[l] = ref_mem[col_i];
  end

  // Thresholds are magnitudes
  a_thr_pos: assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> !in_thr[ACT_W-1]);
  a_col_rng: assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> 32'(in_col) < MAX_COLS);

endmodule
