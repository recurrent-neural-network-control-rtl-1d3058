// tb_mac_array: random weight beats and deltas for GRU and FC layers against
// an integer model of the memory terms. Checks the row-to-accumulator mapping
// (r, u, candidate input part vs recurrent part), that padding rows are not
// written, that all 8 MACs work in the same cycle, and that 'clear' empties
// all memory terms. Reads every neuron back through the read port.
module tb_mac_array;
  import edgedrnn_pkg::*;
  localparam int MM = 16, NI = 5, Q = 2;

  logic clk = 0, rst_n = 0, clear = 0, clearing;
  always #5 clk = ~clk;
  logic [1:0] layer = 0; logic is_fc = 0;
  logic [15:0] in_size = NI, hid = MM, rows = 3 * MM;
  logic w_valid = 0, w_ready; logic [63:0] w_data = 0; delta_item_t w_item = '0; logic [7:0] w_beat = 0;
  logic [1:0] rd_layer = 0; logic [15:0] rd_idx = 0;
  acc_t rd_r, rd_u, rd_cx, rd_ch;

  mac_array #(.M_MAX(MM)) dut (.*);

  int checks = 0, failures = 0;
  int model [3][4 * MM];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic beat(int l, int col, int b, int d);
    int isz, nrows;
    isz = (l == 0) ? NI : MM;
    nrows = (l == 2) ? Q : 3 * MM;
    @(negedge clk);
    layer = 2'(l); is_fc = (l == 2); in_size = 16'(isz); hid = (l == 2) ? 16'(Q) : 16'(MM); rows = 16'(nrows);
    w_valid = 1; w_item = '{col: 16'(col), delta: act_t'(d)}; w_beat = 8'(b);
    for (int p = 0; p < 8; p++) begin
      int w, r, a;
      w = int'($urandom_range(255)) - 128;
      w_data[8*p +: 8] = 8'(w);
      r = b * 8 + p;
      a = r;
      if (l != 2 && r >= 2 * MM && col > isz) a = r + MM;
      if (r < nrows) model[l][a] += w * d;
    end
    @(posedge clk); #1 w_valid = 0;
  endtask

  task automatic readback(int l);
    int h;
    h = (l == 2) ? Q : MM;
    for (int k = 0; k < h; k++) begin
      @(negedge clk);
      rd_layer = 2'(l); rd_idx = 16'(k);
      layer = 2'(l); is_fc = (l == 2); hid = 16'(h);
      #1;
      if (l == 2) check(rd_r == model[2][k], $sformatf("FC acc %0d: %0d vs %0d", k, rd_r, model[2][k]));
      else begin
        check(rd_r == model[l][k] && rd_u == model[l][k + MM], $sformatf("L%0d r/u %0d", l, k));
        check(rd_cx == model[l][k + 2 * MM] && rd_ch == model[l][k + 3 * MM], $sformatf("L%0d cx/ch %0d: %0d/%0d vs %0d/%0d", l, k, rd_cx, rd_ch, model[l][k + 2 * MM], model[l][k + 3 * MM]));
      end
    end
  endtask

  initial begin
    foreach (model[l, i]) model[l][i] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    check(clearing && !w_ready, "clear sweep after reset");
    wait (!clearing);
    for (int rep = 0; rep < 2; rep++) begin
      for (int n = 0; n < 60; n++) begin
        int l, col, d, ncols, nb;
        l = $urandom_range(2);
        ncols = (l == 0) ? NI + 1 + MM : ((l == 1) ? 2 * MM + 1 : MM + 1);
        nb = (l == 2) ? 1 : 3 * MM / 8;
        col = $urandom_range(ncols - 1);
        d = int'($urandom_range(4000)) - 2000;
        for (int b = 0; b < nb; b++) beat(l, col, b, d);
      end
      for (int l = 0; l < 3; l++) readback(l);
      if (rep == 0) begin
        @(negedge clk); clear = 1; @(negedge clk); clear = 0;
        #1 check(clearing, "clearing after clear");
        repeat (3 * MM / 8 - 1) @(negedge clk);
        #1 check(clearing, "clear sweep lasts NUM_LAYERS*M/8 cycles");
        @(negedge clk); #1 check(!clearing, "clear sweep ends");
        foreach (model[l, i]) model[l][i] = 0;
        readback(0);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
