// tb_delta_encoder: random streams of activations against a software model of
// the delta rule (fire when d != 0 and |d| >= threshold, reference moves by
// the saturated d). Checks every fired (column, delta), that non-firing inputs
// produce nothing, that references are per layer and column, that out_ready
// back-pressure holds the input, and that 'clear' zeroes the references.
module tb_delta_encoder;
  import edgedrnn_pkg::*;
  localparam int COLS = 12;

  logic clk = 0, rst_n = 0, clear = 0, clearing;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  logic [1:0] in_layer = 0; logic [15:0] in_col = 0;
  act_t in_val = 0, in_thr = 0;
  delta_item_t out_item;

  delta_encoder #(.MAX_COLS(COLS)) dut (.*);

  int checks = 0, failures = 0, fired = 0, skipped = 0, bp = 0;
  int refm [3][COLS];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int sat(int v);
    return v > 32767 ? 32767 : (v < -32768 ? -32768 : v);
  endfunction

  initial begin
    foreach (refm[l, c]) refm[l][c] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    #1 check(clearing && !in_ready, "reference clear sweep after reset");
    wait (!clearing);
    for (int n = 0; n < 3000; n++) begin
      int l, c, v, th, d, ad;
      bit f;
      if (n == 1500) begin
        @(negedge clk); in_valid = 0; clear = 1; @(negedge clk); clear = 0;
        repeat (COLS - 1) @(negedge clk);
        #1 check(clearing, "clear sweep lasts MAX_COLS cycles");
        @(negedge clk); #1 check(!clearing, "clear sweep ends");
        foreach (refm[i, j]) refm[i][j] = 0;
      end
      l  = $urandom_range(2);
      c  = $urandom_range(COLS - 1);
      v  = (n % 100 == 7) ? ((n % 200 == 7) ? 32767 : -32768) : refm[l][c] + int'($urandom_range(600)) - 300;
      v  = sat(v);
      th = (n % 3 == 0) ? 0 : ((n % 3 == 1) ? 4 : 128);
      d  = sat(v - refm[l][c]);
      ad = d < 0 ? -d : d;
      f  = (d != 0) && (ad >= th);
      @(negedge clk);
      in_valid = 1; in_layer = 2'(l); in_col = 16'(c); in_val = act_t'(v); in_thr = act_t'(th);
      out_ready = ($urandom_range(3) != 0);
      #1;
      check(out_valid == f, $sformatf("fire decision n=%0d l=%0d c=%0d v=%0d ref=%0d th=%0d", n, l, c, v, refm[l][c], th));
      if (f) begin
        check(int'(out_item.delta) == d && out_item.col == 16'(c), $sformatf("delta value n=%0d", n));
        check(in_ready == out_ready, "ready follows out_ready when firing");
        while (!out_ready) begin
          bp++;
          @(negedge clk); out_ready = 1; #1;
          check(out_valid && int'(out_item.delta) == d, "delta held under back-pressure");
        end
        refm[l][c] += d;
        fired++;
      end else begin
        check(in_ready, "non-firing input consumed");
        skipped++;
      end
      @(posedge clk);
    end
    @(negedge clk); in_valid = 0;
    check(fired > 100 && skipped > 100 && bp > 10, "fired, skipped and back-pressure cases all exercised");
    $display("fired=%0d skipped=%0d backpressure=%0d", fired, skipped, bp);
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
