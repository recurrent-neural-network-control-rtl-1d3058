// tb_sync_fifo: random pushes and pops of delta items against a queue model.
// Checks data order, full/empty flags, occupancy count and clear.
module tb_sync_fifo;
  import edgedrnn_pkg::*;
  localparam int DEPTH = 5;

  logic clk = 0, rst_n = 0, clear = 0;
  always #5 clk = ~clk;
  logic wr_valid = 0, wr_ready, rd_valid, rd_ready = 0;
  delta_item_t wr_data = '0, rd_data;
  logic [$clog2(DEPTH+1)-1:0] count;

  sync_fifo #(.T(delta_item_t), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0, n_full = 0, n_empty = 0;
  delta_item_t model[$];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 4000; n++) begin
      bit w, r;
      @(negedge clk);
      if (n == 2000) begin
        clear = 1; @(negedge clk); clear = 0; model.delete();
      end
      // phases biased to fill and to drain
      w = ((n / 200) % 2) ? ($urandom_range(3) == 0) : ($urandom_range(3) != 0);
      r = ((n / 200) % 2) ? ($urandom_range(3) != 0) : ($urandom_range(3) == 0);
      wr_valid = w; rd_ready = r;
      wr_data  = '{col: 16'($urandom), delta: act_t'($urandom)};
      #1;
      check(int'(count) == model.size(), "count");
      check(wr_ready == (model.size() < DEPTH), "wr_ready = not full");
      check(rd_valid == (model.size() > 0), "rd_valid = not empty");
      if (model.size() == DEPTH) n_full++;
      if (model.size() == 0) n_empty++;
      if (rd_valid) check(rd_data == model[0], "head data");
      @(posedge clk);
      if (rd_valid && rd_ready) void'(model.pop_front());
      if (w && model.size() < DEPTH + ((rd_valid && rd_ready) ? 1 : 0) && wr_ready) model.push_back(wr_data);
    end
    check(n_full > 10 && n_empty > 10, "full and empty both reached");
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
